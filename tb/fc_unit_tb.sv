// fc_unit_tb: self-checking test of the dense unit.
//
// A 24-input, 6-output layer with 3 lanes and 4-value input beats classifies
// three random input vectors, with random back-pressure on the output. Every
// output is compared with b[n] + sum_i w[n][i]*x[i] computed here from the ROM
// contents' definition (weight of neuron g*LANES+l, input i = synth_weight of
// index (g*IN_N+i)*LANES+l). The cycles from the last input beat to the first
// result must be IN_N + 4, and from one result to the next IN_N + 4.
module fc_unit_tb;
  import tinycnn_pkg::*;
  localparam int unsigned IN_N = 24, OUT_N = 6, LANES = 3, IN_LW = 4;
  localparam int unsigned SEED = 21, AMP = 3000, BAMP = 500000;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, in_ready, out_valid, out_ready;
  data_t [IN_LW-1:0] in_data;
  acc_t [LANES-1:0] out_data;
  int checks = 0, failures = 0;

  fc_unit #(.IN_N(IN_N), .OUT_N(OUT_N), .LANES(LANES), .IN_LW(IN_LW), .SEED(SEED),
            .AMP(AMP), .BIAS_AMP(BAMP)) dut (.clk, .rst_n, .in_valid, .in_ready, .in_data,
            .out_valid, .out_ready, .out_data);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int x [IN_N];
    longint e;
    int t0, dt;
    in_valid = 0; out_ready = 0; in_data = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int v = 0; v < 3; v++) begin
      for (int i = 0; i < IN_N; i++) x[i] = int'($urandom % 60000) - 30000;
      for (int k = 0; k < IN_N / IN_LW; k++) begin
        @(negedge clk);
        in_valid = 1;
        for (int j = 0; j < IN_LW; j++) in_data[j] = data_t'(x[k * IN_LW + j]);
        while (!in_ready) @(negedge clk);
        @(posedge clk); t0 = $time;
        #1 in_valid = 0;
      end
      for (int g = 0; g < OUT_N / LANES; g++) begin
        while (!out_valid) @(negedge clk);
        dt = ($time - t0 + 5) / 10;
        checks++;
        if (dt != IN_N + 4) begin failures++; $display("latency %0d want %0d", dt, IN_N + 4); end
        repeat ($urandom % 3) begin
          @(negedge clk);
          checks++;
          if (!out_valid) begin failures++; $display("result dropped"); end
        end
        for (int l = 0; l < LANES; l++) begin
          e = longint'(synth_weight(SEED + 1, g * LANES + l, BAMP));
          for (int i = 0; i < IN_N; i++)
            e += longint'(synth_weight(SEED, (g * IN_N + i) * LANES + l, AMP)) * longint'(x[i]);
          checks++;
          if (out_data[l] != acc_t'(e)) begin
            failures++;
            $display("vec %0d neuron %0d got %0d want %0d", v, g * LANES + l, out_data[l], e);
          end
        end
        out_ready = 1;
        @(posedge clk); t0 = $time;
        #1 out_ready = 0;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
