// precision_adjust_tb: self-checking test of the inter-layer precision adjustment.
//
// For several shift values, random accumulator values (including ones far
// outside the 16-bit range and exact half-way points) go through the unit. The
// expected value is computed here with integer arithmetic: floor((x + 2^(s-1))
// / 2^s), then clamped to [-32768, 32767]; `saturated` must flag the clamped
// vectors. Latency must be one cycle.
module precision_adjust_tb;
  import tinycnn_pkg::*;
  localparam int unsigned N = 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, in_ready, out_valid, out_ready, saturated;
  logic [5:0] shift;
  acc_t [N-1:0] in_data;
  data_t [N-1:0] out_data;
  int checks = 0, failures = 0, nsat = 0;

  precision_adjust #(.N(N)) dut (.clk, .rst_n, .shift, .in_valid, .in_ready, .in_data,
    .out_valid, .out_ready, .out_data, .saturated);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint ref_q(longint x, int s, output bit sat);
    longint r, p;
    p = longint'(1) << s;
    if (s == 0) r = x;
    else begin
      r = x + p / 2;
      // floor division by 2^s
      if (r >= 0) r = r / p;
      else r = -((-r + p - 1) / p);
    end
    sat = 0;
    if (r > 32767) begin r = 32767; sat = 1; end
    if (r < -32768) begin r = -32768; sat = 1; end
    return r;
  endfunction

  initial begin
    int shifts [5] = '{0, 4, 12, 20, 31};
    in_valid = 0; out_ready = 1; in_data = '0; shift = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    foreach (shifts[k]) begin
      shift = 6'(shifts[k]);
      for (int n = 0; n < 60; n++) begin
        longint v [N];
        bit anysat;
        anysat = 0;
        for (int i = 0; i < N; i++) begin
          longint mag;
          mag = longint'(1) << ($urandom % (shifts[k] + 18));
          v[i] = longint'($urandom) % (mag + 1);
          if ($urandom % 2) v[i] = -v[i];
          if (n % 7 == 0 && shifts[k] > 0) v[i] = (longint'($urandom % 100) << shifts[k]) - (longint'(1) << (shifts[k] - 1));
          in_data[i] = acc_t'(v[i]);
        end
        @(negedge clk);
        in_valid = 1;
        @(negedge clk);
        in_valid = 0;
        checks++;
        if (!out_valid) begin failures++; $display("no output after one cycle"); end
        for (int i = 0; i < N; i++) begin
          bit s;
          longint e;
          e = ref_q(v[i], shifts[k], s);
          anysat |= s;
          checks++;
          if (out_data[i] != data_t'(e)) begin
            failures++;
            $display("shift %0d x=%0d got %0d want %0d", shifts[k], v[i], out_data[i], e);
          end
        end
        checks++;
        if (saturated != anysat) begin failures++; $display("saturated flag wrong"); end
        if (anysat) nsat++;
      end
    end
    checks++;
    if (nsat == 0) begin failures++; $display("saturation never exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
