// relu_unit_tb: self-checking test of the ReLU stage.
//
// Random vectors (about half the lanes negative) are pushed through with random
// back-pressure; each output vector must equal max(0, x) lane by lane, arrive in
// order one cycle after acceptance, and `clipped` must pulse exactly for the
// vectors that held a negative lane.
module relu_unit_tb;
  import tinycnn_pkg::*;
  localparam int unsigned N = 6;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, in_ready, out_valid, out_ready, clipped;
  acc_t [N-1:0] in_data, out_data;
  int checks = 0, failures = 0;

  relu_unit #(.N(N), .IW(ACC_W)) dut (.clk, .rst_n, .in_valid, .in_ready, .in_data,
    .out_valid, .out_ready, .out_data, .clipped);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  acc_t [N-1:0] q [$];
  bit           negq [$];
  int sent = 0, got = 0;

  always @(posedge clk) if (rst_n) begin
    if (in_valid && in_ready) begin
      acc_t [N-1:0] e;
      bit neg;
      neg = 0;
      for (int i = 0; i < N; i++) begin
        e[i] = (in_data[i] < 0) ? '0 : in_data[i];
        if (in_data[i] < 0) neg = 1;
      end
      q.push_back(e);
      negq.push_back(neg);
      sent++;
    end
    if (out_valid && out_ready) begin
      acc_t [N-1:0] e;
      e = q.pop_front();
      checks++;
      if (out_data != e) begin failures++; $display("data mismatch"); end
      got++;
    end
  end

  // clipped pulses in the cycle after a vector with a negative lane is accepted
  bit neg_d = 0;
  always @(posedge clk) if (rst_n) begin
    checks++;
    if (clipped != neg_d) begin failures++; $display("clipped flag wrong"); end
    neg_d = 0;
    if (in_valid && in_ready)
      for (int i = 0; i < N; i++) if (in_data[i] < 0) neg_d = 1;
  end

  initial begin
    in_valid = 0; out_ready = 1; in_data = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    while (sent < 300) begin
      @(negedge clk);
      out_ready = ($urandom % 4) != 0;
      if (!in_valid || in_ready) begin
        in_valid = ($urandom % 3) != 0;
        for (int i = 0; i < N; i++)
          in_data[i] = acc_t'(signed'(64'($urandom) << 16) >>> ($urandom % 24)) ^ acc_t'($urandom);
      end
      #2;
    end
    @(negedge clk) in_valid = 0; out_ready = 1;
    repeat (5) @(negedge clk);
    checks++;
    if (got != sent) begin failures++; $display("lost vectors %0d/%0d", got, sent); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
