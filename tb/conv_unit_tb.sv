// conv_unit_tb: self-checking test of the 3x3 convolution unit.
//
// A W=8 unit with LANES=3 (so lines are split into uneven lane groups) is given
// output lines accumulated over three input maps, at full and reduced width.
// Every result is compared with a direct 3x3 "same" convolution computed here,
// and the cycles from each accepted request to the result (or to the next
// ready) must be 9*ceil(width/LANES)+1.
module conv_unit_tb;
  import tinycnn_pkg::*;

  localparam int unsigned W = 8;
  localparam int unsigned LANES = 3;
  localparam int unsigned NC = 3;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, in_ready, in_first, in_last, out_valid, out_ready;
  data_t [W-1:0] l1, l2, l3;
  data_t [8:0] taps;
  bias_t bias;
  logic [3:0] width;
  acc_t [W-1:0] out_line;

  int checks = 0, failures = 0;

  conv_unit #(.W(W), .LANES(LANES)) dut (
    .clk, .rst_n, .in_valid, .in_ready, .in_line1(l1), .in_line2(l2), .in_line3(l3),
    .in_taps(taps), .in_bias(bias), .in_first, .in_last, .in_width(width),
    .out_valid, .out_ready, .out_line
  );

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int rnd(int lo, int hi);
    return lo + int'($urandom % (hi - lo + 1));
  endfunction

  longint expect_v [W];

  task automatic run_line(input int wd, input bit stall_out);
    int rows [NC][3][W];
    int tp [NC][9];
    int b;
    int t0, lat, want;
    b = rnd(-100000, 100000);
    for (int c = 0; c < NC; c++) begin
      for (int r = 0; r < 3; r++) for (int x = 0; x < W; x++) rows[c][r][x] = (x < wd) ? rnd(-3000, 3000) : 0;
      for (int t = 0; t < 9; t++) tp[c][t] = rnd(-2000, 2000);
    end
    // reference
    for (int x = 0; x < W; x++) begin
      expect_v[x] = (x < wd) ? longint'(b) : 0;
      if (x < wd)
        for (int c = 0; c < NC; c++)
          for (int ky = 0; ky < 3; ky++)
            for (int kx = 0; kx < 3; kx++) begin
              int xx = x + kx - 1;
              if (xx >= 0 && xx < wd) expect_v[x] += longint'(tp[c][ky*3+kx]) * longint'(rows[c][ky][xx]);
            end
    end
    want = 9 * ((wd + LANES - 1) / LANES) + 1;
    for (int c = 0; c < NC; c++) begin
      @(negedge clk);
      in_valid = 1;
      for (int x = 0; x < W; x++) begin
        l3[x] = data_t'(rows[c][0][x]);
        l2[x] = data_t'(rows[c][1][x]);
        l1[x] = data_t'(rows[c][2][x]);
      end
      for (int t = 0; t < 9; t++) taps[t] = data_t'(tp[c][t]);
      bias = bias_t'(b);
      width = 4'(wd);
      in_first = (c == 0);
      in_last = (c == NC - 1);
      while (!in_ready) @(negedge clk);
      @(posedge clk); t0 = $time;
      @(negedge clk);
      in_valid = 0;
      if (c != NC - 1) begin
        while (!in_ready) @(negedge clk);
        lat = ($time - t0 + 5) / 10;
        checks++;
        if (lat != want) begin failures++; $display("ready latency %0d want %0d", lat, want); end
      end
    end
    while (!out_valid) @(negedge clk);
    lat = ($time - t0 + 5) / 10;
    checks++;
    if (lat != want) begin failures++; $display("result latency %0d want %0d", lat, want); end
    if (stall_out) begin
      out_ready = 0;
      repeat (3) @(negedge clk);
      checks++;
      if (!out_valid || in_ready) begin failures++; $display("result not held"); end
      out_ready = 1;
    end
    for (int x = 0; x < W; x++) begin
      checks++;
      if (out_line[x] != acc_t'(expect_v[x])) begin
        failures++;
        $display("x=%0d got %0d want %0d (width %0d)", x, out_line[x], expect_v[x], wd);
      end
    end
    @(negedge clk);
  endtask

  initial begin
    in_valid = 0; out_ready = 1; in_first = 0; in_last = 0;
    l1 = '0; l2 = '0; l3 = '0; taps = '0; bias = '0; width = 4'(W);
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 6; n++) run_line(W, n == 2);
    for (int n = 0; n < 6; n++) run_line(rnd(1, W), n == 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
