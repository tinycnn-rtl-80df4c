// ff_unit_tb: self-checking test of the FeedForward unit.
//
// A small layer (4-pixel lines, 3 lines per map, 2 input maps, 3 output maps) is
// loaded with two images in turn. A stand-in convolution unit accepts requests
// after random delays and every request is checked: order (output map, row,
// input map), the three lines with zero rows at the top and bottom edges, the
// filter and bias words, and the first/last flags. It also checks that the
// unit refuses input while it feeds and that a load-and-offer takes 5 cycles.
module ff_unit_tb;
  import tinycnn_pkg::*;

  localparam int unsigned W = 4, H = 3, C = 2, O = 3;
  localparam int unsigned SEED = 7, AMP = 500, BAMP = 9000;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, in_ready, cv_valid, cv_ready, cv_first, cv_last, feeding;
  data_t [W-1:0] in_line, cv_line1, cv_line2, cv_line3;
  data_t [8:0] cv_taps;
  bias_t cv_bias;

  int checks = 0, failures = 0;

  ff_unit #(.W(W), .H(H), .C(C), .O(O), .SEED(SEED), .AMP(AMP), .BIAS_AMP(BAMP)) dut (
    .clk, .rst_n, .in_valid, .in_ready, .in_line, .cv_valid, .cv_ready,
    .cv_line1, .cv_line2, .cv_line3, .cv_taps, .cv_bias, .cv_first, .cv_last, .feeding
  );

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int img [C][H][W];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic run_image();
    int last_t, t, first_gap;
    for (int c = 0; c < C; c++) for (int r = 0; r < H; r++) for (int x = 0; x < W; x++)
      img[c][r][x] = int'($urandom % 20000) - 10000;
    // load
    for (int c = 0; c < C; c++)
      for (int r = 0; r < H; r++) begin
        @(negedge clk);
        in_valid = 1;
        for (int x = 0; x < W; x++) in_line[x] = data_t'(img[c][r][x]);
        while (!in_ready) @(negedge clk);
        @(posedge clk);
        #1 in_valid = 0;
      end
    t = $time;
    // feed
    for (int o = 0; o < O; o++)
      for (int r = 0; r < H; r++)
        for (int c = 0; c < C; c++) begin
          int d;
          @(negedge clk);
          d = int'($urandom % 4);
          while (!cv_valid) @(negedge clk);
          if (o == 0 && r == 0 && c == 0) first_gap = ($time - t + 5) / 10;
          check(!in_ready, "input accepted while feeding");
          repeat (d) begin
            @(negedge clk);
            check(cv_valid, "request withdrawn");
          end
          for (int x = 0; x < W; x++) begin
            check(cv_line3[x] == ((r > 0) ? data_t'(img[c][r-1][x]) : '0), "line3");
            check(cv_line2[x] == data_t'(img[c][r][x]), "line2");
            check(cv_line1[x] == ((r < H - 1) ? data_t'(img[c][r+1][x]) : '0), "line1");
          end
          for (int k = 0; k < 9; k++)
            check(cv_taps[k] == data_t'(synth_weight(SEED, (o * C + c) * 9 + k, AMP)), "tap");
          check(cv_bias == bias_t'(synth_weight(SEED + 1, o, BAMP)), "bias");
          check(cv_first == (c == 0) && cv_last == (c == C - 1), "first/last");
          cv_ready = 1;
          @(posedge clk);
          last_t = $time;
          #1 cv_ready = 0;
          if (!(o == O - 1 && r == H - 1 && c == C - 1)) begin
            @(negedge clk);
            while (!cv_valid) @(negedge clk);
            check(($time - last_t + 5) / 10 == 5, "load-to-offer time");
          end
        end
    repeat (3) @(negedge clk);
    check(in_ready && !cv_valid && !feeding, "back to buffering after last request");
    check(first_gap >= 1, "feeding starts after buffering");
  endtask

  initial begin
    in_valid = 0; cv_ready = 0; in_line = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_image();
    run_image();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
