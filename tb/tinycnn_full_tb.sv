// tinycnn_full_tb: end-to-end test of the accelerator with every parameter at
// its default (exclusive mode, one convolution unit per layer).
//
// Two images are classified back to back and every score is compared with the
// golden model in tinycnn_checker, which also requires input stalls, two images
// in flight at once, ReLU clipping and saturation to occur, and no contention.
module tinycnn_full_tb;
  import tinycnn_pkg::*;

  logic clk = 0;
  always #5 clk = ~clk;

  logic rst_n, img_valid, img_ready, res_valid, res_ready;
  logic relu_clipped, saturated, conv_contention;
  logic [3:0] layer_feeding;
  data_t [31:0] img_line;
  data_t [9:0] res_scores;

  tinycnn_top dut (.*);

  tinycnn_checker #(.NIMG(2), .EXPECT_SHARE(1'b0)) chk (.*);

  initial begin
    repeat (20_000_000) @(posedge clk);
    chk.failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", chk.checks, chk.failures);
    $finish;
  end
endmodule
