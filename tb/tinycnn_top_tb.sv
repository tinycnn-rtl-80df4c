// tinycnn_top_tb: end-to-end test of the accelerator in shared mode.
//
// One convolution unit (32 lanes) serves all four convolution layers through the
// arbiter. Two images are classified and every score is compared with the
// golden model in tinycnn_checker; the test also requires that input stalls,
// overlapping images, ReLU clipping, saturation and contention for the shared
// unit all occurred.
module tinycnn_top_tb;
  import tinycnn_pkg::*;

  logic clk = 0;
  always #5 clk = ~clk;

  logic rst_n, img_valid, img_ready, res_valid, res_ready;
  logic relu_clipped, saturated, conv_contention;
  logic [3:0] layer_feeding;
  data_t [31:0] img_line;
  data_t [9:0] res_scores;

  tinycnn_top #(.SHARED(1'b1)) dut (.*);

  tinycnn_checker #(.NIMG(2), .EXPECT_SHARE(1'b1)) chk (.*);

  initial begin
    repeat (20_000_000) @(posedge clk);
    chk.failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", chk.checks, chk.failures);
    $finish;
  end
endmodule
