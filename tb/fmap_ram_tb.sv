// fmap_ram_tb: self-checking test of the feature-map RAM.
//
// Writes random lines to random words while reading others, and checks every
// read against a model memory kept here: the data of the addressed word appears
// one clock after the read, holds while no read is issued, and a write is seen
// by reads of the following cycles.
module fmap_ram_tb;
  import tinycnn_pkg::*;
  localparam int unsigned W = 4, DEPTH = 24;

  logic clk = 0;
  always #5 clk = ~clk;
  logic we, re;
  logic [4:0] waddr, raddr;
  data_t [W-1:0] wdata, rdata;
  int checks = 0, failures = 0;

  fmap_ram #(.W(W), .DEPTH(DEPTH)) dut (.clk, .we, .waddr, .wdata, .re, .raddr, .rdata);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  data_t [W-1:0] model [DEPTH];
  bit written [DEPTH];
  data_t [W-1:0] expect_q;
  bit have_expect = 0;

  initial begin
    we = 0; re = 0; waddr = '0; raddr = '0; wdata = '0;
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      we = 1; waddr = 5'(a);
      for (int x = 0; x < W; x++) wdata[x] = data_t'($urandom);
      @(posedge clk); model[a] = wdata; written[a] = 1;
    end
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      if (have_expect) begin
        checks++;
        if (rdata != expect_q) begin failures++; $display("read mismatch at cycle %0d", n); end
      end
      we = ($urandom % 2);
      waddr = 5'($urandom % DEPTH);
      for (int x = 0; x < W; x++) wdata[x] = data_t'($urandom);
      re = ($urandom % 3) != 0;
      raddr = 5'($urandom % DEPTH);
      @(posedge clk);
      if (re) begin expect_q = model[raddr]; have_expect = 1; end
      if (we) model[waddr] = wdata;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
