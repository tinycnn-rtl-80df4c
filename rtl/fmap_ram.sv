// fmap_ram: the inter-layer feature-map RAM of a FeedForward unit.
//
// One word is one line of a feature map (W pixels of DATA_W bits); a layer with
// C input maps of H lines needs C*H words, word c*H + r holding line r of map c.
// One write port (used by the buffering state machine) and one read port (used
// by the feeder state machine), both synchronous: rdata shows mem[raddr] one
// clock after a cycle with re high and holds otherwise. Contents are not reset.
module fmap_ram
  import tinycnn_pkg::*;
#(
  parameter int unsigned W     = 32,
  parameter int unsigned DEPTH = 32,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic              clk,
  input  logic              we,
  input  logic [AW-1:0]     waddr,
  input  data_t [W-1:0]     wdata,
  input  logic              re,
  input  logic [AW-1:0]     raddr,
  output data_t [W-1:0]     rdata
);

  logic [W*DATA_W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end

endmodule
