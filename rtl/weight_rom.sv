// weight_rom: read-only memory holding one layer's filters, dense weights or biases.
//
// Each word holds LANES values of LANE_W bits, the number of values the consumer
// needs in one cycle (nine taps of a 3x3 filter, one weight per DSP lane of a
// dense layer, or one bias). The read is synchronous: rdata shows mem[addr] one
// clock after a cycle with en high, and holds while en is low, so it maps onto
// FPGA block RAM. As in the original design the ROM is filled when the bitstream
// is built; since no trained model ships with this RTL, the initial block fills
// word a, lane l with tinycnn_pkg::synth_weight(SEED, a*LANES + l, AMP).
module weight_rom
  import tinycnn_pkg::*;
#(
  parameter int unsigned DEPTH  = 288,
  parameter int unsigned LANES  = 9,
  parameter int unsigned LANE_W = 16,
  parameter int unsigned SEED   = 1,
  parameter int unsigned AMP    = 1024,
  localparam int unsigned AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic                          clk,
  input  logic                          en,
  input  logic [AW-1:0]                 addr,
  output logic [LANES-1:0][LANE_W-1:0]  rdata
);

  logic [LANES*LANE_W-1:0] mem [DEPTH];

  initial begin
    for (int unsigned a = 0; a < DEPTH; a++)
      for (int unsigned l = 0; l < LANES; l++)
        mem[a][l*LANE_W +: LANE_W] = LANE_W'(synth_weight(SEED, a * LANES + l, AMP));
  end

  always_ff @(posedge clk) begin
    if (en) rdata <= mem[addr];
  end

endmodule
