// conv_layer: one convolution layer of the network around its convolution unit.
//
// It joins the parts the original design places in every convolution layer:
// the FeedForward unit (input RAM, filter ROM, line registers, buffering and
// feeder state machines), then on the convolution unit's output lines the ReLU
// activation, M x M max pooling and the inter-layer precision adjustment, in
// that order. The convolution unit itself stays outside, on the cv_* (request)
// and rsp_* (result) ports, so that the top level can give each layer a unit of
// its own (exclusive mode) or connect all layers to one shared unit through the
// arbiter (shared mode). rsp_room tells the arbiter that a result would be
// taken at once.
// Input: C maps of H lines of W 16-bit values, map by map. Output: O maps of H/M
// lines of W/M 16-bit values, map by map, in the same format, ready for the next
// layer. Back-pressure from the output stalls the ReLU/pool/adjust pipeline, the
// convolution unit and, through it, the feeder.
module conv_layer
  import tinycnn_pkg::*;
#(
  parameter int unsigned W        = 32,
  parameter int unsigned H        = 32,
  parameter int unsigned C        = 1,
  parameter int unsigned O        = 32,
  parameter int unsigned M        = 2,
  parameter int unsigned SEED     = 1,
  parameter int unsigned AMP      = 2048,
  parameter int unsigned BIAS_AMP = 262144,
  localparam int unsigned OW      = W / M
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic [5:0]      shift,
  input  logic            in_valid,
  output logic            in_ready,
  input  data_t [W-1:0]   in_line,
  output logic            cv_valid,
  input  logic            cv_ready,
  output data_t [W-1:0]   cv_line1,
  output data_t [W-1:0]   cv_line2,
  output data_t [W-1:0]   cv_line3,
  output data_t [8:0]     cv_taps,
  output bias_t           cv_bias,
  output logic            cv_first,
  output logic            cv_last,
  input  logic            rsp_valid,
  output logic            rsp_ready,
  output logic            rsp_room,
  input  acc_t [W-1:0]    rsp_line,
  output logic            out_valid,
  input  logic            out_ready,
  output data_t [OW-1:0]  out_line,
  output logic            feeding,
  output logic            clipped,
  output logic            saturated
);

  logic          act_valid, act_ready;

  // The ReLU stage is empty, so a result delivered now is taken at once.
  assign rsp_room = !act_valid;
  acc_t [W-1:0]  act_line;
  logic          pool_valid, pool_ready;
  acc_t [OW-1:0] pool_line;

  ff_unit #(.W(W), .H(H), .C(C), .O(O), .SEED(SEED), .AMP(AMP), .BIAS_AMP(BIAS_AMP)) u_ff (
    .clk, .rst_n,
    .in_valid, .in_ready, .in_line,
    .cv_valid, .cv_ready, .cv_line1, .cv_line2, .cv_line3, .cv_taps, .cv_bias,
    .cv_first, .cv_last, .feeding
  );

  relu_unit #(.N(W), .IW(ACC_W)) u_relu (
    .clk, .rst_n,
    .in_valid(rsp_valid), .in_ready(rsp_ready), .in_data(rsp_line),
    .out_valid(act_valid), .out_ready(act_ready), .out_data(act_line), .clipped
  );

  maxpool_unit #(.W(W), .M(M), .IW(ACC_W)) u_pool (
    .clk, .rst_n,
    .in_valid(act_valid), .in_ready(act_ready), .in_data(act_line),
    .out_valid(pool_valid), .out_ready(pool_ready), .out_data(pool_line)
  );

  precision_adjust #(.N(OW)) u_adj (
    .clk, .rst_n, .shift,
    .in_valid(pool_valid), .in_ready(pool_ready), .in_data(pool_line),
    .out_valid, .out_ready, .out_data(out_line), .saturated
  );

endmodule
