// tinycnn_top: the complete TinyCNN accelerator for the 10-class grey-scale CIFAR-10 network.
//
// Network (the original design's evaluated CNN): 32x32x1 image ->
//   conv 3x3, 32 maps  -> ReLU -> 2x2 max pool -> 16x16x32
//   conv 3x3, 64 maps  -> ReLU -> 2x2 max pool ->  8x8x64
//   conv 3x3, 128 maps -> ReLU -> 2x2 max pool ->  4x4x128
//   conv 3x3, 128 maps -> ReLU -> 2x2 max pool ->  2x2x128 = 512 values
//   dense 512->100 -> ReLU -> dense 100->10 -> ReLU -> 10 scores
// Each convolution layer is a conv_layer (FeedForward unit, ReLU, pooling,
// precision adjustment); each dense layer an fc_unit followed by ReLU and
// precision adjustment. All weights live in on-chip ROMs.
//
// SHARED selects the convolution mode. 0 (exclusive, the default): every layer
// has its own conv_unit with Lk_LANES multipliers, and the four layers work on
// consecutive images at the same time. 1 (shared): one conv_unit of
// SHARED_LANES multipliers serves all four layers through conv_arbiter, which
// saves multipliers but makes layers wait for each other.
//
// Interface: the image enters one 32-pixel row per img_valid/img_ready
// handshake (rows 0..31, signed 16-bit, 8 fraction bits by default); the ten
// 16-bit scores leave in one res_valid/res_ready handshake. Each layer's output
// format is set by its SHIFT_* parameter (see precision_adjust): with weights of
// 12 fraction bits, a shift of 12 keeps every layer at 8 fraction bits.
// Status outputs pulse on a ReLU clipping or a saturation anywhere, show
// contention for the shared unit, and which layers are feeding an image
// (layer_feeding[k] high: layer k+1 holds an image and accepts no input).
// The host side (processor, DMA) is not part of this RTL: the two streams are
// where it connects.
module tinycnn_top
  import tinycnn_pkg::*;
#(
  parameter bit          SHARED       = 1'b0,
  parameter int unsigned L1_LANES     = 32,
  parameter int unsigned L2_LANES     = 16,
  parameter int unsigned L3_LANES     = 8,
  parameter int unsigned L4_LANES     = 4,
  parameter int unsigned SHARED_LANES = 32,
  parameter int unsigned FC1_LANES    = 10,
  parameter int unsigned FC2_LANES    = 10,
  parameter logic [5:0]  SHIFT_L1     = 6'd12,
  parameter logic [5:0]  SHIFT_L2     = 6'd12,
  parameter logic [5:0]  SHIFT_L3     = 6'd12,
  parameter logic [5:0]  SHIFT_L4     = 6'd12,
  parameter logic [5:0]  SHIFT_FC1    = 6'd12,
  parameter logic [5:0]  SHIFT_FC2    = 6'd12
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           img_valid,
  output logic           img_ready,
  input  data_t [31:0]   img_line,
  output logic           res_valid,
  input  logic           res_ready,
  output data_t [9:0]    res_scores,
  output logic           relu_clipped,
  output logic           saturated,
  output logic           conv_contention,
  output logic [3:0]     layer_feeding
);

  // Layer geometry (Table of the evaluated network).
  localparam int unsigned NL = 4;
  localparam int unsigned LW [NL] = '{32, 16, 8, 4};     // input width = height
  localparam int unsigned LC [NL] = '{1, 32, 64, 128};   // input maps
  localparam int unsigned LO [NL] = '{32, 64, 128, 128}; // output maps
  // Stand-in weight ranges (12 fraction bits), about sqrt(3/(9*C)) in magnitude.
  localparam int unsigned LAMP [NL] = '{2048, 400, 300, 200};
  localparam int unsigned BAMP = 262144;                 // 0.25 at 20 fraction bits
  localparam int unsigned MW = 32;                       // widest line

  // ---------------- stream between layers ----------------
  logic                  s_valid [NL+1];
  logic                  s_ready [NL+1];
  data_t [NL:0][MW-1:0]  s_line;                         // low LW[k] pixels used

  assign s_valid[0] = img_valid;
  assign img_ready  = s_ready[0];
  assign s_line[0]  = img_line;

  // ---------------- per-layer convolution ports ----------------
  logic [NL-1:0]             cv_valid, cv_ready, cv_first, cv_last;
  data_t [NL-1:0][MW-1:0]    cv_line1, cv_line2, cv_line3;
  data_t [NL-1:0][8:0]       cv_taps;
  bias_t [NL-1:0]            cv_bias;
  logic [NL-1:0][5:0]        cv_width;
  logic [NL-1:0]             rsp_valid, rsp_ready, rsp_room;
  acc_t [NL-1:0][MW-1:0]     rsp_line;
  logic [NL-1:0]             clip_l, sat_l;
  logic [5:0]                shift_l [NL];

  assign shift_l = '{SHIFT_L1, SHIFT_L2, SHIFT_L3, SHIFT_L4};

  for (genvar k = 0; k < NL; k++) begin : g_layer
    localparam int unsigned W  = LW[k];
    localparam int unsigned OW = W / 2;
    data_t [W-1:0]  l1, l2, l3;
    acc_t  [W-1:0]  rl;
    data_t [OW-1:0] ol;

    assign rl = rsp_line[k][W-1:0];

    conv_layer #(.W(W), .H(W), .C(LC[k]), .O(LO[k]), .M(2),
                 .SEED(10 * k + 1), .AMP(LAMP[k]), .BIAS_AMP(BAMP)) u_layer (
      .clk, .rst_n, .shift(shift_l[k]),
      .in_valid(s_valid[k]), .in_ready(s_ready[k]), .in_line(s_line[k][W-1:0]),
      .cv_valid(cv_valid[k]), .cv_ready(cv_ready[k]),
      .cv_line1(l1), .cv_line2(l2), .cv_line3(l3), .cv_taps(cv_taps[k]),
      .cv_bias(cv_bias[k]), .cv_first(cv_first[k]), .cv_last(cv_last[k]),
      .rsp_valid(rsp_valid[k]), .rsp_ready(rsp_ready[k]), .rsp_room(rsp_room[k]),
      .rsp_line(rl),
      .out_valid(s_valid[k+1]), .out_ready(s_ready[k+1]), .out_line(ol),
      .feeding(layer_feeding[k]), .clipped(clip_l[k]), .saturated(sat_l[k])
    );

    assign cv_line1[k] = (MW*DATA_W)'(l1);
    assign cv_line2[k] = (MW*DATA_W)'(l2);
    assign cv_line3[k] = (MW*DATA_W)'(l3);
    assign cv_width[k] = 6'(W);
    assign s_line[k+1] = (MW*DATA_W)'(ol);
  end

  // ---------------- convolution units ----------------
  if (SHARED) begin : g_shared
    logic                 sv, sr, sf, sl, ov, orr;
    data_t [MW-1:0]       s1, s2, s3;
    data_t [8:0]          st;
    bias_t                sb;
    logic [5:0]           sw;
    acc_t [MW-1:0]        oline;

    conv_arbiter #(.N(NL), .W(MW)) u_arb (
      .clk, .rst_n,
      .req_valid(cv_valid), .rsp_room(rsp_room), .req_ready(cv_ready),
      .req_line1(cv_line1), .req_line2(cv_line2), .req_line3(cv_line3),
      .req_taps(cv_taps), .req_bias(cv_bias), .req_first(cv_first), .req_last(cv_last),
      .req_width(cv_width),
      .cv_valid(sv), .cv_ready(sr), .cv_line1(s1), .cv_line2(s2), .cv_line3(s3),
      .cv_taps(st), .cv_bias(sb), .cv_first(sf), .cv_last(sl), .cv_width(sw),
      .res_valid(ov), .res_ready(orr), .res_line(oline),
      .rsp_valid(rsp_valid), .rsp_ready(rsp_ready), .rsp_line(rsp_line[0]),
      .contention(conv_contention)
    );
    for (genvar k = 1; k < NL; k++) begin : g_bcast
      assign rsp_line[k] = rsp_line[0];
    end

    conv_unit #(.W(MW), .LANES(SHARED_LANES)) u_conv (
      .clk, .rst_n,
      .in_valid(sv), .in_ready(sr), .in_line1(s1), .in_line2(s2), .in_line3(s3),
      .in_taps(st), .in_bias(sb), .in_first(sf), .in_last(sl), .in_width(sw),
      .out_valid(ov), .out_ready(orr), .out_line(oline)
    );
  end else begin : g_exclusive
    localparam int unsigned LL [NL] = '{L1_LANES, L2_LANES, L3_LANES, L4_LANES};
    assign conv_contention = 1'b0;
    for (genvar k = 0; k < NL; k++) begin : g_conv
      localparam int unsigned W = LW[k];
      acc_t [W-1:0] ol;
      conv_unit #(.W(W), .LANES(LL[k])) u_conv (
        .clk, .rst_n,
        .in_valid(cv_valid[k]), .in_ready(cv_ready[k]),
        .in_line1(cv_line1[k][W-1:0]), .in_line2(cv_line2[k][W-1:0]),
        .in_line3(cv_line3[k][W-1:0]),
        .in_taps(cv_taps[k]), .in_bias(cv_bias[k]), .in_first(cv_first[k]),
        .in_last(cv_last[k]), .in_width($clog2(W + 1)'(cv_width[k])),
        .out_valid(rsp_valid[k]), .out_ready(rsp_ready[k]), .out_line(ol)
      );
      assign rsp_line[k] = (MW*ACC_W)'(ol);
    end
  end

  // ---------------- dense layers ----------------
  logic                   f1_valid, f1_ready, a1_valid, a1_ready, q1_valid, q1_ready;
  acc_t [FC1_LANES-1:0]   f1_data, a1_data;
  data_t [FC1_LANES-1:0]  q1_data;
  logic                   f2_valid, f2_ready, a2_valid, a2_ready;
  acc_t [FC2_LANES-1:0]   f2_data, a2_data;
  logic                   clip_f1, clip_f2, sat_f1, sat_f2;

  fc_unit #(.IN_N(512), .OUT_N(100), .LANES(FC1_LANES), .IN_LW(2),
            .SEED(51), .AMP(300), .BIAS_AMP(BAMP)) u_fc1 (
    .clk, .rst_n,
    .in_valid(s_valid[NL]), .in_ready(s_ready[NL]), .in_data(s_line[NL][1:0]),
    .out_valid(f1_valid), .out_ready(f1_ready), .out_data(f1_data)
  );

  relu_unit #(.N(FC1_LANES), .IW(ACC_W)) u_relu_fc1 (
    .clk, .rst_n, .in_valid(f1_valid), .in_ready(f1_ready), .in_data(f1_data),
    .out_valid(a1_valid), .out_ready(a1_ready), .out_data(a1_data), .clipped(clip_f1)
  );

  precision_adjust #(.N(FC1_LANES)) u_adj_fc1 (
    .clk, .rst_n, .shift(SHIFT_FC1),
    .in_valid(a1_valid), .in_ready(a1_ready), .in_data(a1_data),
    .out_valid(q1_valid), .out_ready(q1_ready), .out_data(q1_data), .saturated(sat_f1)
  );

  fc_unit #(.IN_N(100), .OUT_N(10), .LANES(FC2_LANES), .IN_LW(FC1_LANES),
            .SEED(61), .AMP(700), .BIAS_AMP(BAMP)) u_fc2 (
    .clk, .rst_n,
    .in_valid(q1_valid), .in_ready(q1_ready), .in_data(q1_data),
    .out_valid(f2_valid), .out_ready(f2_ready), .out_data(f2_data)
  );

  relu_unit #(.N(FC2_LANES), .IW(ACC_W)) u_relu_fc2 (
    .clk, .rst_n, .in_valid(f2_valid), .in_ready(f2_ready), .in_data(f2_data),
    .out_valid(a2_valid), .out_ready(a2_ready), .out_data(a2_data), .clipped(clip_f2)
  );

  precision_adjust #(.N(FC2_LANES)) u_adj_fc2 (
    .clk, .rst_n, .shift(SHIFT_FC2),
    .in_valid(a2_valid), .in_ready(a2_ready), .in_data(a2_data),
    .out_valid(res_valid), .out_ready(res_ready), .out_data(res_scores), .saturated(sat_f2)
  );

  assign relu_clipped = |clip_l || clip_f1 || clip_f2;
  assign saturated    = |sat_l || sat_f1 || sat_f2;

  initial begin
    assert (FC2_LANES == 10) else $error("tinycnn_top: the score port needs FC2_LANES = 10");
    assert (100 % FC1_LANES == 0) else $error("tinycnn_top: FC1_LANES must divide 100");
  end

endmodule
