// fc_unit: dense (fully-connected) layer with a configurable number of DSP lanes.
//
// y[n] = b[n] + sum_i w[n][i] * x[i] for n < OUT_N, i < IN_N.
// The input vector arrives in beats of IN_LW values (x[k*IN_LW + j] is value j
// of beat k) and is kept in an input buffer. The OUT_N neurons are computed in
// OUT_N/LANES groups of LANES neurons; in a group each lane owns one neuron and
// one multiplier, and every cycle all lanes multiply-add the same input x[i]
// with their own weight, so a group takes IN_N cycles plus 3 cycles to load the
// bias and drain the ROM pipeline. The group's LANES accumulators are then
// offered as one output beat; after the last group the unit accepts a new input.
// Weights and biases sit in ROMs, as in the original design: weight w[g*LANES+l][i]
// is lane l of ROM word g*IN_N + i, bias b[g*LANES+l] lane l of bias word g
// (bias words are accumulator-aligned, seeds SEED and SEED+1).
// The original design gives the DSP-count and size parameters and the ROM
// weights; the schedule, buffering and flatten order are this design's.
module fc_unit
  import tinycnn_pkg::*;
#(
  parameter int unsigned IN_N     = 512,
  parameter int unsigned OUT_N    = 100,
  parameter int unsigned LANES    = 10,
  parameter int unsigned IN_LW    = 2,
  parameter int unsigned SEED     = 11,
  parameter int unsigned AMP      = 256,
  parameter int unsigned BIAS_AMP = 65536
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  output logic              in_ready,
  input  data_t [IN_LW-1:0] in_data,
  output logic              out_valid,
  input  logic              out_ready,
  output acc_t [LANES-1:0]  out_data
);

  localparam int unsigned NGRP = OUT_N / LANES;
  localparam int unsigned NBEAT = IN_N / IN_LW;
  localparam int unsigned WDEPTH = NGRP * IN_N;
  localparam int unsigned WAW = (WDEPTH > 1) ? $clog2(WDEPTH) : 1;
  localparam int unsigned BAW = (NGRP > 1) ? $clog2(NGRP) : 1;

  typedef enum logic [2:0] {S_FILL, S_BIAS, S_LOADB, S_RUN, S_DRAIN, S_OUT} state_t;
  state_t state;

  data_t [IN_N-1:0]  xbuf;
  int unsigned       beat, grp, idx;
  logic              mac_en;     // ROM data of the last cycle is to be used
  data_t             x_q;
  logic [LANES-1:0][DATA_W-1:0] wrow;
  logic [LANES-1:0][BIAS_W-1:0] brow;
  acc_t [LANES-1:0]  acc;

  weight_rom #(.DEPTH(WDEPTH), .LANES(LANES), .LANE_W(DATA_W), .SEED(SEED), .AMP(AMP)) u_weights (
    .clk, .en(state == S_RUN), .addr(WAW'(grp * IN_N + idx)), .rdata(wrow)
  );

  weight_rom #(.DEPTH(NGRP), .LANES(LANES), .LANE_W(BIAS_W), .SEED(SEED + 1), .AMP(BIAS_AMP)) u_bias (
    .clk, .en(state == S_BIAS), .addr(BAW'(grp)), .rdata(brow)
  );

  assign in_ready  = (state == S_FILL);
  assign out_valid = (state == S_OUT);
  assign out_data  = acc;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state  <= S_FILL;
      beat   <= 0;
      grp    <= 0;
      idx    <= 0;
      mac_en <= 1'b0;
      x_q    <= '0;
      acc    <= '0;
      xbuf   <= '0;
    end else begin
      mac_en <= 1'b0;
      if (mac_en)
        for (int unsigned l = 0; l < LANES; l++)
          acc[l] <= acc[l] + acc_t'($signed(wrow[l])) * acc_t'(x_q);
      case (state)
        S_FILL: if (in_valid) begin
          for (int unsigned j = 0; j < IN_LW; j++) xbuf[beat * IN_LW + j] <= in_data[j];
          if (beat == NBEAT - 1) begin
            beat  <= 0;
            grp   <= 0;
            state <= S_BIAS;
          end else begin
            beat <= beat + 1;
          end
        end
        S_BIAS:  state <= S_LOADB;
        S_LOADB: begin
          for (int unsigned l = 0; l < LANES; l++) acc[l] <= acc_t'($signed(brow[l]));
          idx   <= 0;
          state <= S_RUN;
        end
        S_RUN: begin
          mac_en <= 1'b1;
          x_q    <= xbuf[idx];
          if (idx == IN_N - 1) state <= S_DRAIN;
          else                 idx <= idx + 1;
        end
        S_DRAIN: state <= S_OUT;   // the last product is added on this edge
        S_OUT: if (out_ready) begin
          if (grp == NGRP - 1) begin
            grp   <= 0;
            state <= S_FILL;
          end else begin
            grp   <= grp + 1;
            state <= S_BIAS;
          end
        end
        default: state <= S_FILL;
      endcase
    end
  end

  initial begin
    assert (OUT_N % LANES == 0) else $error("fc_unit: OUT_N must be a multiple of LANES");
    assert (IN_N % IN_LW == 0) else $error("fc_unit: IN_N must be a multiple of IN_LW");
  end

endmodule
