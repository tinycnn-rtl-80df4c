// conv_unit: 3x3 convolution of three feature-map lines with one filter.
//
// One request carries three lines of one input map (line3 = row r-1, line2 =
// row r, line1 = row r+1, the order in which the feeder shifts them in), the nine
// filter taps (tap ky*3+kx, ky=0 the upper row, kx=0 the left column), a bias
// and first/last flags. The unit latches the request, so the feeder may load the
// next one while it computes. LANES multipliers (the DSPs of the original
// design) each own one output pixel of the current group; every cycle each lane
// multiplies one tap with its input pixel and adds it to that pixel's
// accumulator, so a group takes 9 cycles and a line of `width` pixels takes
// 9*ceil(width/LANES) cycles. LANES may be anything from 1 to W, as in the
// original design, where the designer trades DSPs for throughput.
//
// Padding is "same": pixels left of column 0 and right of column width-1 read as
// zero (the feeder supplies zero lines above and below the map), so the output
// line is as wide as the input line. `width` may be less than W, which lets one
// shared unit serve layers of different widths; pixels at or beyond width are 0.
//
// The accumulators sum over input maps: a request with first=1 loads them with
// the bias, the others add to them, and after the request with last=1 the line
// is offered on out_line until out_ready. A new request is accepted only while
// the unit is idle and holds no result (in_ready), one cycle after a compute ends.
// Timing: accept at cycle 0, result valid at cycle 9*ceil(width/LANES)+1; the
// unit accepts a request every 9*ceil(width/LANES)+1 cycles.
// The original design gives the DSP-count trade-off and the three-line input but
// not the schedule; the per-lane, one-tap-per-cycle schedule is this design's.
module conv_unit
  import tinycnn_pkg::*;
#(
  parameter int unsigned W     = 32,
  parameter int unsigned LANES = 32,
  localparam int unsigned WW   = $clog2(W + 1)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            in_valid,
  output logic            in_ready,
  input  data_t [W-1:0]   in_line1,
  input  data_t [W-1:0]   in_line2,
  input  data_t [W-1:0]   in_line3,
  input  data_t [8:0]     in_taps,
  input  bias_t           in_bias,
  input  logic            in_first,
  input  logic            in_last,
  input  logic [WW-1:0]   in_width,
  output logic            out_valid,
  input  logic            out_ready,
  output acc_t [W-1:0]    out_line
);

  localparam int unsigned NG = (W + LANES - 1) / LANES;
  localparam int unsigned GW = (NG > 1) ? $clog2(NG) : 1;

  data_t [2:0][W-1:0] rows;     // rows[0] = row r-1, rows[1] = r, rows[2] = r+1
  data_t [8:0]        taps;
  logic               last_q;
  logic [WW-1:0]      width_q;
  logic               busy;
  logic [1:0]         ky, kx;
  logic [GW-1:0]      grp;
  acc_t [W-1:0]       acc;
  acc_t [LANES-1:0]   prod;
  logic [LANES-1:0]   lane_on;

  assign in_ready  = !busy && !out_valid;
  assign out_line  = acc;

  wire last_tap   = (ky == 2'd2) && (kx == 2'd2);
  wire last_group = ((32'(grp) + 1) * LANES) >= 32'(width_q);

  // One product per lane: tap (ky,kx) times the pixel at column x+kx-1.
  always_comb begin
    for (int unsigned l = 0; l < LANES; l++) begin
      int signed xs;
      data_t p;
      lane_on[l] = (32'(grp) * LANES + l < 32'(width_q));
      xs = int'(32'(grp) * LANES + l) + int'(kx) - 1;
      p = '0;
      if (lane_on[l] && xs >= 0 && xs < int'(width_q))
        p = rows[ky][xs[$clog2(W+1)-1:0]];
      prod[l] = acc_t'($signed(taps[3*ky+kx])) * acc_t'($signed(p));
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      out_valid <= 1'b0;
      ky        <= '0;
      kx        <= '0;
      grp       <= '0;
      last_q    <= 1'b0;
      width_q   <= '0;
      rows      <= '0;
      taps      <= '0;
      acc       <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (in_valid && in_ready) begin
        rows    <= {in_line1, in_line2, in_line3};
        taps    <= in_taps;
        last_q  <= in_last;
        width_q <= in_width;
        busy    <= (in_width != '0);
        out_valid <= (in_width == '0) && in_last;
        ky      <= '0;
        kx      <= '0;
        grp     <= '0;
        if (in_first) begin
          for (int unsigned x = 0; x < W; x++)
            acc[x] <= (x < 32'(in_width)) ? acc_t'(in_bias) : '0;
        end
      end else if (busy) begin
        for (int unsigned l = 0; l < LANES; l++)
          if (lane_on[l]) acc[32'(grp) * LANES + l] <= acc[32'(grp) * LANES + l] + prod[l];
        if (last_tap) begin
          ky <= '0;
          kx <= '0;
          if (last_group) begin
            busy      <= 1'b0;
            out_valid <= last_q;
          end else begin
            grp <= grp + 1'b1;
          end
        end else if (kx == 2'd2) begin
          kx <= '0;
          ky <= ky + 1'b1;
        end else begin
          kx <= kx + 1'b1;
        end
      end
    end
  end

  // A request may not arrive wider than the unit.
  assert property (@(posedge clk) disable iff (!rst_n) in_valid |-> in_width <= WW'(W));
  // The result is held until it is taken.
  assert property (@(posedge clk) disable iff (!rst_n)
                   out_valid && !out_ready |=> out_valid && $stable(out_line));

endmodule
