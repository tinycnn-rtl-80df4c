// ff_unit: the FeedForward unit of one convolution layer.
//
// It sits between the previous layer and the convolution unit and contains the
// fmaps RAM, the filters ROM (with a bias ROM beside it), the three line
// registers line1..line3 and two state machines, as in the original design:
//
//  * Buffering SM: accepts the layer's input maps one line per handshake, map
//    by map, line by line (map c, row r goes to RAM word c*H + r), until all C*H
//    lines are stored. It then hands the RAM to the feeder and accepts nothing
//    more until the feeder has finished (one image in the RAM at a time).
//  * Feeder SM: for every output map o, output row r and input map c (c
//    innermost) it reads rows r-1, r, r+1 of map c from the RAM into line1,
//    shifting line1 into line2 and line2 into line3 on each read, so line3 ends
//    as row r-1 and line1 as row r+1. Rows outside the map enter as zeros. At
//    the same time it reads filter (o,c) and bias o from the ROMs. It then offers
//    the request to the convolution unit with first = (c==0) and last = (c==C-1),
//    so the unit's accumulators sum the C input maps into output line (o,r).
//    Loading takes 4 cycles and overlaps the convolution of the previous request.
//
// ROM contents: filter (o,c) is ROM word o*C+c, tap t in lane t; bias o is word o
// of the bias ROM. Both are filled from tinycnn_pkg::synth_weight (see
// weight_rom) with seeds SEED and SEED+1.
// The RAM/ROM/line-register structure and the two state machines follow the
// original design; the loop order, the 4-cycle load and the single buffer are
// this design's choices.
module ff_unit
  import tinycnn_pkg::*;
#(
  parameter int unsigned W        = 32,
  parameter int unsigned H        = 32,
  parameter int unsigned C        = 1,
  parameter int unsigned O        = 32,
  parameter int unsigned SEED     = 1,
  parameter int unsigned AMP      = 1024,
  parameter int unsigned BIAS_AMP = 65536
) (
  input  logic           clk,
  input  logic           rst_n,
  // lines of the input maps
  input  logic           in_valid,
  output logic           in_ready,
  input  data_t [W-1:0]  in_line,
  // requests to the convolution unit
  output logic           cv_valid,
  input  logic           cv_ready,
  output data_t [W-1:0]  cv_line1,
  output data_t [W-1:0]  cv_line2,
  output data_t [W-1:0]  cv_line3,
  output data_t [8:0]    cv_taps,
  output bias_t          cv_bias,
  output logic           cv_first,
  output logic           cv_last,
  // high while a buffered image is being fed
  output logic           feeding
);

  localparam int unsigned DEPTH = C * H;
  localparam int unsigned AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  localparam int unsigned FW    = (O * C > 1) ? $clog2(O * C) : 1;
  localparam int unsigned BW    = (O > 1) ? $clog2(O) : 1;

  typedef enum logic [0:0] {B_FILL, B_FULL} buf_state_t;
  typedef enum logic [1:0] {F_IDLE, F_LOAD, F_OFFER} feed_state_t;

  buf_state_t  bstate;
  feed_state_t fstate;

  // ---------------- buffering SM ----------------
  logic [AW-1:0] wptr;
  logic          feed_done;

  assign in_ready = (bstate == B_FILL);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      bstate <= B_FILL;
      wptr   <= '0;
    end else begin
      case (bstate)
        B_FILL: if (in_valid) begin
          if (32'(wptr) == DEPTH - 1) begin
            wptr   <= '0;
            bstate <= B_FULL;
          end else begin
            wptr <= wptr + 1'b1;
          end
        end
        B_FULL: if (feed_done) bstate <= B_FILL;
        default: bstate <= B_FILL;
      endcase
    end
  end

  // ---------------- memories ----------------
  logic          ram_re;
  logic [AW-1:0] ram_raddr;
  data_t [W-1:0] ram_rdata;
  logic          rom_en;
  logic [FW-1:0] rom_addr;
  logic [BW-1:0] brom_addr;
  logic [8:0][DATA_W-1:0] rom_taps;
  logic [0:0][BIAS_W-1:0] rom_bias;

  fmap_ram #(.W(W), .DEPTH(DEPTH)) u_ram (
    .clk, .we(in_valid && in_ready), .waddr(wptr), .wdata(in_line),
    .re(ram_re), .raddr(ram_raddr), .rdata(ram_rdata)
  );

  weight_rom #(.DEPTH(O * C), .LANES(9), .LANE_W(DATA_W), .SEED(SEED), .AMP(AMP)) u_filters (
    .clk, .en(rom_en), .addr(rom_addr), .rdata(rom_taps)
  );

  weight_rom #(.DEPTH(O), .LANES(1), .LANE_W(BIAS_W), .SEED(SEED + 1), .AMP(BIAS_AMP)) u_bias (
    .clk, .en(rom_en), .addr(brom_addr), .rdata(rom_bias)
  );

  // ---------------- feeder SM ----------------
  int unsigned   oc, rc, cc;     // output map, output row, input map
  logic [1:0]    ld;             // load step
  logic          zero_q;         // the row read last cycle lies outside the map
  logic          zero_d;
  data_t [W-1:0] line1, line2, line3;

  // Row read in load step ld (0: r-1, 1: r, 2: r+1) and whether it is padding.
  always_comb begin
    int signed row;
    row       = int'(rc) + int'(ld) - 1;
    zero_d    = (row < 0) || (row >= int'(H));
    ram_re    = (fstate == F_LOAD) && (ld != 2'd3) && !zero_d;
    ram_raddr = zero_d ? '0 : AW'(cc * H + 32'(row));
    rom_en    = (fstate == F_LOAD) && (ld == 2'd0);
    rom_addr  = FW'(oc * C + cc);
    brom_addr = BW'(oc);
  end

  assign feed_done = (fstate == F_OFFER) && cv_ready &&
                     (oc == O - 1) && (rc == H - 1) && (cc == C - 1);
  assign feeding   = (fstate != F_IDLE);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      fstate <= F_IDLE;
      oc     <= 0;
      rc     <= 0;
      cc     <= 0;
      ld     <= '0;
      zero_q <= 1'b0;
      line1  <= '0;
      line2  <= '0;
      line3  <= '0;
    end else begin
      case (fstate)
        F_IDLE: if (bstate == B_FULL) begin
          fstate <= F_LOAD;
          ld     <= '0;
          oc     <= 0;
          rc     <= 0;
          cc     <= 0;
        end
        F_LOAD: begin
          zero_q <= zero_d;
          if (ld != 2'd0) begin
            line1 <= zero_q ? '0 : ram_rdata;
            line2 <= line1;
            line3 <= line2;
          end
          if (ld == 2'd3) fstate <= F_OFFER;
          ld <= ld + 1'b1;
        end
        F_OFFER: if (cv_ready) begin
          ld <= '0;
          if (cc != C - 1) begin
            cc <= cc + 1;
            fstate <= F_LOAD;
          end else begin
            cc <= 0;
            if (rc != H - 1) begin
              rc <= rc + 1;
              fstate <= F_LOAD;
            end else begin
              rc <= 0;
              if (oc != O - 1) begin
                oc <= oc + 1;
                fstate <= F_LOAD;
              end else begin
                oc <= 0;
                fstate <= F_IDLE;
              end
            end
          end
        end
        default: fstate <= F_IDLE;
      endcase
    end
  end

  assign cv_valid = (fstate == F_OFFER);
  assign cv_line1 = line1;
  assign cv_line2 = line2;
  assign cv_line3 = line3;
  assign cv_taps  = rom_taps;
  assign cv_bias  = rom_bias[0];
  assign cv_first = (cc == 0);
  assign cv_last  = (cc == C - 1);

  // A request is held until the convolution unit takes it.
  assert property (@(posedge clk) disable iff (!rst_n)
                   cv_valid && !cv_ready |=> cv_valid && $stable(cv_line1) && $stable(cv_taps));

endmodule
