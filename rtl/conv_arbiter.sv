// conv_arbiter: the shared-mode wrapper that lets N layers use one convolution unit.
//
// In shared mode the original design generates a wrapper that acts as a resource
// manager, arbitrating between the layers that request the convolution unit.
// Here each layer's FeedForward unit is a requester. Because the unit's
// accumulators sum a whole output line over the input maps, a grant covers one
// complete line: from a request with first=1 to the one with last=1. Between
// lines the grant passes round-robin, starting after the last owner. Requests are
// muxed to the unit combinationally (lines of narrower layers arrive padded to W
// and carry their own width). The unit's result belongs to the requester whose
// last request was accepted; it is returned on rsp_valid[owner] with the line
// broadcast on rsp_line. A line is granted only to a requester that signals
// rsp_room, meaning it can take the result the moment it is ready: otherwise a
// result held in the shared unit, waiting for a layer whose successor is still
// busy, would stop the very layer that has to finish first (a deadlock that only
// sharing creates). `contention` is high in a cycle where a requester waits
// while another holds or takes the unit: the stalls that exclusive mode avoids.
module conv_arbiter
  import tinycnn_pkg::*;
#(
  parameter int unsigned N  = 4,
  parameter int unsigned W  = 32,
  localparam int unsigned WW = $clog2(W + 1),
  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1
) (
  input  logic                       clk,
  input  logic                       rst_n,
  // requesters
  input  logic [N-1:0]               req_valid,
  input  logic [N-1:0]               rsp_room,
  output logic [N-1:0]               req_ready,
  input  data_t [N-1:0][W-1:0]       req_line1,
  input  data_t [N-1:0][W-1:0]       req_line2,
  input  data_t [N-1:0][W-1:0]       req_line3,
  input  data_t [N-1:0][8:0]         req_taps,
  input  bias_t [N-1:0]              req_bias,
  input  logic [N-1:0]               req_first,
  input  logic [N-1:0]               req_last,
  input  logic [N-1:0][WW-1:0]       req_width,
  // shared convolution unit, request side
  output logic                       cv_valid,
  input  logic                       cv_ready,
  output data_t [W-1:0]              cv_line1,
  output data_t [W-1:0]              cv_line2,
  output data_t [W-1:0]              cv_line3,
  output data_t [8:0]                cv_taps,
  output bias_t                      cv_bias,
  output logic                       cv_first,
  output logic                       cv_last,
  output logic [WW-1:0]              cv_width,
  // shared convolution unit, result side
  input  logic                       res_valid,
  output logic                       res_ready,
  input  acc_t [W-1:0]               res_line,
  // results back to the requesters
  output logic [N-1:0]               rsp_valid,
  input  logic [N-1:0]               rsp_ready,
  output acc_t [W-1:0]               rsp_line,
  output logic                       contention
);

  logic          locked;
  logic [IW-1:0] owner, ptr, pick, grant, res_owner;
  logic          pick_ok;

  // Round-robin choice among the valid requesters, starting at ptr.
  always_comb begin
    pick    = '0;
    pick_ok = 1'b0;
    for (int unsigned k = 0; k < N; k++) begin
      logic [IW-1:0] i;
      i = IW'((32'(ptr) + k) % N);
      if (!pick_ok && req_valid[i] && rsp_room[i]) begin
        pick    = i;
        pick_ok = 1'b1;
      end
    end
  end

  assign grant    = locked ? owner : pick;
  assign cv_valid = locked ? req_valid[owner] : pick_ok;
  assign cv_line1 = req_line1[grant];
  assign cv_line2 = req_line2[grant];
  assign cv_line3 = req_line3[grant];
  assign cv_taps  = req_taps[grant];
  assign cv_bias  = req_bias[grant];
  assign cv_first = req_first[grant];
  assign cv_last  = req_last[grant];
  assign cv_width = req_width[grant];

  always_comb begin
    req_ready = '0;
    req_ready[grant] = cv_ready && cv_valid;
    rsp_valid = '0;
    rsp_valid[res_owner] = res_valid;
  end

  assign res_ready = rsp_ready[res_owner];
  assign rsp_line  = res_line;

  always_comb begin
    contention = 1'b0;
    for (int unsigned i = 0; i < N; i++)
      if (req_valid[i] && !(cv_valid && cv_ready && grant == IW'(i)) &&
          (locked || res_valid || (cv_valid && grant != IW'(i))))
        contention = 1'b1;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      locked    <= 1'b0;
      owner     <= '0;
      ptr       <= '0;
      res_owner <= '0;
    end else if (cv_valid && cv_ready) begin
      if (cv_last) begin
        locked    <= 1'b0;
        res_owner <= grant;
        ptr       <= IW'((32'(grant) + 1) % N);
      end else begin
        locked <= 1'b1;
        owner  <= grant;
      end
    end
  end

  // A line starts only for a requester with room for its result.
  assert property (@(posedge clk) disable iff (!rst_n)
                   !locked && cv_valid && cv_ready |-> rsp_room[grant]);
  // While a line is in progress only its owner may use the unit.
  assert property (@(posedge clk) disable iff (!rst_n)
                   locked && cv_valid && cv_ready |-> grant == owner);

endmodule
