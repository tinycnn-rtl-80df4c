// maxpool_unit: M x M max pooling over a stream of feature-map lines.
//
// Lines of W values arrive one per handshake, row after row (a map's height
// must be a multiple of M, so every group of M consecutive lines belongs to one
// map). The unit keeps a running column-wise maximum of the current group in a
// W-value register. When the M-th line of a group arrives it takes the maximum
// of each M adjacent columns of (running max, incoming line) and presents the
// W/M-value pooled line on the output register; the other lines produce no
// output. Throughput: one input line per cycle unless the output is blocked;
// latency from the group's last line to the pooled line is one cycle.
// M is a parameter, as in the original design where the designer chooses it.
module maxpool_unit
  import tinycnn_pkg::*;
#(
  parameter int unsigned W  = 32,
  parameter int unsigned M  = 2,
  parameter int unsigned IW = ACC_W,
  localparam int unsigned OWD = W / M
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          in_valid,
  output logic                          in_ready,
  input  logic signed [W-1:0][IW-1:0]   in_data,
  output logic                          out_valid,
  input  logic                          out_ready,
  output logic signed [OWD-1:0][IW-1:0] out_data
);

  localparam int unsigned CW = (M > 1) ? $clog2(M) : 1;

  logic [CW-1:0]                 row;
  logic signed [W-1:0][IW-1:0]   colmax;
  logic signed [W-1:0][IW-1:0]   colnext;
  logic signed [OWD-1:0][IW-1:0] pooled;

  wire group_end = (32'(row) == M - 1);

  assign in_ready = !group_end || !out_valid || out_ready;

  always_comb begin
    for (int unsigned x = 0; x < W; x++)
      colnext[x] = (row == '0 || $signed(in_data[x]) > $signed(colmax[x])) ? in_data[x] : colmax[x];
    for (int unsigned j = 0; j < OWD; j++) begin
      pooled[j] = colnext[j*M];
      for (int unsigned k = 1; k < M; k++)
        if ($signed(colnext[j*M+k]) > $signed(pooled[j])) pooled[j] = colnext[j*M+k];
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      row       <= '0;
      colmax    <= '0;
      out_valid <= 1'b0;
      out_data  <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (in_valid && in_ready) begin
        colmax <= colnext;
        if (group_end) begin
          row       <= '0;
          out_valid <= 1'b1;
          out_data  <= pooled;
        end else begin
          row <= row + 1'b1;
        end
      end
    end
  end

  initial assert (W % M == 0) else $error("maxpool_unit: W must be a multiple of M");

endmodule
