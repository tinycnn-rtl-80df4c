// relu_unit: Rectified Linear activation, y = max(0, x), on a vector of N values.
//
// The original design's only activation function is ReLU. This unit applies it
// lane by lane to a vector of N signed IW-bit values (a whole feature-map line,
// or the outputs of a dense group) and registers the result: one pipeline stage
// with a valid/ready handshake, one cycle of latency and one vector per cycle.
// It runs on the wide accumulator values before the precision adjustment, which
// gives the same result as after it because both operations are monotonic.
// `clipped` pulses in a cycle where an accepted vector had a negative value.
module relu_unit
  import tinycnn_pkg::*;
#(
  parameter int unsigned N  = 32,
  parameter int unsigned IW = ACC_W
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          in_valid,
  output logic                          in_ready,
  input  logic signed [N-1:0][IW-1:0]   in_data,
  output logic                          out_valid,
  input  logic                          out_ready,
  output logic signed [N-1:0][IW-1:0]   out_data,
  output logic                          clipped
);

  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_data  <= '0;
      clipped   <= 1'b0;
    end else begin
      clipped <= 1'b0;
      if (in_ready) begin
        out_valid <= in_valid;
        if (in_valid) begin
          for (int unsigned i = 0; i < N; i++) begin
            out_data[i] <= in_data[i][IW-1] ? '0 : in_data[i];
            if (in_data[i][IW-1]) clipped <= 1'b1;
          end
        end
      end
    end
  end

endmodule
