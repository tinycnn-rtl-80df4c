// precision_adjust: inter-layer precision adjustment to 16-bit fixed point.
//
// In the original design every layer ends with this unit, which sets how many
// of the 16 output bits are integer and how many are fraction; the split is
// chosen per layer offline by simulating the network against reference data.
// Here a layer's accumulator value has F_in + F_w fraction bits (input
// activations times weights); the unit shifts each of the N lanes right by
// `shift` = F_in + F_w - F_out with round-half-up, then saturates to the 16-bit
// range, so its output has F_out fraction bits. `shift` is a port so that the
// chosen formats are set by whoever instantiates the layer.
// One registered stage with a valid/ready handshake, one cycle of latency.
// `saturated` pulses in a cycle where an accepted vector had a lane clamped.
module precision_adjust
  import tinycnn_pkg::*;
#(
  parameter int unsigned N = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [5:0]        shift,
  input  logic              in_valid,
  output logic              in_ready,
  input  acc_t [N-1:0]      in_data,
  output logic              out_valid,
  input  logic              out_ready,
  output data_t [N-1:0]     out_data,
  output logic              saturated
);

  data_t [N-1:0] q;
  logic  [N-1:0] clamp;

  always_comb begin
    for (int unsigned i = 0; i < N; i++) begin
      acc_t r;
      if (shift == '0) r = in_data[i];
      else             r = (in_data[i] + (acc_t'(1) <<< (shift - 1'b1))) >>> shift;
      clamp[i] = (r > acc_t'(32767)) || (r < acc_t'(-32768));
      q[i]     = requantize(in_data[i], 32'(shift));
    end
  end

  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_data  <= '0;
      saturated <= 1'b0;
    end else begin
      saturated <= 1'b0;
      if (in_ready) begin
        out_valid <= in_valid;
        if (in_valid) begin
          out_data  <= q;
          saturated <= |clamp;
        end
      end
    end
  end

endmodule
