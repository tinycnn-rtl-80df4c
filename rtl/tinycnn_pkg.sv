// tinycnn_pkg: widths, types and helper functions shared by every TinyCNN unit.
//
// Activations and weights are 16-bit two's-complement fixed-point numbers, as in
// the original design. Products are summed in a wide accumulator (ACC_W bits,
// chosen here so that the largest layer, 128 input maps x 9 taps plus a bias,
// cannot overflow). Biases are stored already aligned to the accumulator's
// binary point (BIAS_W bits); the original design does not say how biases are
// stored, so this is a choice of this implementation.
//
// synth_weight() produces the stand-in model that fills the weight and bias
// ROMs. A trained model is not available, so every ROM word is a hashed
// function of (seed, index) spread uniformly over [-amp, +amp]. Replacing it
// with real weights means changing only weight_rom's initial block.
package tinycnn_pkg;

  localparam int unsigned DATA_W = 16;  // activations and weights
  localparam int unsigned ACC_W  = 48;  // multiply-accumulate width
  localparam int unsigned BIAS_W = 32;  // bias words, accumulator-aligned

  typedef logic signed [DATA_W-1:0] data_t;
  typedef logic signed [ACC_W-1:0]  acc_t;
  typedef logic signed [BIAS_W-1:0] bias_t;

  // Integer hash (murmur3 finaliser) of seed and index, mapped to [-amp, amp].
  function automatic int synth_weight(input int unsigned seed, input int unsigned idx,
                                      input int unsigned amp);
    logic [31:0] h;
    h = (seed * 32'h9E37_79B1) ^ (idx + 32'h7F4A_7C15);
    h = h ^ (h >> 16);
    h = h * 32'h85EB_CA6B;
    h = h ^ (h >> 13);
    h = h * 32'hC2B2_AE35;
    h = h ^ (h >> 16);
    return int'(h % (2 * amp + 1)) - int'(amp);
  endfunction

  // Round-half-up arithmetic right shift followed by saturation to DATA_W bits.
  function automatic data_t requantize(input acc_t x, input int unsigned sh);
    acc_t r;
    if (sh == 0) r = x;
    else         r = (x + (acc_t'(1) <<< (sh - 1))) >>> sh;
    if (r > acc_t'(32767))       return data_t'(16'sh7FFF);
    else if (r < acc_t'(-32768)) return data_t'(16'sh8000);
    else                         return data_t'(r);
  endfunction

endpackage
