// hyd_pkg: types and constants shared by the HyDRATE accelerators.
//
// Number formats (this design's choices, the source only fixes "8-bit integer
// data" and power-of-two weights of 4 bits or fewer):
//   * activations are signed 8-bit integers (act_t);
//   * a weight is a 4-bit power-of-two code (wcode_t): bit 3 is the sign, bits
//     2:0 an exponent e. e = 0..6 means a magnitude of 2^-e; e = 7 means zero.
//     A SACC lane applies it as a left shift by (WFRAC - e), so products and
//     accumulators are exact integers scaled by 2^WFRAC ("full internal
//     precision");
//   * inputs of the sigmoid/tanh tables are read as Q3.4 (value/16), their
//     outputs as Q0.7 (value/128).
package hyd_pkg;

  typedef logic signed [7:0] act_t;
  typedef logic [3:0]        wcode_t;

  localparam int WFRAC    = 6;     // fraction bits the weight shift adds
  localparam int W_ZERO_E = 7;     // exponent code that means "weight is zero"

  // Output (activation) function applied after the accumulator.
  typedef enum logic [1:0] {
    ACT_NONE    = 2'd0,
    ACT_RELU    = 2'd1,
    ACT_SIGMOID = 2'd2,
    ACT_TANH    = 2'd3
  } act_fn_e;

  // Per-output-channel parameters: folded batch normalisation as a
  // power-of-two scale (arithmetic right shift) followed by a bias.
  typedef struct packed {
    logic signed [15:0] bias;
    logic [4:0]         shift;
  } chan_param_t;

  // One NNPE run: a layer, or a slice of the output channels of a layer.
  typedef struct packed {
    logic [15:0] in_base;     // first input-buffer word of pixel 0
    logic [15:0] pix_stride;  // input-buffer words between two output pixels
    logic [15:0] n_pix;       // output pixels P
    logic [7:0]  m_words;     // M: input words per dot product (M*N >= k*k*Cin)
    logic [11:0] n_groups;    // output-channel groups of S channels in this run
    logic [11:0] group_base;  // index of the first group (output channel / S)
    logic [15:0] cout;        // output channels per pixel (output layout pitch)
    logic [23:0] out_base;    // output-buffer byte address of pixel 0, channel 0
    logic [15:0] p_base;      // parameter-buffer word of group 0, word 0
    logic [11:0] cp_base;     // channel-parameter entry of group 0
    act_fn_e     act;         // output function
    logic        swap;        // swap input and output buffers when finished
  } nnpe_desc_t;

  // Weight code -> signed product with an 8-bit activation, scaled 2^WFRAC.
  function automatic logic signed [15:0] pot_product(act_t d, wcode_t w);
    logic signed [15:0] mag;
    if (w[2:0] == 3'(W_ZERO_E)) return '0;
    mag = 16'(d) <<< (WFRAC - int'(w[2:0]));
    return w[3] ? -mag : mag;
  endfunction

  function automatic act_t sat8(logic signed [31:0] v);
    if (v > 32'sd127)  return act_t'(8'sd127);
    if (v < -32'sd128) return act_t'(-8'sd128);
    return act_t'(v[7:0]);
  endfunction

endpackage
