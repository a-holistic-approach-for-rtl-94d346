// dreamnet_pkg -- widths and fixed-point helpers shared by every actor of the
// Dreamnet dataflow network.
//
// Number formats (this design's choice; the paper fixes only the parameter
// width B of weights and biases):
//   activation  unsigned ACT_W bits, all of them fraction bits: value in [0,1)
//   weight/bias signed WGT_W (= B) bits, WGT_W-1 fraction bits: value in [-1,1)
//   accumulator signed ACC_W bits, ACT_W+WGT_W-1 fraction bits
// A product of an activation and a weight therefore lands in accumulator
// format without shifting; a bias is aligned by shifting it left ACT_W bits.
package dreamnet_pkg;

  localparam int unsigned ACT_W    = 8;   // activation width (pixels, feature maps)
  localparam int unsigned ACC_W    = 24;  // conv / sum / bias accumulator width
  localparam int unsigned FC_ACC_W = 32;  // fully connected accumulator width
  localparam int unsigned KTAPS    = 9;   // 3x3 kernel
  localparam int unsigned NUM_CLASSES = 10; // digits 0..9

  typedef logic        [ACT_W-1:0]    act_t;
  typedef logic signed [ACC_W-1:0]    acc_t;
  typedef logic signed [FC_ACC_W-1:0] fc_acc_t;

  // Signed product of an unsigned activation and a signed weight of width wbits.
  function automatic acc_t mac_term(act_t a, logic signed [15:0] w);
    return acc_t'($signed({1'b0, a}) * w);
  endfunction

  // Requantise an accumulator holding ACT_W+frac fraction bits to an
  // activation: drop `frac` fraction bits (truncate toward -inf), clamp to
  // [0, 2^ACT_W-1]. Negative values become 0, which is the ReLU.
  function automatic act_t relu_requant(acc_t x, int unsigned frac);
    acc_t s;
    s = x >>> frac;
    if (s < 0) return '0;
    if (s > acc_t'((1 << ACT_W) - 1)) return '1;
    return act_t'(s);
  endfunction

endpackage
