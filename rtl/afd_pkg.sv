// afd_pkg: number formats and fixed-point helpers shared by the AF-detection
// network layers and the loop-recorder logic.
//
// Formats (integer LSB counts of the fraction):
//   activations  ACT_W  = 16 bits, ACT_FRAC = 8 fractional bits
//   weights      W_W    = 16 bits, W_FRAC   = 6 fractional bits
//   MAC result   MAC_W  = 32 bits, MAC_FRAC = 12 fractional bits
// The fractional bit counts follow the paper's quantisation scheme
// (weights int+6, MAC results int+12, activations int+8); the total widths
// are this design's choice (16-bit weights match 7.3K parameters = 14.6 KB).
// A product of an activation and a weight has ACT_FRAC+W_FRAC = 14 fractional
// bits and is accumulated at full precision in ACC_W bits; the sum is then
// rounded to the MAC format and from there to the activation format.
// Rounding is half away from zero followed by two's-complement saturation,
// the hardware form of the quantisation operator Q_{w,p} used in training.
package afd_pkg;

  localparam int ACT_W    = 16;
  localparam int ACT_FRAC = 8;
  localparam int W_W      = 16;
  localparam int W_FRAC   = 6;
  localparam int MAC_W    = 32;
  localparam int MAC_FRAC = 12;
  localparam int PROD_FRAC = ACT_FRAC + W_FRAC;   // 14
  localparam int ACC_W    = 48;                    // full-precision accumulator

  typedef logic signed [ACT_W-1:0] act_t;
  typedef logic signed [W_W-1:0]   wgt_t;
  typedef logic signed [MAC_W-1:0] mac_t;
  typedef logic signed [ACC_W-1:0] acc_t;

  // Weight-load selector: which layer memory a weight word goes to.
  typedef enum logic [2:0] {
    SEL_DW1 = 3'd0,
    SEL_PW1 = 3'd1,
    SEL_DW2 = 3'd2,
    SEL_PW2 = 3'd3,
    SEL_FC  = 3'd4
  } wsel_e;

  // Arithmetic right shift by n with rounding half away from zero.
  function automatic logic signed [63:0] rshift_round(input logic signed [63:0] x, input int n);
    logic signed [63:0] mag, r;
    if (n <= 0) return x;
    mag = (x < 0) ? -x : x;
    r   = (mag + (64'sd1 <<< (n - 1))) >>> n;
    return (x < 0) ? -r : r;
  endfunction

  // Saturate to a signed word of w bits.
  function automatic logic signed [63:0] sat(input logic signed [63:0] x, input int w);
    logic signed [63:0] hi, lo;
    hi = (64'sd1 <<< (w - 1)) - 1;
    lo = -(64'sd1 <<< (w - 1));
    if (x > hi) return hi;
    if (x < lo) return lo;
    return x;
  endfunction

  // Accumulator (PROD_FRAC fraction) -> MAC result format.
  function automatic mac_t acc_to_mac(input acc_t a);
    return mac_t'(sat(rshift_round(64'(a), PROD_FRAC - MAC_FRAC), MAC_W));
  endfunction

  // MAC result -> activation format.
  function automatic act_t mac_to_act(input mac_t m);
    return act_t'(sat(rshift_round(64'(m), MAC_FRAC - ACT_FRAC), ACT_W));
  endfunction

  // Bias (weight format) aligned to the MAC format.
  function automatic mac_t bias_to_mac(input wgt_t b);
    return mac_t'(64'(b) <<< (MAC_FRAC - W_FRAC));
  endfunction

endpackage
