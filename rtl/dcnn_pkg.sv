// dcnn_pkg -- types, sizes and helper functions shared by the deconvolution
// accelerator.
//
// Data are 12-bit two's-complement fixed-point numbers, the word length the
// paper selects by its statistical analysis. The split between integer and
// fraction bits is not given there; this design uses 8 fraction bits
// (range -8.0 .. +7.996). Products and sums are kept in ACC_W-bit
// accumulators and only rounded back to 12 bits when an output tile leaves
// the accelerator.
//
// The functions fh_offset() and in_offset() implement stride hole skipping:
// for a kernel row k_h they give the output phase f_h whose rows that kernel
// row contributes to, f_h = (S - ((P - k_h) mod S)) mod S, and the exact
// integer input-row step d_h = (f_h + P - k_h) / S, so that output row
// o_h = S*o_h' + f_h reads input row i_h = o_h' + d_h (tile-relative).
//
// The same datapath also runs ordinary convolution layers (cfg.conv = 1):
// then output row o_h reads input row S*o_h + k_h - P and there are no
// stride holes.
package dcnn_pkg;

  parameter int unsigned DATA_W = 12;  // fixed-point word (paper: 12 bits)
  parameter int unsigned FRAC_W = 8;   // fraction bits (design choice)
  parameter int unsigned ACC_W  = 32;  // accumulator width (design choice)
  parameter int unsigned AXIS_W = 16;  // stream word, data sign-extended

  typedef logic signed [DATA_W-1:0] data_t;
  typedef logic signed [ACC_W-1:0]  acc_t;

  // Per-layer geometry set by the host for one tile job.
  typedef struct packed {
    logic       conv;       // 1: convolution, 0: deconvolution
    logic [3:0] k;          // kernel size K (1..15)
    logic [3:0] s;          // stride S (1..15)
    logic [3:0] p;          // padding P (0..15)
    logic [7:0] rows;       // o_h' trip count of this tile (<= T_OH/S)
    logic [7:0] cols;       // o_w' trip count of this tile (<= T_OW/S)
    logic [7:0] ic_active;  // input channels used in this tile (<= T_IC)
    logic [7:0] oc_active;  // output channels sent back (<= T_OC)
    logic [3:0] ii;         // initiation interval of the o_w' loop (>= 1)
  } layer_cfg_t;

  // Mathematical (non-negative) remainder of a by s, s > 0.
  function automatic logic signed [7:0] mod_pos(logic signed [7:0] a,
                                                logic signed [7:0] s);
    logic signed [7:0] m;
    m = a % s;
    if (m < 0) m = m + s;
    return m;
  endfunction

  // Output phase written by kernel row/column k (paper Eq. 12).
  function automatic logic signed [7:0] fh_offset(logic [3:0] k, logic [3:0] s,
                                                  logic [3:0] p);
    logic signed [7:0] ss;
    ss = $signed({4'd0, s});
    return mod_pos(ss - mod_pos($signed({4'd0, p}) - $signed({4'd0, k}), ss), ss);
  endfunction

  // Input step (f + P - k) / S; the numerator is a multiple of S by
  // construction, so the division is exact.
  function automatic logic signed [7:0] in_offset(logic [3:0] k, logic [3:0] s,
                                                  logic [3:0] p);
    logic signed [7:0] num;
    num = fh_offset(k, s, p) + $signed({4'd0, p}) - $signed({4'd0, k});
    return num / $signed({4'd0, s});
  endfunction

  // Round an accumulator back to a 12-bit word: arithmetic shift by the
  // fraction bits (truncation toward minus infinity) and saturation.
  function automatic data_t requant(acc_t a);
    acc_t sh;
    sh = a >>> FRAC_W;
    if (sh > acc_t'(2**(DATA_W-1) - 1)) return data_t'(2**(DATA_W-1) - 1);
    if (sh < -acc_t'(2**(DATA_W-1)))    return data_t'(-(2**(DATA_W-1)));
    return data_t'(sh);
  endfunction

  function automatic logic is_saturated(acc_t a);
    acc_t sh;
    sh = a >>> FRAC_W;
    return (sh > acc_t'(2**(DATA_W-1) - 1)) || (sh < -acc_t'(2**(DATA_W-1)));
  endfunction

endpackage
