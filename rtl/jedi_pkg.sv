// jedi_pkg: number formats and fixed-point helpers shared by every unit of the
// JEDI-net accelerator.
//
// The datapath carries Q12.12 values (24 bits: sign, 11 integer bits, 12
// fraction bits) and accumulates in Q16.16 (32 bits), the two formats the
// evaluated design uses. A Q12.12 x Q12.12 product has 24 fraction bits; it
// is brought to Q16.16 by an arithmetic right shift of 8 (round towards minus
// infinity). Accumulator sums are kept at full width while they are built and
// saturated to Q16.16 once; a Q16.16 value returns to Q12.12 by a right shift
// of 4 and saturation. Rounding by truncation and saturation (rather than
// wrap-around) are this design's choices.
package jedi_pkg;

  localparam int unsigned DW  = 24;  // datapath width, Q12.12
  localparam int unsigned FW  = 12;  // datapath fraction bits
  localparam int unsigned AW  = 32;  // accumulator width, Q16.16
  localparam int unsigned AFW = 16;  // accumulator fraction bits
  localparam int unsigned SW  = 64;  // width of unsaturated sums

  typedef logic signed [DW-1:0] data_t;
  typedef logic signed [AW-1:0] acc_t;
  typedef logic signed [SW-1:0] sum_t;

  localparam int unsigned MAXL = 8;  // most layers an MLP may have

  // Q12.12 x Q12.12 -> Q16.16-aligned term (not yet saturated)
  function automatic sum_t mul_term(data_t x, data_t w);
    logic signed [2*DW-1:0] p;
    p = x * w;
    return sum_t'(p) >>> (2 * FW - AFW);
  endfunction

  // Q12.12 -> Q16.16-aligned term
  function automatic sum_t data_to_term(data_t x);
    return sum_t'(x) <<< (AFW - FW);
  endfunction

  // saturate a wide sum to the Q16.16 accumulator range
  function automatic acc_t sat_acc(sum_t s);
    if (s > sum_t'({1'b0, {(AW-1){1'b1}}})) return {1'b0, {(AW-1){1'b1}}};
    if (s < -sum_t'({1'b0, {(AW-1){1'b1}}}) - 1) return {1'b1, {(AW-1){1'b0}}};
    return s[AW-1:0];
  endfunction

  // Q16.16 accumulator -> Q12.12 datapath value, saturating
  function automatic data_t acc_to_data(acc_t a);
    acc_t t;
    t = a >>> (AFW - FW);
    if (t > acc_t'({1'b0, {(DW-1){1'b1}}})) return {1'b0, {(DW-1){1'b1}}};
    if (t < -acc_t'({1'b0, {(DW-1){1'b1}}}) - 1) return {1'b1, {(DW-1){1'b0}}};
    return t[DW-1:0];
  endfunction

  function automatic data_t relu(data_t x);
    return x[DW-1] ? '0 : x;
  endfunction

  // number of weights plus biases of an MLP whose layer widths are dims[0..nl]
  function automatic int unsigned mlp_nw(int unsigned nl, int unsigned dims [MAXL+1]);
    int unsigned n = 0;
    for (int unsigned l = 0; l < nl; l++) n += dims[l] * dims[l+1] + dims[l+1];
    return n;
  endfunction

  // offset of layer l's block (weights row by row, then biases) in the flat store
  function automatic int unsigned mlp_off(int unsigned l, int unsigned dims [MAXL+1]);
    int unsigned n = 0;
    for (int unsigned k = 0; k < l; k++) n += dims[k] * dims[k+1] + dims[k+1];
    return n;
  endfunction

  function automatic int unsigned imax(int unsigned a, int unsigned b);
    return (a > b) ? a : b;
  endfunction

endpackage
