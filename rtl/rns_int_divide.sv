// rns_int_divide -- direct integer divider for 18-digit residue-number-system
// words: quotient floor(X / Y) and remainder X - Y * floor(X / Y), both
// returned in RNS, without conversion to binary.
//
// Three RNS register processors share one controller:
//   NUMER  (numer_reg)   dividend digits; scaled, base-extended, compared
//   DENOM  (denom_reg)   divisor digits; decomposed into powers of small bases
//   RECOMP (recomp_reg)  recombination for base extension, ACCUM, X - ACCUM*Y
//   compare (mrc_compare) reads both crossbars during the final comparison
//   div_ctrl             drives op codes, mod_select and the pwr_valid value
// Load multiplexers in front of NUMER (dividend / base-extend return / DIFF)
// and DENOM (divisor / base-extend return / copy of Y) and the crossbar
// selection in front of RECOMP are in this module.
//
// Interface: pulse start for one cycle with dividend and divisor valid (they
// are copied at the first cycle after start, S_LOAD, and may change
// afterwards). busy is high until done pulses for one cycle; quotient and
// remainder are then valid and stay so until the next start. div_by_zero is
// set with done when the divisor is zero. The latency depends on the operands
// (hundreds to a few thousand cycles for full-range operands).
//
// Each RNS word is 18 digits of 9 bits, digit i in bits [9*i +: 9], moduli
// 121, 125, 169, 243, 256, 289, 343, 361, 457, 461, 463, 467, 479, 487, 491,
// 499, 503, 509 (range about 2^151.4). The organisation follows the paper's
// Figs. 13 and 14; the load-path details are this design's choice.
module rns_int_divide
  import rns_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  logic      start,
  input  rns_word_t dividend,
  input  rns_word_t divisor,
  output logic      busy,
  output logic      done,
  output logic      div_by_zero,
  output rns_word_t quotient,
  output rns_word_t remainder
);

  dop_t  n_op, d_op;
  rop_t  r_op;
  sel_t  mod_sel;
  pwr_t  pwr_k;
  nsrc_t n_src;
  dsrc_t d_src;
  logic  r_from_denom, cmp_clr, cmp_upd, cmp_ge;

  rns_word_t        n_word, d_word, n_in, d_in, be_word, accum, diff, ycpy;
  pwr_vec_t         n_pwr, d_pwr;
  pwr_t [N_PWR-1:0] d_zpow;
  logic [N_DIG-1:0] n_skip, d_skip;
  logic             n_zero, d_zero, d_one;
  digit_t           n_xbar, d_xbar;

  always_comb begin
    unique case (n_src)
      NSRC_BE:   n_in = be_word;
      NSRC_DIFF: n_in = diff;
      default:   n_in = dividend;
    endcase
    unique case (d_src)
      DSRC_BE:    d_in = be_word;
      DSRC_YCOPY: d_in = ycpy;
      default:    d_in = divisor;
    endcase
  end

  numer_reg u_numer (
    .clk, .rst_n, .op(n_op), .mod_sel, .pwr_k, .word_in(n_in),
    .word(n_word), .pwr_cnt(n_pwr), .skip(n_skip), .zero(n_zero), .xbar(n_xbar));

  denom_reg u_denom (
    .clk, .rst_n, .op(d_op), .mod_sel, .pwr_k, .word_in(d_in),
    .word(d_word), .pwr_cnt(d_pwr), .zpow(d_zpow), .skip(d_skip),
    .zero(d_zero), .one(d_one), .xbar(d_xbar));

  recomp_reg u_recomp (
    .clk, .rst_n, .op(r_op), .mod_sel, .pwr_k,
    .xbar(r_from_denom ? d_xbar : n_xbar),
    .src_word(r_from_denom ? d_word : n_word),
    .x_in(dividend), .y_in(divisor),
    .be_word, .accum, .diff, .ycpy);

  mrc_compare u_cmp (
    .clk, .rst_n, .clr(cmp_clr), .upd(cmp_upd), .a(n_xbar), .b(d_xbar),
    .ge(cmp_ge));

  div_ctrl u_ctrl (
    .clk, .rst_n, .start,
    .n_zero, .n_skip, .n_pwr,
    .d_zero, .d_one, .d_skip, .d_pwr, .d_zpow,
    .cmp_ge,
    .n_op, .d_op, .r_op, .mod_sel, .pwr_k, .n_src, .d_src, .r_from_denom,
    .cmp_clr, .cmp_upd, .busy, .done, .div0(div_by_zero));

  assign quotient  = accum;
  assign remainder = diff;

endmodule
