// recomp_reg -- recombination register processor with iteration arithmetic
// (RECOMP).
//
// Digits 0..7 are recombination/arithmetic DPUs (recomb_dpu), digits 8..17
// arithmetic DPUs (arith_dpu). During a base extension the crossbar of the
// register being extended is fed in as xbar and src_word is that register's
// word; after the conversion finishes, be_word holds the value with every digit
// valid at full power and is loaded back (the "base extend return"). The same
// register keeps the copies of the dividend X and divisor Y, the quotient
// accumulator ACCUM and DIFF = X - ACCUM * Y, which is the next NUMER value,
// the value compared with Y at the end, and finally the remainder.
//
// Interface and timing: all operations are synchronous to clk; ROP_BE_CLR
// starts an extension, each mixed-radix digit on xbar takes ROP_BE_MULX then
// ROP_BE_MULP (with mod_sel/pwr_k naming that digit's modulus), and be_word is
// complete in the cycle after the last ROP_BE_MULP. ACCUM and DIFF updates
// take one cycle. Only the non-power digits of src_word are used (the power
// digits are rebuilt by recombination), so lint reports the rest unused.
//
// Follows the paper's Figs. 11-14. One RECOMP serves both the dividend and the
// divisor, one after the other, as in the paper's present design.
module recomp_reg
  import rns_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  rop_t      op,
  input  sel_t      mod_sel,
  input  pwr_t      pwr_k,
  input  digit_t    xbar,
  input  rns_word_t src_word,
  input  rns_word_t x_in,
  input  rns_word_t y_in,
  output rns_word_t be_word,
  output rns_word_t accum,
  output rns_word_t diff,
  output rns_word_t ycpy
);

  for (genvar i = 0; i < N_DIG; i++) begin : g_dig
    if (i < N_PWR) begin : g_pwr
      recomb_dpu #(.IDX(i)) u_dpu (
        .clk, .rst_n, .op, .mod_sel, .pwr_k, .xbar,
        .x_in(x_in[i]), .y_in(y_in[i]), .digit(be_word[i]),
        .accum(accum[i]), .diff(diff[i]), .ycpy(ycpy[i]));
    end else begin : g_np
      arith_dpu #(.IDX(i)) u_dpu (
        .clk, .rst_n, .op, .src_digit(src_word[i]),
        .x_in(x_in[i]), .y_in(y_in[i]), .digit(be_word[i]),
        .accum(accum[i]), .diff(diff[i]), .ycpy(ycpy[i]));
    end
  end

endmodule
