// numer_dpu -- dividend (NUMER) digit processing unit for a power-based modulus.
//
// Holds one digit d of the dividend, kept modulo the current modulus b^p where
// p is the power-valid count (P at load, reduced by every scaling, 0 = digit
// invalid / skipped). A two-cycle digit operation is driven by the register
// controller through op, mod_sel (the selected digit) and pwr_k (the
// pwr_valid bus: the number of powers k of the selected base to divide out):
//   DOP_SUB  cycle 1: reg <= |d - crossbar|_{b^p}
//   DOP_MUL  cycle 2: selected digit: d <= reg / b^k (direct division, the DIV
//            LUT), p <= p - k; other digits: d <= |reg * |(b_sel^k)^-1|_{M}|_{b^p}
// When this unit is selected it drives the offset |d|_{b^k} onto the crossbar,
// so every digit subtracts the smallest value that makes the word divisible by
// b^k. In a mixed-radix step k equals p, the offset is d itself and the digit
// is fully divided out (p -> 0), which is the paper's invalidation.
//
// Follows the paper: offsets per power, subtraction of the offset by all digits,
// DIV LUT for the selected digit, inverse-multiply for the others, variable
// modulus MOD(pwr) selected by the power-valid counter. Own choices: the
// offsets and the MOD(pwr) results are computed combinationally from the
// digit register instead of being held in separate latches; the crossbar is a
// multiplexer in the register processor instead of a tri-state bus.
module numer_dpu
  import rns_pkg::*;
#(
  parameter int unsigned IDX = 0   // digit position, 0..N_PWR-1
) (
  input  logic   clk,
  input  logic   rst_n,
  input  dop_t   op,
  input  sel_t   mod_sel,
  input  pwr_t   pwr_k,      // pwr_valid bus
  input  digit_t xbar,       // crossbar value from the selected digit
  input  digit_t digit_in,
  output digit_t xbar_drv,   // value this unit puts on the crossbar if selected
  output digit_t digit,
  output pwr_t   pwr_cnt,
  output logic   eq_zero,
  output logic   skip
);

  localparam int unsigned P    = maxp_of(IDX);
  localparam pwr_tab_t    PT   = pwr_tab(IDX);
  localparam lut_t        INV  = inv_lut(IDX);

  // MOD(pwr): value modulo b^p, one constant reduction per supported power.
  function automatic digit_t mod_p(logic [17:0] v, pwr_t p);
    digit_t r = '0;
    for (int unsigned q = 1; q <= P; q++)
      if (p == pwr_t'(q)) r = digit_t'(v % 18'(PT[q]));
    return r;
  endfunction

  // DIV LUT: v / b^k for a v known to be divisible.
  function automatic digit_t div_p(digit_t v, pwr_t k);
    digit_t r = v;
    for (int unsigned q = 1; q <= P; q++)
      if (k == pwr_t'(q)) r = digit_t'(v / 9'(PT[q]));
    return r;
  endfunction

  digit_t sub_reg;
  logic   selected;
  digit_t xbar_red, sub_res, mul_res, inv;

  assign selected = (mod_sel == sel_t'(IDX));
  assign skip     = (pwr_cnt == '0);
  assign eq_zero  = (digit == '0);
  assign xbar_drv = mod_p(18'(digit), pwr_k);
  assign inv      = lut_rd(INV, mod_sel, pwr_k);

  always_comb begin
    xbar_red = mod_p(18'(xbar), pwr_cnt);
    sub_res  = mod_p(18'(digit) + 18'(PT[pwr_cnt]) - 18'(xbar_red), pwr_cnt);
    mul_res  = mod_p(18'(sub_reg) * 18'(inv), pwr_cnt);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      digit   <= '0;
      sub_reg <= '0;
      pwr_cnt <= pwr_t'(P);
    end else begin
      unique case (op)
        DOP_LOAD: begin
          digit   <= digit_in;
          pwr_cnt <= pwr_t'(P);
        end
        DOP_SUB:  if (!skip) sub_reg <= sub_res;
        DOP_PASS: sub_reg <= digit;
        DOP_MUL:  if (!skip) begin
          if (selected) begin
            digit   <= div_p(sub_reg, pwr_k);
            pwr_cnt <= pwr_cnt - pwr_k;
          end else begin
            digit   <= mul_res;
          end
        end
        default: ;
      endcase
    end
  end

endmodule
