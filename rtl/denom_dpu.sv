// denom_dpu -- divisor (DENOM) digit processing unit for a power-based modulus.
//
// Holds one digit d of the divisor modulo its current modulus b^p (p is the
// power-valid count; p = 0 marks the digit invalid / skipped). Operations:
//   DOP_LOAD  d <= digit_in, p <= P (MAX_PWRS)
//   DOP_SUB   cycle 1 of a mixed-radix step: reg <= |d - crossbar|_{b^p}
//   DOP_PASS  cycle 1 of a scaling step: reg <= d (the divisor is already
//             divisible, so nothing is subtracted)
//   DOP_MUL   cycle 2: selected digit: d <= reg / b^k (Div LUT), p <= p - k;
//             others: d <= |reg * |(b_sel^k)^-1|_M|_{b^p} (inverse LUT + MOD)
//   DOP_INC   d <= |d + 1|_{b^p}
// The unit drives its digit onto the crossbar when selected. Status outputs:
// eq_zero (d = 0), eq_one (d = 1), skip (p = 0) and zpow, the number of powers
// of b that divide d, capped at p ("any zero" when non-zero); zpow is what the
// selected divisor digit places on the pwr_valid bus for a scaling step.
//
// Follows the paper's Fig. 9: |sub| and bypass mux into REG, inverse LUT
// addressed by {mod_select, pwr_valid}, +1 path, three-input mux, MOD(pwr),
// Div LUT feeding back to the digit, =0/=1 and zero-power detection, power
// valid counter loaded with MAX_PWRS. Own choices: zpow is computed
// combinationally from the digit register (which is itself the latched state)
// rather than from a separate zero-power register; the tri-state crossbar and
// pwr_valid buses are multiplexers in the register processor / controller.
module denom_dpu
  import rns_pkg::*;
#(
  parameter int unsigned IDX = 0   // digit position, 0..N_PWR-1
) (
  input  logic   clk,
  input  logic   rst_n,
  input  dop_t   op,
  input  sel_t   mod_sel,
  input  pwr_t   pwr_k,
  input  digit_t xbar,
  input  digit_t digit_in,
  output digit_t xbar_drv,
  output digit_t digit,
  output pwr_t   pwr_cnt,
  output pwr_t   zpow,
  output logic   eq_zero,
  output logic   eq_one,
  output logic   skip
);

  localparam int unsigned P    = maxp_of(IDX);
  localparam pwr_tab_t    PT   = pwr_tab(IDX);
  localparam lut_t        INV  = inv_lut(IDX);

  function automatic digit_t mod_p(logic [17:0] v, pwr_t p);
    digit_t r = '0;
    for (int unsigned q = 1; q <= P; q++)
      if (p == pwr_t'(q)) r = digit_t'(v % 18'(PT[q]));
    return r;
  endfunction

  function automatic digit_t div_p(digit_t v, pwr_t k);
    digit_t r = v;
    for (int unsigned q = 1; q <= P; q++)
      if (k == pwr_t'(q)) r = digit_t'(v / 9'(PT[q]));
    return r;
  endfunction

  digit_t sub_reg;
  logic   selected;
  digit_t xbar_red, sub_res, mul_res, inc_res, inv;

  assign selected = (mod_sel == sel_t'(IDX));
  assign skip     = (pwr_cnt == '0);
  assign eq_zero  = (digit == '0);
  assign eq_one   = (digit == digit_t'(1));
  assign xbar_drv = digit;
  assign inv      = lut_rd(INV, mod_sel, pwr_k);

  always_comb begin
    xbar_red = mod_p(18'(xbar), pwr_cnt);
    sub_res  = mod_p(18'(digit) + 18'(PT[pwr_cnt]) - 18'(xbar_red), pwr_cnt);
    mul_res  = mod_p(18'(sub_reg) * 18'(inv), pwr_cnt);
    inc_res  = mod_p(18'(digit) + 18'd1, pwr_cnt);
  end

  // Zero-power state: largest q <= p with b^q | d.
  always_comb begin
    zpow = '0;
    for (int unsigned q = 1; q <= P; q++)
      if (pwr_t'(q) <= pwr_cnt && (digit % 9'(PT[q])) == '0) zpow = pwr_t'(q);
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
        DOP_INC:  if (!skip) digit <= inc_res;
        default: ;
      endcase
    end
  end

endmodule
