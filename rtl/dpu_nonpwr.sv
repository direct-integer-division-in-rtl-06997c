// dpu_nonpwr -- digit processing unit for a non-power (prime) modulus, used in
// both the dividend and the divisor register processors.
//
// This is the basic mixed-radix-conversion DPU: a digit register, a modular
// subtractor whose subtrahend is the crossbar, a pipeline register, a 9x9
// multiplier by a constant from the inverse LUT (addressed by {mod_select,
// pwr_valid}) followed by a MOD reduction, a digit_in load path and a one-bit
// valid counter. Operations (two cycles per mixed-radix digit):
//   DOP_LOAD  d <= digit_in, valid
//   DOP_SUB   reg <= |d - crossbar|_M
//   DOP_PASS  reg <= d
//   DOP_MUL   selected: the digit is divided out and becomes invalid;
//             others: d <= |reg * |(b_sel^k)^-1|_M|_M
//   DOP_INC   d <= |d + 1|_M
// The controller never selects a non-power digit for scaling, so its only
// selection is in a mixed-radix step, where it drives its digit on the
// crossbar.
//
// pwr_cnt is the valid bit widened to the power-count width, so that both DPU
// kinds present the same status; its upper bits are constant zero.
//
// Follows the paper's Fig. 8 and its remark that non-power DPUs are the basic
// DPU with the power-specific functions removed. Own choice: the increment path
// is kept, because the divisor's increment must change every digit of the word,
// non-power digits included; the dividend never issues it.
module dpu_nonpwr
  import rns_pkg::*;
#(
  parameter int unsigned IDX = N_PWR   // digit position, N_PWR..N_DIG-1
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
  output logic   eq_zero,
  output logic   eq_one,
  output logic   skip
);

  localparam logic [17:0] M   = 18'(modulus_of(IDX));
  localparam lut_t        INV = inv_lut(IDX);

  digit_t sub_reg, inv;
  logic   valid, selected;

  assign selected = (mod_sel == sel_t'(IDX));
  assign skip     = !valid;
  assign pwr_cnt  = pwr_t'(valid);
  assign eq_zero  = (digit == '0);
  assign eq_one   = (digit == digit_t'(1));
  assign xbar_drv = digit;
  assign inv      = lut_rd(INV, mod_sel, pwr_k);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      digit   <= '0;
      sub_reg <= '0;
      valid   <= 1'b1;
    end else begin
      unique case (op)
        DOP_LOAD: begin
          digit <= digit_in;
          valid <= 1'b1;
        end
        DOP_SUB:  if (valid) sub_reg <= digit_t'((18'(digit) + M - (18'(xbar) % M)) % M);
        DOP_PASS: sub_reg <= digit;
        DOP_MUL:  if (valid) begin
          if (selected) begin
            digit <= '0;
            valid <= 1'b0;
          end else begin
            digit <= digit_t'((18'(sub_reg) * 18'(inv)) % M);
          end
        end
        DOP_INC:  if (valid) digit <= digit_t'((18'(digit) + 18'd1) % M);
        default: ;
      endcase
    end
  end

endmodule
