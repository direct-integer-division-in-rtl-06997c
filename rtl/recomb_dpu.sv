// recomb_dpu -- recombination / arithmetic digit processing unit for one
// power-based modulus M (full power) of the RECOMP register.
//
// Base extension: while a register processor performs a mixed-radix conversion,
// each mixed-radix digit a appears on that register's crossbar. This unit
// rebuilds its own residue |x|_M from those digits:
//   ROP_BE_CLR   digit <= 0, power <= 1
//   ROP_BE_MULX  cycle 1: reg   <= |a * power|_M
//   ROP_BE_MULP  cycle 2: digit <= |digit + reg|_M,
//                         power <= |power * |b_sel^k|_M|_M (power-constant LUT)
// so power always holds the weight of the next mixed-radix digit and digit the
// running sum. Both multiplications use one shared 9x9 multiplier and one MOD,
// since they fall on different cycles.
// Iteration arithmetic (carry-free, one cycle each) on the same multiplier:
//   ROP_LOAD_XY   X <= x_in, Y <= y_in, ACCUM <= 0, DIFF <= x_in
//   ROP_ACC_ADD   ACCUM <= |ACCUM + digit|_M (digit = base-extended NUMER)
//   ROP_ACC_INC   ACCUM <= |ACCUM + 1|_M
//   ROP_CALC_DIFF DIFF  <= |X - ACCUM * Y|_M
//
// Follows the paper's Fig. 11 (power register initialised to 1, power constant
// LUT addressed by {mod_select, pwr_valid}, REG between the digit multiply and
// the |add|, clear of the digit accumulator) and Fig. 12 (shared multiplier with
// arithmetic unit and result accumulator). Keeping private copies of X and Y and
// the DIFF register is this design's choice for the "X - ACCUM * Y" shortcut the
// paper describes.
module recomb_dpu
  import rns_pkg::*;
#(
  parameter int unsigned IDX = 0   // digit position, 0..N_PWR-1
) (
  input  logic   clk,
  input  logic   rst_n,
  input  rop_t   op,
  input  sel_t   mod_sel,
  input  pwr_t   pwr_k,
  input  digit_t xbar,      // mixed-radix digit from the crossbar
  input  digit_t x_in,
  input  digit_t y_in,
  output digit_t digit,     // recombined (base-extended) digit
  output digit_t accum,
  output digit_t diff,
  output digit_t ycpy
);

  localparam logic [17:0] M    = 18'(modulus_of(IDX));
  localparam lut_t        PCON = pow_lut(IDX);

  digit_t power, mreg, xcpy, pcon;
  digit_t mul_a, mul_b, prod_m;
  logic [17:0] prod;

  assign pcon = lut_rd(PCON, mod_sel, pwr_k);

  // Shared multiplier operand selection.
  always_comb begin
    unique case (op)
      ROP_BE_MULX:   begin mul_a = xbar;  mul_b = power; end
      ROP_BE_MULP:   begin mul_a = power; mul_b = pcon;  end
      ROP_CALC_DIFF: begin mul_a = accum; mul_b = ycpy;  end
      default:       begin mul_a = '0;    mul_b = '0;    end
    endcase
    prod   = 18'(mul_a) * 18'(mul_b);
    prod_m = digit_t'(prod % M);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      digit <= '0; power <= digit_t'(1); mreg <= '0;
      accum <= '0; diff  <= '0; xcpy <= '0; ycpy <= '0;
    end else begin
      unique case (op)
        ROP_LOAD_XY: begin
          xcpy  <= x_in;
          ycpy  <= y_in;
          accum <= '0;
          diff  <= x_in;
        end
        ROP_BE_CLR: begin
          digit <= '0;
          power <= digit_t'(1);
        end
        ROP_BE_MULX: mreg <= prod_m;
        ROP_BE_MULP: begin
          digit <= digit_t'((18'(digit) + 18'(mreg)) % M);
          power <= prod_m;
        end
        ROP_ACC_ADD:   accum <= digit_t'((18'(accum) + 18'(digit)) % M);
        ROP_ACC_INC:   accum <= digit_t'((18'(accum) + 18'd1) % M);
        ROP_CALC_DIFF: diff  <= digit_t'((18'(xcpy) + M - 18'(prod_m)) % M);
        default: ;
      endcase
    end
  end

endmodule
