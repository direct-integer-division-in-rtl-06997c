// arith_dpu -- arithmetic digit processing unit for one non-power modulus M of
// the RECOMP register.
//
// Non-power digits are never scaled away by the divide controller, so they are
// always valid when a base extension starts and need no recombination: at
// ROP_BE_CLR the unit simply latches the digit of the register being extended
// (src_digit) and presents it as its base-extended result. The carry-free
// iteration arithmetic is the same as in recomb_dpu:
//   ROP_LOAD_XY   X <= x_in, Y <= y_in, ACCUM <= 0, DIFF <= x_in
//   ROP_ACC_ADD   ACCUM <= |ACCUM + digit|_M
//   ROP_ACC_INC   ACCUM <= |ACCUM + 1|_M
//   ROP_CALC_DIFF DIFF  <= |X - ACCUM * Y|_M      (single cycle)
//
// The paper names this unit ("an arithmetic DPU is provided for each
// non-power-based modulus") and says a valid full-power digit can be latched
// instead of recombined; the latch path from the extended register's word is
// this design's own choice of how that value reaches the unit.
module arith_dpu
  import rns_pkg::*;
#(
  parameter int unsigned IDX = N_PWR   // digit position, N_PWR..N_DIG-1
) (
  input  logic   clk,
  input  logic   rst_n,
  input  rop_t   op,
  input  digit_t src_digit,  // digit of the register being base-extended
  input  digit_t x_in,
  input  digit_t y_in,
  output digit_t digit,
  output digit_t accum,
  output digit_t diff,
  output digit_t ycpy
);

  localparam logic [17:0] M = 18'(modulus_of(IDX));

  digit_t xcpy, prod_m;

  assign prod_m = digit_t'((18'(accum) * 18'(ycpy)) % M);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      digit <= '0; accum <= '0; diff <= '0; xcpy <= '0; ycpy <= '0;
    end else begin
      unique case (op)
        ROP_LOAD_XY: begin
          xcpy  <= x_in;
          ycpy  <= y_in;
          accum <= '0;
          diff  <= x_in;
        end
        ROP_BE_CLR:    digit <= src_digit;
        ROP_ACC_ADD:   accum <= digit_t'((18'(accum) + 18'(digit)) % M);
        ROP_ACC_INC:   accum <= digit_t'((18'(accum) + 18'd1) % M);
        ROP_CALC_DIFF: diff  <= digit_t'((18'(xcpy) + M - 18'(prod_m)) % M);
        default: ;
      endcase
    end
  end

endmodule
