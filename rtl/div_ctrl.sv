// div_ctrl -- integer divide controller of the RNS divide unit.
//
// Sequences the NUMER (dividend), DENOM (divisor) and RECOMP register
// processors through the improved type-II division: the divisor is decomposed
// by repeated scaling by powers of the small bases ("zeros") and by +1
// increments until it reaches one, while the dividend is floor-divided by the
// same factors; the result is a partial quotient Z_i = floor(X_{i-1} / Yhat),
// accumulated in ACCUM, after which NUMER is reloaded with X - ACCUM * Y and
// the divisor with a fresh copy of Y. When NUMER reaches zero the last
// iteration value is compared with Y, ACCUM is incremented if it is not
// smaller, and the remainder X - ACCUM * Y is formed.
//
// Decision order in S_DECIDE (one decision per visit):
//   NUMER = 0                      -> compare, +1, remainder, done
//   DENOM = 1                      -> base-extend NUMER, ACCUM += NUMER,
//                                     NUMER <= X - ACCUM*Y, DENOM <= Y
//   a power digit of DENOM has a zero power (lowest digit index first)
//                                  -> scale NUMER and DENOM by b^k (2 cycles)
//   no zeros, base-2 digit valid   -> DENOM += 1
//   no zeros, base-2 digit invalid -> base-extend NUMER, then DENOM
// A divisor of zero ends the operation at once with div0 set.
// A base extension is a mixed-radix conversion of the target register over its
// valid digits in ascending order (2 cycles per digit: SUB + BE_MULX, then
// MUL + BE_MULP), ending when the remaining value is zero, followed by a load of
// the recombined word. The final comparison runs the same conversion on both
// registers at once with the compare block sampling both crossbars.
//
// The states, their transitions and the selection conditions follow the
// paper's description of its (abbreviated) state diagram; the split of each
// state into single-cycle steps, the lowest-index selection rule (which
// reproduces the paper's worked example), the load-source encodings and the
// controller driving the pwr_valid value it reads from the selected digit's
// status are this design's choices.
module div_ctrl
  import rns_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  // NUMER status
  input  logic             n_zero,
  input  logic [N_DIG-1:0] n_skip,
  input  pwr_vec_t         n_pwr,
  // DENOM status
  input  logic             d_zero,
  input  logic             d_one,
  input  logic [N_DIG-1:0] d_skip,
  input  pwr_vec_t         d_pwr,
  input  pwr_t [N_PWR-1:0] d_zpow,
  // compare block
  input  logic             cmp_ge,
  // control
  output dop_t             n_op,
  output dop_t             d_op,
  output rop_t             r_op,
  output sel_t             mod_sel,
  output pwr_t             pwr_k,
  output nsrc_t            n_src,
  output dsrc_t            d_src,
  output logic             r_from_denom,  // RECOMP listens to DENOM (else NUMER)
  output logic             cmp_clr,
  output logic             cmp_upd,
  output logic             busy,
  output logic             done,
  output logic             div0
);

  typedef enum logic [4:0] {
    S_IDLE, S_LOAD, S_CHECK0, S_DECIDE, S_SCL_SUB, S_SCL_MUL, S_INC,
    S_BE_CLR, S_BE_CHK, S_BE_SUB, S_BE_MUL, S_BE_LOAD,
    S_ACCUM, S_CALC, S_RELOAD,
    S_CMP_LOAD, S_CMP_CHK, S_CMP_SUB, S_CMP_MUL, S_CMP_RES, S_REM, S_DONE
  } state_t;

  state_t state;
  sel_t   sel_q;
  pwr_t   k_q;
  logic   be_denom;   // base extension target: 1 = DENOM, 0 = NUMER
  logic   be_both;    // after NUMER, also extend DENOM
  logic   be_to_acc;  // after the extension, go on to ACCUM (else DECIDE)

  // Lowest-index valid digit of a register.
  function automatic sel_t first_valid(logic [N_DIG-1:0] skip);
    sel_t s = '0;
    for (int i = N_DIG - 1; i >= 0; i--)
      if (!skip[i]) s = sel_t'(i);
    return s;
  endfunction

  // Lowest-index power digit of DENOM with a zero power.
  logic any_zero;
  sel_t zsel;
  always_comb begin
    any_zero = 1'b0;
    zsel     = '0;
    for (int i = N_PWR - 1; i >= 0; i--)
      if (d_zpow[i] != '0) begin
        any_zero = 1'b1;
        zsel     = sel_t'(i);
      end
  end

  logic             be_zero;
  logic [N_DIG-1:0] be_skip;
  pwr_vec_t         be_pwr;
  assign be_zero = be_denom ? d_zero : n_zero;
  assign be_skip = be_denom ? d_skip : n_skip;
  assign be_pwr  = be_denom ? d_pwr  : n_pwr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      sel_q     <= '0;
      k_q       <= '0;
      be_denom  <= 1'b0;
      be_both   <= 1'b0;
      be_to_acc <= 1'b0;
      div0      <= 1'b0;
    end else begin
      unique case (state)
        S_IDLE:   if (start) begin
          state <= S_LOAD;
          div0  <= 1'b0;
        end
        S_LOAD:   state <= S_CHECK0;
        S_CHECK0: if (d_zero) begin
          div0  <= 1'b1;
          state <= S_DONE;
        end else begin
          state <= S_DECIDE;
        end
        S_DECIDE: begin
          if (n_zero) begin
            state <= S_CMP_LOAD;
          end else if (d_one) begin
            be_denom  <= 1'b0;
            be_both   <= 1'b0;
            be_to_acc <= 1'b1;
            state     <= S_BE_CLR;
          end else if (any_zero) begin
            sel_q <= zsel;
            k_q   <= d_zpow[zsel[2:0]];
            state <= S_SCL_SUB;
          end else if (d_pwr[IDX_TWO] != '0) begin
            state <= S_INC;
          end else begin
            be_denom  <= 1'b0;
            be_both   <= 1'b1;
            be_to_acc <= 1'b0;
            state     <= S_BE_CLR;
          end
        end
        S_SCL_SUB: state <= S_SCL_MUL;
        S_SCL_MUL: state <= S_DECIDE;
        S_INC:     state <= S_DECIDE;
        S_BE_CLR:  state <= S_BE_CHK;
        S_BE_CHK:  if (be_zero) begin
          state <= S_BE_LOAD;
        end else begin
          sel_q <= first_valid(be_skip);
          k_q   <= be_pwr[first_valid(be_skip)];
          state <= S_BE_SUB;
        end
        S_BE_SUB:  state <= S_BE_MUL;
        S_BE_MUL:  state <= S_BE_CHK;
        S_BE_LOAD: if (!be_denom && be_both) begin
          be_denom <= 1'b1;
          state    <= S_BE_CLR;
        end else begin
          state <= be_to_acc ? S_ACCUM : S_DECIDE;
        end
        S_ACCUM:    state <= S_CALC;
        S_CALC:     state <= S_RELOAD;
        S_RELOAD:   state <= S_DECIDE;
        S_CMP_LOAD: state <= S_CMP_CHK;
        S_CMP_CHK:  if (n_zero && d_zero) begin
          state <= S_CMP_RES;
        end else begin
          sel_q <= first_valid(n_skip);
          k_q   <= n_pwr[first_valid(n_skip)];
          state <= S_CMP_SUB;
        end
        S_CMP_SUB:  state <= S_CMP_MUL;
        S_CMP_MUL:  state <= S_CMP_CHK;
        S_CMP_RES:  state <= S_REM;
        S_REM:      state <= S_DONE;
        S_DONE:     state <= S_IDLE;
        default:    state <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    n_op         = DOP_NOP;
    d_op         = DOP_NOP;
    r_op         = ROP_NOP;
    mod_sel      = sel_q;
    pwr_k        = k_q;
    n_src        = NSRC_DIVIDEND;
    d_src        = DSRC_DIVISOR;
    r_from_denom = be_denom;
    cmp_clr      = 1'b0;
    cmp_upd      = 1'b0;
    unique case (state)
      S_LOAD: begin
        n_op = DOP_LOAD; d_op = DOP_LOAD; r_op = ROP_LOAD_XY;
      end
      S_SCL_SUB: begin n_op = DOP_SUB; d_op = DOP_PASS; end
      S_SCL_MUL: begin n_op = DOP_MUL; d_op = DOP_MUL;  end
      S_INC:     d_op = DOP_INC;
      S_BE_CLR:  r_op = ROP_BE_CLR;
      S_BE_SUB: begin
        if (be_denom) d_op = DOP_SUB; else n_op = DOP_SUB;
        r_op = ROP_BE_MULX;
      end
      S_BE_MUL: begin
        if (be_denom) d_op = DOP_MUL; else n_op = DOP_MUL;
        r_op = ROP_BE_MULP;
      end
      S_BE_LOAD: begin
        if (be_denom) begin d_op = DOP_LOAD; d_src = DSRC_BE; end
        else          begin n_op = DOP_LOAD; n_src = NSRC_BE; end
      end
      S_ACCUM:  r_op = ROP_ACC_ADD;
      S_CALC:   r_op = ROP_CALC_DIFF;
      S_RELOAD: begin
        n_op = DOP_LOAD; n_src = NSRC_DIFF;
        d_op = DOP_LOAD; d_src = DSRC_YCOPY;
      end
      S_CMP_LOAD: begin
        n_op = DOP_LOAD; n_src = NSRC_DIFF;
        d_op = DOP_LOAD; d_src = DSRC_YCOPY;
        cmp_clr = 1'b1;
      end
      S_CMP_SUB: begin n_op = DOP_SUB; d_op = DOP_SUB; cmp_upd = 1'b1; end
      S_CMP_MUL: begin n_op = DOP_MUL; d_op = DOP_MUL; end
      S_CMP_RES: if (cmp_ge) r_op = ROP_ACC_INC;
      S_REM:     r_op = ROP_CALC_DIFF;
      default: ;
    endcase
  end

  assign busy = (state != S_IDLE);
  assign done = (state == S_DONE);

endmodule
