// denom_reg -- divisor register processor (DENOM): an 18-digit RNS word
// register built from digit processing units, with its crossbar bus.
//
// Digits 0..7 are power-based divisor DPUs (denom_dpu), digits 8..17 the basic
// non-power DPU (dpu_nonpwr). All DPUs share op code, mod_select and pwr_valid
// (pwr_k); the selected DPU drives the crossbar. A mixed-radix step is DOP_SUB
// then DOP_MUL; a scaling step is DOP_PASS then DOP_MUL; an increment is one
// DOP_INC cycle.
// Status: per-digit skip and power counts, per-power-digit zero-power counts
// (zpow, non-zero = "any zero"), zero = all valid digits zero, one = all valid
// digits one (the value is one: end of divisor decomposition).
//
// Follows the paper's Figs. 6, 7, 9 and 13; the tri-state crossbar is written as
// a multiplexer on mod_select.
module denom_reg
  import rns_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  dop_t             op,
  input  sel_t             mod_sel,
  input  pwr_t             pwr_k,
  input  rns_word_t        word_in,
  output rns_word_t        word,
  output pwr_vec_t         pwr_cnt,
  output pwr_t [N_PWR-1:0] zpow,
  output logic [N_DIG-1:0] skip,
  output logic             zero,
  output logic             one,
  output digit_t           xbar
);

  rns_word_t        drv;
  logic [N_DIG-1:0] dz, d1;

  for (genvar i = 0; i < N_DIG; i++) begin : g_dig
    if (i < N_PWR) begin : g_pwr
      denom_dpu #(.IDX(i)) u_dpu (
        .clk, .rst_n, .op, .mod_sel, .pwr_k, .xbar,
        .digit_in(word_in[i]), .xbar_drv(drv[i]), .digit(word[i]),
        .pwr_cnt(pwr_cnt[i]), .zpow(zpow[i]), .eq_zero(dz[i]), .eq_one(d1[i]),
        .skip(skip[i]));
    end else begin : g_np
      dpu_nonpwr #(.IDX(i)) u_dpu (
        .clk, .rst_n, .op, .mod_sel, .pwr_k, .xbar,
        .digit_in(word_in[i]), .xbar_drv(drv[i]), .digit(word[i]),
        .pwr_cnt(pwr_cnt[i]), .eq_zero(dz[i]), .eq_one(d1[i]), .skip(skip[i]));
    end
  end

  assign xbar = (int'(mod_sel) < N_DIG) ? drv[mod_sel] : '0;
  assign zero = &(dz | skip);
  assign one  = &(d1 | skip);

endmodule
