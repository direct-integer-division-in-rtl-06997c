// numer_reg -- dividend register processor (NUMER): an 18-digit RNS word
// register built from digit processing units, with its crossbar bus.
//
// Digits 0..7 are power-based dividend DPUs (numer_dpu), digits 8..17 the basic
// non-power DPU (dpu_nonpwr). All DPUs receive the same op code, mod_select and
// pwr_valid (pwr_k) values each cycle; the DPU whose index equals mod_select
// drives the crossbar, which every DPU reads as the subtrahend. One scaling or
// mixed-radix step is DOP_SUB followed by DOP_MUL, two clock cycles.
// Status: per-digit skip (invalid) and power counts, and zero = every valid
// digit is zero (the value is zero).
//
// Follows the paper's Figs. 6, 7 and 13. The tri-state crossbar of the paper is
// written as a multiplexer on mod_select, which selects the same driver.
module numer_reg
  import rns_pkg::*;
(
  input  logic            clk,
  input  logic            rst_n,
  input  dop_t            op,
  input  sel_t            mod_sel,
  input  pwr_t            pwr_k,
  input  rns_word_t       word_in,
  output rns_word_t       word,
  output pwr_vec_t        pwr_cnt,
  output logic [N_DIG-1:0] skip,
  output logic            zero,
  output digit_t          xbar
);

  rns_word_t        drv;
  logic [N_DIG-1:0] dz;

  for (genvar i = 0; i < N_DIG; i++) begin : g_dig
    if (i < N_PWR) begin : g_pwr
      numer_dpu #(.IDX(i)) u_dpu (
        .clk, .rst_n, .op, .mod_sel, .pwr_k, .xbar,
        .digit_in(word_in[i]), .xbar_drv(drv[i]), .digit(word[i]),
        .pwr_cnt(pwr_cnt[i]), .eq_zero(dz[i]), .skip(skip[i]));
    end else begin : g_np
      logic unused_one;
      dpu_nonpwr #(.IDX(i)) u_dpu (
        .clk, .rst_n, .op, .mod_sel, .pwr_k, .xbar,
        .digit_in(word_in[i]), .xbar_drv(drv[i]), .digit(word[i]),
        .pwr_cnt(pwr_cnt[i]), .eq_zero(dz[i]), .eq_one(unused_one), .skip(skip[i]));
    end
  end

  assign xbar = (int'(mod_sel) < N_DIG) ? drv[mod_sel] : '0;
  assign zero = &(dz | skip);

endmodule
