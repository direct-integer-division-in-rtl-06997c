// tb_numer_dpu -- self-checking test of the dividend power-based DPU.
//
// Two instances (base 5, P = 3 and base 3, P = 5) are driven with random
// sequences of loads, scaling steps where the unit is the selected digit
// (subtract its own offset |d|_{b^k}, then divide by b^k), steps where another
// digit is selected (subtract a random crossbar value, multiply by the inverse
// of b_sel^k), and mixed-radix steps that invalidate the digit. A behavioural
// model computes every expected digit, power count, offset and flag.
module tb_numer_dpu;
  import rns_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  int   checks = 0, failures = 0;
  always #5 clk = ~clk;
  initial begin
    #50_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam int NI = 2;
  localparam int unsigned IDXS [NI] = '{1, 3};

  dop_t   op [NI];
  sel_t   mod_sel [NI];
  pwr_t   pwr_k [NI];
  digit_t xbar [NI], digit_in [NI], xbar_drv [NI], digit [NI];
  pwr_t   pwr_cnt [NI];
  logic   eq_zero [NI], skip [NI];

  for (genvar g = 0; g < NI; g++) begin : g_dut
    numer_dpu #(.IDX(IDXS[g])) dut (
      .clk, .rst_n, .op(op[g]), .mod_sel(mod_sel[g]), .pwr_k(pwr_k[g]),
      .xbar(xbar[g]), .digit_in(digit_in[g]), .xbar_drv(xbar_drv[g]),
      .digit(digit[g]), .pwr_cnt(pwr_cnt[g]), .eq_zero(eq_zero[g]), .skip(skip[g]));
  end

  task automatic check(int g, int unsigned md, int unsigned mp, string what);
    checks++;
    if (int'(digit[g]) != md || int'(pwr_cnt[g]) != mp || skip[g] != (mp == 0) ||
        (mp != 0 && eq_zero[g] != (md == 0))) begin
      failures++;
      $display("FAIL %s dpu%0d: digit=%0d pwr=%0d expected %0d/%0d", what, g,
               digit[g], pwr_cnt[g], md, mp);
    end
  endtask

  task automatic run(int g);
    int unsigned i = IDXS[g], b = base(i), P = maxp(i);
    int unsigned md, mp, cur, mreg, s, k, xb, inv;
    op[g] = DOP_NOP; mod_sel[g] = '0; pwr_k[g] = '0; xbar[g] = '0; digit_in[g] = '0;
    for (int n = 0; n < 300; n++) begin
      if (n % 12 == 0) begin
        md = $urandom % full_mod(i); mp = P;
        @(negedge clk) begin op[g] = DOP_LOAD; digit_in[g] = digit_t'(md); end
        @(negedge clk) op[g] = DOP_NOP;
        check(g, md, mp, "load");
        continue;
      end
      if (mp == 0) begin n = n + (12 - n % 12) - 1; continue; end
      cur = int'(pw(b, mp));
      case ($urandom % 3)
        0: begin // this digit selected for scaling by b^k
          k = 1 + $urandom % mp;
          @(negedge clk) begin mod_sel[g] = sel_t'(i); pwr_k[g] = pwr_t'(k); end
          #1;
          checks++;
          if (int'(xbar_drv[g]) != md % int'(pw(b, k))) begin
            failures++; $display("FAIL offset dpu%0d", g);
          end
          xbar[g] = xbar_drv[g]; op[g] = DOP_SUB;
          mreg = md - md % int'(pw(b, k));
          @(negedge clk) op[g] = DOP_MUL;
          @(negedge clk) op[g] = DOP_NOP;
          md = mreg / int'(pw(b, k)); mp = mp - k;
          check(g, md, mp, "scale-selected");
        end
        1: begin // another digit selected
          do s = $urandom % 18; while (s == i);
          k = 1 + $urandom % maxp(s);
          xb = $urandom % 512;
          @(negedge clk) begin
            mod_sel[g] = sel_t'(s); pwr_k[g] = pwr_t'(k); xbar[g] = digit_t'(xb);
            op[g] = DOP_SUB;
          end
          mreg = (md + cur - xb % cur) % cur;
          @(negedge clk) op[g] = DOP_MUL;
          @(negedge clk) op[g] = DOP_NOP;
          inv = bf_inv(pw(base(s), k), full_mod(i));
          md = int'((longint'(mreg) * inv) % cur);
          check(g, md, mp, "scale-other");
        end
        default: begin // mixed-radix step on this digit: divided out
          @(negedge clk) begin mod_sel[g] = sel_t'(i); pwr_k[g] = pwr_t'(mp); end
          #1;
          xbar[g] = xbar_drv[g]; op[g] = DOP_SUB;
          @(negedge clk) op[g] = DOP_MUL;
          @(negedge clk) op[g] = DOP_NOP;
          md = 0; mp = 0;
          check(g, md, mp, "mrc");
        end
      endcase
    end
  endtask

  initial begin
    for (int g = 0; g < NI; g++) op[g] = DOP_NOP;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    fork
      run(0);
      run(1);
    join
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
