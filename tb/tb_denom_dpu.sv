// tb_denom_dpu -- self-checking test of the divisor power-based DPU.
//
// Two instances (base 2, P = 8 and base 7, P = 3) are driven with random loads,
// increments, scaling steps where the unit is selected (bypass into REG, then
// divide by b^zpow, the powers it reports as zero), scaling steps of other
// digits (bypass, multiply by the inverse of b_sel^k), mixed-radix steps of
// other digits (subtract the crossbar, multiply) and of itself (invalidate).
// A behavioural model gives the expected digit, power count, zero-power count
// and =0 / =1 flags after every operation.
module tb_denom_dpu;
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
  localparam int unsigned IDXS [NI] = '{4, 6};

  dop_t   op [NI];
  sel_t   mod_sel [NI];
  pwr_t   pwr_k [NI];
  digit_t xbar [NI], digit_in [NI], xbar_drv [NI], digit [NI];
  pwr_t   pwr_cnt [NI], zpow [NI];
  logic   eq_zero [NI], eq_one [NI], skip [NI];

  for (genvar g = 0; g < NI; g++) begin : g_dut
    denom_dpu #(.IDX(IDXS[g])) dut (
      .clk, .rst_n, .op(op[g]), .mod_sel(mod_sel[g]), .pwr_k(pwr_k[g]),
      .xbar(xbar[g]), .digit_in(digit_in[g]), .xbar_drv(xbar_drv[g]),
      .digit(digit[g]), .pwr_cnt(pwr_cnt[g]), .zpow(zpow[g]),
      .eq_zero(eq_zero[g]), .eq_one(eq_one[g]), .skip(skip[g]));
  end

  function automatic int unsigned ref_zpow(int unsigned d, int unsigned b, int unsigned p);
    int unsigned z = 0;
    if (p == 0) return 0;
    if (d == 0) return p;
    while (z < p && d % b == 0) begin d = d / b; z++; end
    return z;
  endfunction

  task automatic check(int g, int unsigned md, int unsigned mp, string what);
    int unsigned b = base(IDXS[g]);
    checks++;
    if (int'(digit[g]) != md || int'(pwr_cnt[g]) != mp || skip[g] != (mp == 0) ||
        int'(zpow[g]) != ref_zpow(md, b, mp) ||
        (mp != 0 && (eq_zero[g] != (md == 0) || eq_one[g] != (md == 1)))) begin
      failures++;
      $display("FAIL %s dpu%0d: digit=%0d pwr=%0d zpow=%0d expected %0d/%0d/%0d", what, g,
               digit[g], pwr_cnt[g], zpow[g], md, mp, ref_zpow(md, b, mp));
    end
  endtask

  task automatic two_cycle(int g, dop_t first);
    @(negedge clk) op[g] = first;
    @(negedge clk) op[g] = DOP_MUL;
    @(negedge clk) op[g] = DOP_NOP;
  endtask

  task automatic run(int g);
    int unsigned i = IDXS[g], b = base(i), P = maxp(i);
    int unsigned md, mp, cur, s, k, xb, inv;
    op[g] = DOP_NOP; mod_sel[g] = '0; pwr_k[g] = '0; xbar[g] = '0; digit_in[g] = '0;
    for (int n = 0; n < 400; n++) begin
      if (n % 16 == 0 || mp == 0) begin
        md = ($urandom % 4 == 0) ? (b * ($urandom % 8)) % full_mod(i) : $urandom % full_mod(i);
        mp = P;
        @(negedge clk) begin op[g] = DOP_LOAD; digit_in[g] = digit_t'(md); end
        @(negedge clk) op[g] = DOP_NOP;
        check(g, md, mp, "load");
        continue;
      end
      cur = int'(pw(b, mp));
      case ($urandom % 5)
        0: begin
          @(negedge clk) op[g] = DOP_INC;
          @(negedge clk) op[g] = DOP_NOP;
          md = (md + 1) % cur;
          check(g, md, mp, "inc");
        end
        1: begin // selected for scaling by its zero powers
          k = ref_zpow(md, b, mp);
          if (k == 0) continue;
          mod_sel[g] = sel_t'(i); pwr_k[g] = pwr_t'(k);
          two_cycle(g, DOP_PASS);
          md = md / int'(pw(b, k)); mp = mp - k;
          check(g, md, mp, "scale-selected");
        end
        2: begin // another digit scales
          do s = $urandom % 18; while (s == i);
          k = 1 + $urandom % maxp(s);
          mod_sel[g] = sel_t'(s); pwr_k[g] = pwr_t'(k); xbar[g] = digit_t'($urandom);
          two_cycle(g, DOP_PASS);
          inv = bf_inv(pw(base(s), k), full_mod(i));
          md = int'((longint'(md) * inv) % cur);
          check(g, md, mp, "scale-other");
        end
        3: begin // another digit's mixed-radix step
          do s = $urandom % 18; while (s == i);
          k = 1 + $urandom % maxp(s);
          xb = $urandom % 512;
          mod_sel[g] = sel_t'(s); pwr_k[g] = pwr_t'(k); xbar[g] = digit_t'(xb);
          two_cycle(g, DOP_SUB);
          inv = bf_inv(pw(base(s), k), full_mod(i));
          md = int'((longint'((md + cur - xb % cur) % cur) * inv) % cur);
          check(g, md, mp, "mrc-other");
        end
        default: begin // own mixed-radix step
          @(negedge clk) begin mod_sel[g] = sel_t'(i); pwr_k[g] = pwr_t'(mp); end
          #1;
          checks++;
          if (int'(xbar_drv[g]) != md) begin failures++; $display("FAIL crossbar"); end
          xbar[g] = xbar_drv[g];
          two_cycle(g, DOP_SUB);
          md = 0; mp = 0;
          check(g, md, mp, "mrc-own");
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
