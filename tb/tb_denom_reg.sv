// tb_denom_reg -- self-checking test of the divisor register processor.
//
// A binary model value Y and per-digit power counts are kept beside the
// register. Random steps: load, increment (Y + 1), scaling by the zero powers
// of the lowest power digit that reports any (Y / b_i^zpow, digit i's modulus
// reduced), and mixed-radix steps on the lowest valid digit. Every step checks
// all valid digits against Y modulo their current moduli, the power counts,
// the zero-power counts of the power digits, and the zero and one flags.
module tb_denom_reg;
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

  dop_t             op = DOP_NOP;
  sel_t             mod_sel = '0;
  pwr_t             pwr_k = '0;
  rns_word_t        word_in = '0, word;
  pwr_vec_t         pwr_cnt;
  pwr_t [N_PWR-1:0] zpow;
  logic [N_DIG-1:0] skip;
  logic             zero, one;
  digit_t           xbar;

  denom_reg dut (.*);

  logic [175:0] Y;
  localparam int fig4_val [5] = '{41152, 643, 644, 161, 23};
  int unsigned  p [18];
  int           n_scale = 0, n_inc = 0, n_mrc = 0;

  function automatic rns_word_t to_rns(logic [175:0] v);
    rns_word_t w;
    for (int i = 0; i < 18; i++) w[i] = digit_t'(v % 176'(full_mod(i)));
    return w;
  endfunction

  function automatic int unsigned ref_zpow(int i);
    logic [175:0] v = Y;
    int unsigned z = 0;
    if (p[i] == 0) return 0;
    if (v % 176'(pw(base(i), p[i])) == 0) return p[i];
    while (v % 176'(base(i)) == 0) begin v = v / 176'(base(i)); z++; end
    return z;
  endfunction

  task automatic check(string what);
    logic bad = 0;
    for (int i = 0; i < 18; i++) begin
      if (int'(pwr_cnt[i]) != p[i] || skip[i] != (p[i] == 0)) bad = 1;
      if (p[i] != 0 && 176'(word[i]) != Y % 176'(pw(base(i), p[i]))) bad = 1;
      if (i < 8 && int'(zpow[i]) != ref_zpow(i)) bad = 1;
    end
    if (zero != (Y == 0) || one != (Y == 1)) bad = 1;
    checks++;
    if (bad) begin failures++; $display("FAIL %s Y=%0d", what, Y); end
  endtask

  task automatic two_cycle(dop_t first);
    @(negedge clk) op = first;
    @(negedge clk) op = DOP_MUL;
    @(negedge clk) op = DOP_NOP;
  endtask

  initial begin
    logic [175:0] R, m, a;
    int unsigned i, k;
    R = 1;
    for (int j = 0; j < 18; j++) R = R * 176'(full_mod(j));
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    // Divisor decomposition example: 123456 / 3 = 41152, / 2^6 = 643,
    // + 1 = 644, / 2^2 = 161, / 7 = 23; each step uses the lowest digit that
    // reports zero powers, with all of them.
    Y = 123456;
    for (int j = 0; j < 18; j++) p[j] = maxp(j);
    word_in = to_rns(Y);
    @(negedge clk) op = DOP_LOAD;
    @(negedge clk) op = DOP_NOP;
    foreach (fig4_val[s]) begin
      i = 99;
      for (int j = 7; j >= 0; j--) if (zpow[j] != 0) i = j;
      if (i == 99) begin
        @(negedge clk) op = DOP_INC;
        @(negedge clk) op = DOP_NOP;
        Y = Y + 1;
      end else begin
        k = zpow[i];
        mod_sel = sel_t'(i); pwr_k = pwr_t'(k);
        two_cycle(DOP_PASS);
        Y = Y / 176'(pw(base(i), k)); p[i] -= k;
      end
      check("decomposition example");
      checks++;
      if (Y != 176'(fig4_val[s])) begin
        failures++; $display("FAIL decomposition example step %0d: %0d", s, Y);
      end
    end
    for (int n = 0; n < 500; n++) begin
      if (n % 40 == 0) begin
        Y = {$urandom, $urandom, $urandom, $urandom, $urandom} % (R >> 2);
        if (n == 80) Y = 176'd11634943;
        for (int j = 0; j < 18; j++) p[j] = maxp(j);
        word_in = to_rns(Y);
        @(negedge clk) op = DOP_LOAD;
        @(negedge clk) op = DOP_NOP;
        check("load");
        continue;
      end
      i = 99;
      for (int j = 7; j >= 0; j--) if (ref_zpow(j) != 0) i = j;
      if (Y <= 1) begin n = n + (40 - n % 40) - 1; continue; end
      if (i != 99 && $urandom % 4 != 0) begin
        k = ref_zpow(i);
        mod_sel = sel_t'(i); pwr_k = pwr_t'(k);
        two_cycle(DOP_PASS);
        Y = Y / 176'(pw(base(i), k)); p[i] -= k;
        n_scale++;
        check("scale");
      end else if ($urandom % 3 != 0) begin
        @(negedge clk) op = DOP_INC;
        @(negedge clk) op = DOP_NOP;
        Y = Y + 1;
        n_inc++;
        check("inc");
      end else begin
        i = 99;
        for (int j = 17; j >= 0; j--) if (p[j] != 0) i = j;
        if (i == 99) continue;
        k = p[i];
        mod_sel = sel_t'(i); pwr_k = pwr_t'(k);
        m = 176'(pw(base(i), k));
        #1;
        checks++;
        if (176'(xbar) != Y % m) begin failures++; $display("FAIL crossbar"); end
        two_cycle(DOP_SUB);
        a = Y % m;
        Y = (Y - a) / m; p[i] = 0;
        n_mrc++;
        check("mrc");
      end
    end
    $display("steps: scale=%0d inc=%0d mrc=%0d", n_scale, n_inc, n_mrc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
