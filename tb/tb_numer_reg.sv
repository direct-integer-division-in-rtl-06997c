// tb_numer_reg -- self-checking test of the dividend register processor.
//
// A binary model value X and per-digit power counts are kept beside the
// 18-digit register. Random steps: load a new X below the RNS range, scale by
// b_i^k for a random power digit i (the crossbar must carry |X|_{b_i^k}; the
// result is floor(X / b_i^k) with digit i's modulus reduced by k powers), and
// mixed-radix steps on the lowest valid digit (X <- (X - a) / modulus, digit
// invalid). After every step each valid digit must equal X modulo its current
// modulus, and the skip, power-count and zero outputs must match.
module tb_numer_reg;
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
  logic [N_DIG-1:0] skip;
  logic             zero;
  digit_t           xbar;

  numer_reg dut (.*);

  logic [175:0] X;
  localparam int fig1_sel [3] = '{1, 3, 4};
  localparam int fig1_k   [3] = '{3, 1, 4};
  int unsigned  p [18];

  function automatic rns_word_t to_rns(logic [175:0] v);
    rns_word_t w;
    for (int i = 0; i < 18; i++) w[i] = digit_t'(v % 176'(full_mod(i)));
    return w;
  endfunction

  task automatic check(string what);
    logic bad = 0;
    for (int i = 0; i < 18; i++) begin
      if (int'(pwr_cnt[i]) != p[i] || skip[i] != (p[i] == 0)) bad = 1;
      if (p[i] != 0 && 176'(word[i]) != X % 176'(pw(base(i), p[i]))) bad = 1;
    end
    if (zero != (X == 0)) bad = 1;
    checks++;
    if (bad) begin failures++; $display("FAIL %s X=%0d", what, X); end
  endtask

  task automatic two_cycle(dop_t first);
    @(negedge clk) op = first;
    @(negedge clk) op = DOP_MUL;
    @(negedge clk) op = DOP_NOP;
  endtask

  initial begin
    logic [175:0] R, m, a;
    int unsigned i, k, cands[$];
    R = 1;
    for (int j = 0; j < 18; j++) R = R * 176'(full_mod(j));
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    // Multi-factor scaling example: 6000 / 125 / 3 / 2^4 = 1, with the moduli
    // 125 used up, 243 reduced to 81 and 256 reduced to 16.
    X = 6000;
    for (int j = 0; j < 18; j++) p[j] = maxp(j);
    word_in = to_rns(X);
    @(negedge clk) op = DOP_LOAD;
    @(negedge clk) op = DOP_NOP;
    foreach (fig1_sel[s]) begin
      mod_sel = sel_t'(fig1_sel[s]); pwr_k = pwr_t'(fig1_k[s]);
      two_cycle(DOP_SUB);
      X = X / 176'(pw(base(fig1_sel[s]), fig1_k[s])); p[fig1_sel[s]] -= fig1_k[s];
      check("scaling example");
    end
    checks++;
    if (X != 1 || word[0] != 9'd1 || word[8] != 9'd1 || p[1] != 0 || p[3] != 4 || p[4] != 4) begin
      failures++; $display("FAIL scaling example end value");
    end
    for (int n = 0; n < 400; n++) begin
      if (n % 25 == 0) begin
        X = {$urandom, $urandom, $urandom, $urandom, $urandom} % R;
        if (n == 100) X = 0;
        for (int j = 0; j < 18; j++) p[j] = maxp(j);
        word_in = to_rns(X);
        @(negedge clk) op = DOP_LOAD;
        @(negedge clk) op = DOP_NOP;
        check("load");
        continue;
      end
      cands.delete();
      for (int j = 0; j < 8; j++) if (p[j] != 0) cands.push_back(j);
      if ($urandom % 4 != 0 && cands.size() != 0) begin
        i = cands[$urandom % cands.size()];
        k = 1 + $urandom % p[i];
        mod_sel = sel_t'(i); pwr_k = pwr_t'(k);
        m = 176'(pw(base(i), k));
        #1;
        checks++;
        if (176'(xbar) != X % m) begin failures++; $display("FAIL offset"); end
        two_cycle(DOP_SUB);
        X = X / m; p[i] -= k;
        check("scale");
      end else begin
        i = 99;
        for (int j = 17; j >= 0; j--) if (p[j] != 0) i = j;
        if (i == 99) begin n = n + (25 - n % 25) - 1; continue; end
        k = p[i];
        mod_sel = sel_t'(i); pwr_k = pwr_t'(k);
        m = 176'(pw(base(i), k));
        two_cycle(DOP_SUB);
        a = X % m;
        X = (X - a) / m; p[i] = 0;
        check("mrc");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
