// tb_recomp_reg -- self-checking test of the recombination / arithmetic
// register (RECOMP).
//
// Base extension: a random value V is held in a register whose power digits
// have random reduced moduli b_i^p_i (the non-power digits are full). The
// testbench performs the mixed-radix conversion of V in software, in
// ascending digit order over the valid digits, and drives each mixed-radix
// digit on the crossbar with mod_sel = i and pwr_k = p_i, exactly as a register
// processor would (BE_CLR, then BE_MULX / BE_MULP per digit). Afterwards every
// digit of be_word must equal V modulo the full modulus. Then the iteration
// arithmetic is checked: ACCUM += digit, ACCUM += 1 and DIFF = X - ACCUM * Y
// against binary models.
module tb_recomp_reg;
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

  rop_t      op = ROP_NOP;
  sel_t      mod_sel = '0;
  pwr_t      pwr_k = '0;
  digit_t    xbar = '0;
  rns_word_t src_word = '0, x_in = '0, y_in = '0;
  rns_word_t be_word, accum, diff, ycpy;

  recomp_reg dut (.*);

  function automatic rns_word_t to_rns(logic [175:0] v);
    rns_word_t w;
    for (int i = 0; i < 18; i++) w[i] = digit_t'(v % 176'(full_mod(i)));
    return w;
  endfunction

  task automatic step(rop_t o);
    @(negedge clk) op = o;
    @(negedge clk) op = ROP_NOP;
  endtask

  initial begin
    logic [175:0] R, Rcur, V, v, m, a, X, Y, acc, R2;
    int unsigned p [18];
    R = 1;
    for (int j = 0; j < 18; j++) R = R * 176'(full_mod(j));
    R2 = R >> 1;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    // load X, Y
    X = {$urandom, $urandom, $urandom, $urandom, $urandom} % R;
    Y = {$urandom, $urandom, $urandom} % R;
    x_in = to_rns(X); y_in = to_rns(Y);
    step(ROP_LOAD_XY);
    acc = 0;
    checks++;
    if (accum != '0 || diff != x_in || ycpy != y_in) begin
      failures++; $display("FAIL load");
    end
    for (int n = 0; n < 150; n++) begin
      Rcur = 1;
      for (int j = 0; j < 18; j++) begin
        p[j] = (j < 8) ? $urandom % (maxp(j) + 1) : 1;
        if (n % 10 == 0 && j < 8) p[j] = maxp(j);
        Rcur = Rcur * 176'(pw(base(j), p[j]));
      end
      V = {$urandom, $urandom, $urandom, $urandom, $urandom} % Rcur;
      if (n == 5) V = 0;
      if (n == 10) V = 123456;   // the value of the mixed-radix examples
      src_word = to_rns(V);
      step(ROP_BE_CLR);
      v = V;
      for (int j = 0; j < 18 && v != 0; j++) begin
        if (p[j] == 0) continue;
        m = 176'(pw(base(j), p[j]));
        a = v % m;
        mod_sel = sel_t'(j); pwr_k = pwr_t'(p[j]); xbar = digit_t'(a);
        step(ROP_BE_MULX);
        step(ROP_BE_MULP);
        v = (v - a) / m;
      end
      checks++;
      if (be_word != to_rns(V)) begin failures++; $display("FAIL base extension V=%0d", V); end
      // iteration arithmetic
      if ($urandom % 2) begin
        step(ROP_ACC_ADD);
        acc = (acc + V) % R;
      end else begin
        step(ROP_ACC_INC);
        acc = (acc + 1) % R;
      end
      checks++;
      if (accum != to_rns(acc)) begin failures++; $display("FAIL accum"); end
      step(ROP_CALC_DIFF);
      checks++;
      if (diff != to_rns(176'((352'(X) + 352'(R) - (352'(acc) * 352'(Y)) % 352'(R)) % 352'(R)))) begin
        failures++; $display("FAIL diff");
      end
      if (n % 37 == 36) begin
        X = {$urandom, $urandom, $urandom, $urandom, $urandom} % R;
        Y = {$urandom, $urandom} % R2;
        x_in = to_rns(X); y_in = to_rns(Y);
        step(ROP_LOAD_XY);
        acc = 0;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
