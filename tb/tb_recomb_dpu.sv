// tb_recomb_dpu -- self-checking test of the recombination / arithmetic DPU.
//
// For two instances (moduli 121 and 256) the testbench picks a random value x
// below the product of a random set of digit moduli (random digits skipped,
// random reduced powers b^k), performs the mixed-radix conversion of x over that
// set in software, and feeds each mixed-radix digit on the crossbar with the
// digit's mod_select and power, two cycles per digit. The recombined digit must
// equal |x|_M. The arithmetic operations (load of X and Y, ACCUM += digit,
// ACCUM += 1, DIFF = X - ACCUM * Y) are checked against a model.
module tb_recomb_dpu;
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
  localparam int unsigned IDXS [NI] = '{0, 4};

  rop_t   op [NI];
  sel_t   mod_sel [NI];
  pwr_t   pwr_k [NI];
  digit_t xbar [NI], x_in [NI], y_in [NI], digit [NI], accum [NI], diff [NI], ycpy [NI];

  for (genvar g = 0; g < NI; g++) begin : g_dut
    recomb_dpu #(.IDX(IDXS[g])) dut (
      .clk, .rst_n, .op(op[g]), .mod_sel(mod_sel[g]), .pwr_k(pwr_k[g]),
      .xbar(xbar[g]), .x_in(x_in[g]), .y_in(y_in[g]), .digit(digit[g]),
      .accum(accum[g]), .diff(diff[g]), .ycpy(ycpy[g]));
  end

  task automatic step(int g, rop_t o);
    @(negedge clk) op[g] = o;
    @(negedge clk) op[g] = ROP_NOP;
  endtask

  task automatic run(int g);
    int unsigned M = full_mod(IDXS[g]);
    longint unsigned x0, x, prod, m, a;
    int unsigned js[$], ks[$], mx, my, macc, exp_d;
    op[g] = ROP_NOP; mod_sel[g] = '0; pwr_k[g] = '0; xbar[g] = '0;
    mx = $urandom % M; my = $urandom % M;
    x_in[g] = digit_t'(mx); y_in[g] = digit_t'(my);
    step(g, ROP_LOAD_XY);
    macc = 0;
    checks++;
    if (int'(accum[g]) != 0 || int'(diff[g]) != mx || int'(ycpy[g]) != my) begin
      failures++; $display("FAIL load_xy %0d", g);
    end
    for (int n = 0; n < 60; n++) begin
      js.delete(); ks.delete(); prod = 1;
      for (int j = 0; j < 18 && prod < 64'(1) << 40; j++) begin
        if ($urandom % 4 == 0) continue;
        js.push_back(j);
        ks.push_back(1 + $urandom % maxp(j));
        prod *= pw(base(j), ks[$]);
      end
      x0 = {$urandom, $urandom} % prod;
      if (n % 10 == 0) x0 = 0;
      step(g, ROP_BE_CLR);
      x = x0;
      for (int t = 0; t < js.size() && x != 0; t++) begin
        m = pw(base(js[t]), ks[t]);
        a = x % m;
        x = (x - a) / m;
        mod_sel[g] = sel_t'(js[t]); pwr_k[g] = pwr_t'(ks[t]); xbar[g] = digit_t'(a);
        @(negedge clk) op[g] = ROP_BE_MULX;
        @(negedge clk) op[g] = ROP_BE_MULP;
        @(negedge clk) op[g] = ROP_NOP;
      end
      exp_d = int'(x0 % M);
      checks++;
      if (int'(digit[g]) != exp_d) begin
        failures++; $display("FAIL recombine dpu%0d x=%0d got %0d expected %0d", g, x0, digit[g], exp_d);
      end
      // iteration arithmetic on the recombined digit
      step(g, ROP_ACC_ADD);
      macc = (macc + exp_d) % M;
      if (n % 3 == 0) begin step(g, ROP_ACC_INC); macc = (macc + 1) % M; end
      step(g, ROP_CALC_DIFF);
      checks++;
      if (int'(accum[g]) != macc ||
          int'(diff[g]) != int'((longint'(mx) + M - (longint'(macc) * my) % M) % M)) begin
        failures++; $display("FAIL arithmetic dpu%0d", g);
      end
    end
  endtask

  initial begin
    for (int g = 0; g < NI; g++) op[g] = ROP_NOP;
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
