// tb_dpu_nonpwr -- self-checking test of the non-power digit processing unit
// (modulus 461 and 509): loads, increments, bypass, mixed-radix steps and
// scalings selected elsewhere (subtract a random crossbar value, multiply by the
// inverse of b_sel^k found by brute force), and its own mixed-radix step, which
// must drive its digit on the crossbar and leave it invalid.
module tb_dpu_nonpwr;
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
  localparam int unsigned IDXS [NI] = '{9, 17};

  dop_t   op [NI];
  sel_t   mod_sel [NI];
  pwr_t   pwr_k [NI];
  digit_t xbar [NI], digit_in [NI], xbar_drv [NI], digit [NI];
  pwr_t   pwr_cnt [NI];
  logic   eq_zero [NI], eq_one [NI], skip [NI];

  for (genvar g = 0; g < NI; g++) begin : g_dut
    dpu_nonpwr #(.IDX(IDXS[g])) dut (
      .clk, .rst_n, .op(op[g]), .mod_sel(mod_sel[g]), .pwr_k(pwr_k[g]),
      .xbar(xbar[g]), .digit_in(digit_in[g]), .xbar_drv(xbar_drv[g]),
      .digit(digit[g]), .pwr_cnt(pwr_cnt[g]),
      .eq_zero(eq_zero[g]), .eq_one(eq_one[g]), .skip(skip[g]));
  end

  task automatic check(int g, int unsigned md, bit mv, string what);
    checks++;
    if ((mv && int'(digit[g]) != md) || skip[g] != !mv || int'(pwr_cnt[g]) != int'(mv) ||
        (mv && (eq_zero[g] != (md == 0) || eq_one[g] != (md == 1)))) begin
      failures++;
      $display("FAIL %s dpu%0d: digit=%0d skip=%0d expected %0d/%0d", what, g,
               digit[g], skip[g], md, !mv);
    end
  endtask

  task automatic two_cycle(int g, dop_t first);
    @(negedge clk) op[g] = first;
    @(negedge clk) op[g] = DOP_MUL;
    @(negedge clk) op[g] = DOP_NOP;
  endtask

  task automatic run(int g);
    int unsigned i = IDXS[g], M = full_mod(i);
    int unsigned md, s, k, xb, inv;
    bit mv;
    op[g] = DOP_NOP; mod_sel[g] = '0; pwr_k[g] = '0; xbar[g] = '0; digit_in[g] = '0;
    for (int n = 0; n < 400; n++) begin
      if (n % 10 == 0 || !mv) begin
        md = ($urandom % 8 == 0) ? $urandom % 2 : $urandom % M; mv = 1;
        @(negedge clk) begin op[g] = DOP_LOAD; digit_in[g] = digit_t'(md); end
        @(negedge clk) op[g] = DOP_NOP;
        check(g, md, mv, "load");
        continue;
      end
      case ($urandom % 5)
        0: begin
          @(negedge clk) op[g] = DOP_INC;
          @(negedge clk) op[g] = DOP_NOP;
          md = (md + 1) % M;
          check(g, md, mv, "inc");
        end
        1, 2: begin
          do s = $urandom % 18; while (s == i);
          k = 1 + $urandom % maxp(s);
          xb = $urandom % 512;
          mod_sel[g] = sel_t'(s); pwr_k[g] = pwr_t'(k); xbar[g] = digit_t'(xb);
          inv = bf_inv(pw(base(s), k), M);
          if ($urandom % 2) begin
            two_cycle(g, DOP_SUB);
            md = int'((longint'((md + M - xb % M) % M) * inv) % M);
          end else begin
            two_cycle(g, DOP_PASS);
            md = int'((longint'(md) * inv) % M);
          end
          check(g, md, mv, "other");
        end
        default: begin
          @(negedge clk) begin mod_sel[g] = sel_t'(i); pwr_k[g] = pwr_t'(1); end
          #1;
          checks++;
          if (int'(xbar_drv[g]) != md) begin failures++; $display("FAIL crossbar"); end
          xbar[g] = xbar_drv[g];
          two_cycle(g, DOP_SUB);
          mv = 0;
          check(g, md, mv, "own");
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
