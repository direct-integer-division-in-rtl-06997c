// tb_arith_dpu -- self-checking test of the non-power arithmetic DPU (moduli
// 457 and 503): latching the extended register's digit at the start of a base
// extension, ACCUM accumulation and increment, and DIFF = X - ACCUM * Y, against
// a model.
module tb_arith_dpu;
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
  localparam int unsigned IDXS [NI] = '{8, 16};

  rop_t   op [NI];
  digit_t src [NI], x_in [NI], y_in [NI], digit [NI], accum [NI], diff [NI], ycpy [NI];

  for (genvar g = 0; g < NI; g++) begin : g_dut
    arith_dpu #(.IDX(IDXS[g])) dut (
      .clk, .rst_n, .op(op[g]), .src_digit(src[g]), .x_in(x_in[g]), .y_in(y_in[g]),
      .digit(digit[g]), .accum(accum[g]), .diff(diff[g]), .ycpy(ycpy[g]));
  end

  task automatic step(int g, rop_t o);
    @(negedge clk) op[g] = o;
    @(negedge clk) op[g] = ROP_NOP;
  endtask

  task automatic run(int g);
    int unsigned M = full_mod(IDXS[g]);
    int unsigned mx, my, macc, md;
    op[g] = ROP_NOP; src[g] = '0;
    for (int r = 0; r < 5; r++) begin
      mx = $urandom % M; my = $urandom % M; macc = 0;
      x_in[g] = digit_t'(mx); y_in[g] = digit_t'(my);
      step(g, ROP_LOAD_XY);
      checks++;
      if (int'(accum[g]) != 0 || int'(diff[g]) != mx || int'(ycpy[g]) != my) begin
        failures++; $display("FAIL load_xy %0d", g);
      end
      for (int n = 0; n < 40; n++) begin
        md = $urandom % M;
        src[g] = digit_t'(md);
        step(g, ROP_BE_CLR);
        src[g] = digit_t'($urandom);
        step(g, ROP_BE_MULX);     // must not disturb the latched digit
        checks++;
        if (int'(digit[g]) != md) begin failures++; $display("FAIL latch %0d", g); end
        step(g, ROP_ACC_ADD);
        macc = (macc + md) % M;
        if ($urandom % 2) begin step(g, ROP_ACC_INC); macc = (macc + 1) % M; end
        step(g, ROP_CALC_DIFF);
        checks++;
        if (int'(accum[g]) != macc ||
            int'(diff[g]) != int'((longint'(mx) + M - (longint'(macc) * my) % M) % M)) begin
          failures++; $display("FAIL arithmetic dpu%0d", g);
        end
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
