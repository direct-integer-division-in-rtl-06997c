// tb_rns_int_divide -- end-to-end test of the RNS integer divider at its full
// 18-digit size.
//
// Operands are made in binary (up to 160 bits, reduced below the RNS range R),
// converted to residues by the testbench, divided by the unit, and the
// quotient and remainder residues are compared with the residues of the binary
// quotient X / Y and remainder X % Y. Directed cases: the worked example
// 987654321 / 11634943 (quotient 84, remainder 10319109), X = 0, Y = 1,
// X < Y, X = Y, Y = 0 (divide-by-zero flag), exact multiples, the largest
// operands R - 1, then random operands of mixed sizes (every tenth divisor
// from the top half of the range). The testbench also counts how often each mechanism
// of the controller ran (divisor scaling, divisor increment, base extension of
// NUMER and of DENOM, iteration reload, final +1 correction, divide by zero)
// and counts a failure for any that never happened.
module tb_rns_int_divide;
  import rns_pkg::*;

  localparam int NRAND = 200;

  logic      clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  rns_word_t dividend, divisor, quotient, remainder;
  logic      busy, done, div_by_zero;
  int        checks = 0, failures = 0;
  int        n_scale = 0, n_inc = 0, n_be_numer = 0, n_be_denom = 0;
  int        n_iter = 0, n_plus1 = 0, n_div0 = 0;
  longint    cycles = 0;

  rns_int_divide dut (.*);

  always #5 clk = ~clk;

  initial begin
    #200_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Mechanism counters, from the controller's state.
  always @(posedge clk) if (rst_n) begin
    cycles++;
    case (dut.u_ctrl.state)
      dut.u_ctrl.S_SCL_MUL: n_scale++;
      dut.u_ctrl.S_INC:     n_inc++;
      dut.u_ctrl.S_BE_LOAD: if (dut.u_ctrl.be_denom) n_be_denom++; else n_be_numer++;
      dut.u_ctrl.S_RELOAD:  n_iter++;
      dut.u_ctrl.S_CMP_RES: if (dut.cmp_ge) n_plus1++;
      default: ;
    endcase
    if (done && div_by_zero) n_div0++;
  end

  function automatic logic [175:0] range_r();
    logic [175:0] r = 1;
    for (int i = 0; i < N_DIG; i++) r = r * 176'(modulus_of(i));
    return r;
  endfunction

  function automatic rns_word_t to_rns(logic [175:0] v);
    rns_word_t w;
    for (int i = 0; i < N_DIG; i++) w[i] = digit_t'(v % 176'(modulus_of(i)));
    return w;
  endfunction

  function automatic logic [175:0] rand_wide(int bits);
    logic [175:0] v = '0;
    for (int i = 0; i < 6; i++) v = {v[143:0], 32'($urandom)};
    if (bits < 176) v = v & ((176'(1) << bits) - 1);
    return v;
  endfunction

  task automatic divide(logic [175:0] x, logic [175:0] y);
    logic [175:0] q, r;
    longint t0;
    dividend = to_rns(x);
    divisor  = to_rns(y);
    @(negedge clk) start = 1'b1;
    @(negedge clk) start = 1'b0;
    t0 = cycles;
    while (!done) @(negedge clk);
    checks++;
    if (y == 0) begin
      if (!div_by_zero) begin
        failures++;
        $display("FAIL divide by zero not flagged");
      end
    end else begin
      q = x / y;
      r = x % y;
      if (div_by_zero || quotient != to_rns(q) || remainder != to_rns(r)) begin
        failures++;
        $display("FAIL x=%0d y=%0d expected q=%0d r=%0d", x, y, q, r);
      end
      checks++;
      if (busy !== 1'b1) begin
        failures++;
        $display("FAIL busy low while done");
      end
    end
    $display("  x=%0d y=%0d cycles=%0d", x, y, cycles - t0);
    @(negedge clk);
  endtask

  initial begin
    logic [175:0] R, x, y;
    R = range_r();
    dividend = '0;
    divisor  = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    divide(176'd987654321, 176'd11634943);   // worked example of the paper
    // The quotient/remainder digits of the worked example, printed in its tables.
    checks++;
    if (quotient[0] != 9'd84 || remainder[4] != 9'd5 || remainder[0] != 9'd108) begin
      failures++;
      $display("FAIL worked-example digits");
    end
    divide(176'd0, 176'd12345);
    divide(176'd123456, 176'd1);
    divide(176'd100, 176'd1000);
    divide(176'd6000, 176'd6000);
    divide(176'd6000, 176'd0);
    divide(176'd123456 * 176'd129024, 176'd123456);
    divide(176'd1 << 140, 176'd3);
    divide(R - 1, R - 1);                     // largest operands
    divide(R - 1, (R >> 1) + 1);
    for (int n = 0; n < NRAND; n++) begin
      x = rand_wide(152) % R;
      y = rand_wide(1 + ($urandom % 150));
      if (n % 10 == 9) y = R - 1 - (rand_wide(152) % (R >> 1));   // top half of the range
      else if (y >= (R >> 1)) y = y >> 2;
      if (y == 0) y = 176'd7;
      divide(x, y);
    end
    $display("mechanisms: scale=%0d inc=%0d be_numer=%0d be_denom=%0d iter=%0d plus1=%0d div0=%0d",
             n_scale, n_inc, n_be_numer, n_be_denom, n_iter, n_plus1, n_div0);
    checks++;
    if (n_scale == 0 || n_inc == 0 || n_be_numer == 0 || n_be_denom == 0 ||
        n_iter == 0 || n_plus1 == 0 || n_div0 == 0) begin
      failures++;
      $display("FAIL a mechanism never happened");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
