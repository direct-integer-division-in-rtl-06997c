// tb_div_ctrl -- self-checking test of the divide controller against an
// integer-level model of the datapath.
//
// The three register processors are replaced by a behavioural model that keeps
// NUMER and DENOM as binary integers with per-digit power counts, and RECOMP
// as binary X, Y, ACCUM, DIFF and the last base-extended value. The model
// answers the controller's op codes the way the real registers do (a
// SUB/PASS + MUL pair divides by b_sel^pwr_k and lowers that digit's power
// count, INC adds one, LOAD takes the selected source at full powers, ...),
// and computes the status signals (zero, one, skip, power counts, zero
// powers) and the compare result. Besides the final quotient and remainder
// the testbench checks the controller's decisions as they happen:
//   - scaling picks the lowest digit with zero powers and all of them,
//     and the divisor is divisible by that factor
//   - increments happen only with no zeros and the base-2 digit valid
//   - base extension visits the lowest valid digit with its full power
//     count, and the loaded-back value equals the value before extension
//   - a zero divisor ends with div0 and no other work
module tb_div_ctrl;
  import rns_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  int   checks = 0, failures = 0;
  int   n_scale = 0, n_inc = 0, n_be = 0, n_iter = 0, n_cmp = 0;
  always #5 clk = ~clk;
  initial begin
    #100_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic             n_zero, d_zero, d_one, cmp_ge;
  logic [N_DIG-1:0] n_skip, d_skip;
  pwr_vec_t         n_pwr, d_pwr;
  pwr_t [N_PWR-1:0] d_zpow;
  dop_t             n_op, d_op;
  rop_t             r_op;
  sel_t             mod_sel;
  pwr_t             pwr_k;
  nsrc_t            n_src;
  dsrc_t            d_src;
  logic             r_from_denom, cmp_clr, cmp_upd, busy, done, div0;

  div_ctrl dut (.*);

  // ---------------- datapath model ----------------
  logic [175:0] N, D, X, Y, ACC, DIFF, BEV, CMPA, CMPB;
  int unsigned  np [18], dp [18];

  function automatic int unsigned zpow_of(logic [175:0] v, int unsigned p, int i);
    int unsigned z = 0;
    if (p == 0) return 0;
    if (v % 176'(pw(base(i), p)) == 0) return p;
    while (v % 176'(base(i)) == 0) begin v = v / 176'(base(i)); z++; end
    return z;
  endfunction

  always_comb begin
    n_zero = (N == 0);
    d_zero = (D == 0);
    d_one  = (D == 1);
    cmp_ge = (CMPA >= CMPB);
    for (int i = 0; i < 18; i++) begin
      n_skip[i] = (np[i] == 0);
      d_skip[i] = (dp[i] == 0);
      n_pwr[i]  = pwr_t'(np[i]);
      d_pwr[i]  = pwr_t'(dp[i]);
    end
    for (int i = 0; i < 8; i++) d_zpow[i] = pwr_t'(zpow_of(D, dp[i], i));
  end

  function automatic int lowest_valid(int unsigned p [18]);
    for (int i = 0; i < 18; i++) if (p[i] != 0) return i;
    return -1;
  endfunction

  // Sample the controller's outputs mid-cycle, check the decision, and apply
  // the operation at the next rising edge like the real registers.
  dop_t  s_nop, s_dop;
  rop_t  s_rop;
  int    s_sel, s_k;
  nsrc_t s_nsrc;
  dsrc_t s_dsrc;
  logic  s_rden, s_cmpclr;
  always @(negedge clk) if (rst_n) begin
    s_nop = n_op; s_dop = d_op; s_rop = r_op; s_sel = int'(mod_sel); s_k = int'(pwr_k);
    s_nsrc = n_src; s_dsrc = d_src; s_rden = r_from_denom; s_cmpclr = cmp_clr;
    // scaling decision
    if (s_dop == DOP_PASS) begin
      int z = -1;
      for (int i = 7; i >= 0; i--) if (d_zpow[i] != 0) z = i;
      checks++;
      if (z != s_sel || int'(d_zpow[z]) != s_k || s_nop != DOP_SUB ||
          D % 176'(pw(base(s_sel), s_k)) != 0) begin
        failures++; $display("FAIL scale selection sel=%0d k=%0d", s_sel, s_k);
      end
      n_scale++;
    end
    if (s_dop == DOP_INC) begin
      checks++;
      if (d_zpow != '0 || dp[IDX_TWO] == 0 || d_one) begin
        failures++; $display("FAIL increment condition");
      end
      n_inc++;
    end
    if (s_rop == ROP_BE_MULX) begin
      checks++;
      if (s_rden ? (s_dop != DOP_SUB || s_sel != lowest_valid(dp) || s_k != dp[s_sel])
                 : (s_nop != DOP_SUB || s_sel != lowest_valid(np) || s_k != np[s_sel])) begin
        failures++; $display("FAIL base-extension digit sel=%0d", s_sel);
      end
    end
    if (s_nop == DOP_SUB && s_dop == DOP_SUB) begin   // final comparison step
      checks++;
      if (s_sel != lowest_valid(np) || s_k != np[s_sel]) begin
        failures++; $display("FAIL compare digit sel=%0d", s_sel);
      end
    end
  end

  always @(posedge clk) if (rst_n) begin
    logic [175:0] m;
    m = 176'(pw(base(s_sel), s_k));
    // RECOMP
    unique case (s_rop)
      ROP_LOAD_XY:   begin ACC = 0; DIFF = X; end
      ROP_BE_CLR:    BEV = s_rden ? D : N;
      ROP_ACC_ADD:   ACC = ACC + BEV;
      ROP_ACC_INC:   ACC = ACC + 1;
      ROP_CALC_DIFF: DIFF = X - ACC * Y;
      default: ;
    endcase
    if (s_cmpclr) begin CMPA = DIFF; CMPB = Y; n_cmp++; end
    // NUMER
    unique case (s_nop)
      DOP_LOAD: begin
        if (s_nsrc == NSRC_BE) begin
          checks++;
          if (N != 0) begin failures++; $display("FAIL NUMER extension incomplete"); end
          n_be++;
        end
        N = (s_nsrc == NSRC_BE) ? BEV : (s_nsrc == NSRC_DIFF) ? DIFF : X;
        for (int i = 0; i < 18; i++) np[i] = maxp(i);
      end
      DOP_MUL: begin N = N / m; np[s_sel] -= s_k; end
      default: ;
    endcase
    // DENOM
    unique case (s_dop)
      DOP_LOAD: begin
        if (s_dsrc == DSRC_BE) begin
          checks++;
          if (D != 0) begin failures++; $display("FAIL DENOM extension incomplete"); end
          n_be++;
        end
        if (s_dsrc == DSRC_YCOPY) n_iter++;
        D = (s_dsrc == DSRC_BE) ? BEV : Y;
        for (int i = 0; i < 18; i++) dp[i] = maxp(i);
      end
      DOP_MUL: begin D = D / m; dp[s_sel] -= s_k; end
      DOP_INC: D = D + 1;
      default: ;
    endcase
  end

  task automatic divide(logic [175:0] x, logic [175:0] y);
    X = x; Y = y;
    @(negedge clk) start = 1'b1;
    @(negedge clk) start = 1'b0;
    while (!done) @(negedge clk);
    checks++;
    if (y == 0) begin
      if (!div0) begin failures++; $display("FAIL div0 not set"); end
    end else if (div0 || ACC != x / y || DIFF != x % y) begin
      failures++;
      $display("FAIL x=%0d y=%0d acc=%0d diff=%0d", x, y, ACC, DIFF);
    end
    @(negedge clk);
  endtask

  initial begin
    logic [175:0] R, x, y;
    R = 1;
    for (int j = 0; j < 18; j++) R = R * 176'(full_mod(j));
    N = 0; D = 0; X = 0; Y = 0; ACC = 0; DIFF = 0; BEV = 0; CMPA = 0; CMPB = 1;
    for (int i = 0; i < 18; i++) begin np[i] = 0; dp[i] = 0; end
    s_nop = DOP_NOP; s_dop = DOP_NOP; s_rop = ROP_NOP; s_sel = 0; s_k = 0;
    s_nsrc = NSRC_DIVIDEND; s_dsrc = DSRC_DIVISOR; s_rden = 0; s_cmpclr = 0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    divide(176'd987654321, 176'd11634943);
    divide(176'd5, 176'd0);
    divide(176'd0, 176'd9);
    divide(176'd77, 176'd1);
    divide(176'd77, 176'd77);
    for (int n = 0; n < 100; n++) begin
      x = {$urandom, $urandom, $urandom, $urandom, $urandom} % R;
      y = ({$urandom, $urandom, $urandom, $urandom, $urandom} % (R >> 1)) >> ($urandom % 150);
      if (y == 0) y = 3;
      divide(x, y);
    end
    $display("decisions: scale=%0d inc=%0d be=%0d iter=%0d cmp=%0d",
             n_scale, n_inc, n_be, n_iter, n_cmp);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
