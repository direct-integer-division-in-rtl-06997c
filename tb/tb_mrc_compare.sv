// tb_mrc_compare -- self-checking test of the mixed-radix magnitude compare.
//
// Random pairs (A, B) are converted to mixed-radix digits in software, in the
// ascending digit order of the RNS moduli, and the digit pairs are presented
// one step at a time as the two register processors' crossbars would present
// them, until both values reach zero. ge must then equal (A >= B). Pairs
// include equal values, values that differ only in the most significant
// mixed-radix digit, only in the least significant one, and zero.
module tb_mrc_compare;
  import rns_pkg::*;
  import tb_ref_pkg::*;

  logic   clk = 1'b0, rst_n = 1'b0;
  int     checks = 0, failures = 0;
  logic   clr = 1'b0, upd = 1'b0, ge;
  digit_t a = '0, b = '0;

  always #5 clk = ~clk;
  initial begin
    #50_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  mrc_compare dut (.*);

  task automatic compare(logic [175:0] A, logic [175:0] B);
    logic [175:0] va = A, vb = B, m;
    @(negedge clk) clr = 1'b1;
    @(negedge clk) clr = 1'b0;
    for (int j = 0; j < 18 && (va != 0 || vb != 0); j++) begin
      m = 176'(full_mod(j));
      a = digit_t'(va % m);
      b = digit_t'(vb % m);
      upd = 1'b1;
      @(negedge clk) upd = 1'b0;
      a = digit_t'($urandom);   // crossbar not sampled without upd
      b = digit_t'($urandom);
      @(negedge clk);
      va = va / m;
      vb = vb / m;
    end
    checks++;
    if (ge != (A >= B)) begin
      failures++;
      $display("FAIL A=%0d B=%0d ge=%b", A, B, ge);
    end
  endtask

  initial begin
    logic [175:0] R, A, B;
    R = 1;
    for (int j = 0; j < 18; j++) R = R * 176'(full_mod(j));
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    compare(0, 0);
    compare(0, 1);
    compare(1, 0);
    compare(176'd987654321, 176'd11634943);
    compare(176'd10319109, 176'd11634943);
    compare(176'd11634943, 176'd11634943);
    compare(176'd121, 176'd120);
    for (int n = 0; n < 600; n++) begin
      A = {$urandom, $urandom, $urandom, $urandom, $urandom} % R;
      unique case (n % 4)
        0: B = {$urandom, $urandom, $urandom, $urandom, $urandom} % R;
        1: B = A;
        2: B = (A + 176'($urandom % 3)) % R;            // low digits differ
        default: B = (A + (R / 509) * 176'($urandom % 2 + 1)) % R;  // high digit
      endcase
      if ($urandom % 2) compare(A, B); else compare(B, A);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
