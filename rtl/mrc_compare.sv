// mrc_compare -- magnitude comparison of two RNS values from their mixed-radix
// digits.
//
// The dividend and divisor register processors run a mixed-radix conversion in
// the same digit order at the same time; on the first cycle of every digit
// step their crossbars carry the two mixed-radix digits a and b of equal
// weight. Digits are produced least significant first, so each step where a
// differs from b overrides the verdict of all earlier (less significant) steps.
//   clr  start a comparison (verdict: equal)
//   upd  sample a and b
//   ge   a-value >= b-value, valid once both conversions have reached zero
//
// The paper gives the compare block's place (fed by both crossbars, reporting
// to the controller) and its use; the three-state verdict register is this
// design's way of building it.
module mrc_compare
  import rns_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   clr,
  input  logic   upd,
  input  digit_t a,
  input  digit_t b,
  output logic   ge
);

  typedef enum logic [1:0] {CMP_EQ, CMP_GT, CMP_LT} cmp_t;
  cmp_t state;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      state <= CMP_EQ;
    else if (clr)    state <= CMP_EQ;
    else if (upd && a != b) state <= (a > b) ? CMP_GT : CMP_LT;
  end

  assign ge = (state != CMP_LT);

endmodule
