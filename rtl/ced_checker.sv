// ced_checker: r-bit TPAD checker with LFSR-encoded error output.
//
// Compares r actual check bits with r predicted check bits and encodes the
// result with r bits of the error LFSR: out[i] = actual[i] ^ predicted[i] ^
// lfsr_bits[i]. When the two agree the output equals the LFSR bits exactly; any
// disagreement changes the output to another value. Because the LFSR value
// changes every cycle, a Trojan cannot hold the checker output at a fixed
// "no error" constant.
//
// Interface: valid qualifies the comparison (when low the checker reports "no
// error", i.e. outputs lfsr_bits); actual/predicted the two r-bit words;
// lfsr_bits the r LFSR bits chosen at design time for this clock domain.
// Combinational.
//
// The XOR structure of Fig. 8b and the rule "output equals the LFSR bits when
// there is no attack" follow the paper. The valid input is this design's
// addition, needed for checkers that only have something to check on some
// cycles.
module ced_checker #(
  parameter int unsigned R = 8
) (
  input  logic         valid,
  input  logic [R-1:0] actual,
  input  logic [R-1:0] predicted,
  input  logic [R-1:0] lfsr_bits,
  output logic [R-1:0] err
);

  always_comb begin
    err = lfsr_bits;
    if (valid) err = actual ^ predicted ^ lfsr_bits;
  end

endmodule
