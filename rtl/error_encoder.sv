// error_encoder: merges the r-bit outputs of S checkers into one r-bit error
// signal for the chip's error pins.
//
// All checkers of one clock domain use the same r LFSR bits, so when nothing is
// wrong they all output the same word. For each bit position i the encoder
// takes the AND of the S checker bits when LFSR bit i is 1 and their OR when it
// is 0. If every checker agrees with the LFSR the result equals the LFSR bits;
// a single checker that deviates in bit i pulls the AND low (LFSR = 1) or the
// OR high (LFSR = 0) and the deviation reaches the pin.
//
// Interface: chk[s] is checker s's r-bit word, lfsr_bits the r LFSR bits of
// the same cycle. err_sig is registered: it shows the result for the LFSR
// state of the previous clock cycle. Reset clears it.
//
// The AND/OR/multiplexer structure (Fig. 9) follows the paper; registering the
// output (one cycle of latency) is this design's choice.
module error_encoder #(
  parameter int unsigned R = 8,
  parameter int unsigned S = 4
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [S-1:0][R-1:0] chk,
  input  logic [R-1:0]        lfsr_bits,
  output logic [R-1:0]        err_sig
);

  logic [R-1:0] and_all, or_all, merged;

  always_comb begin
    and_all = '1;
    or_all  = '0;
    for (int unsigned s = 0; s < S; s++) begin
      and_all = and_all & chk[s];
      or_all  = or_all | chk[s];
    end
    for (int unsigned i = 0; i < R; i++) begin
      merged[i] = lfsr_bits[i] ? and_all[i] : or_all[i];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) err_sig <= '0;
    else        err_sig <= merged;
  end

endmodule
