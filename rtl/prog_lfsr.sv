// prog_lfsr: LFSR of length L with programmable feedback polynomial and seed,
// the source of TPAD's error-signal encoding.
//
// A shift register of L flip-flops with an XOR between neighbouring stages
// (Galois form). The last stage, q[L-1], is fed back into stage 0 and, through
// a programmable tap, into the XOR in front of every other stage: each XOR's
// second input is either 0 or q[L-1]. With taps chosen this way any
// polynomial of degree L, in particular any primitive one, can be realised.
// Each tap selection is a two-input switchbox choosing between 0 and q[L-1].
//
// Interface: load copies seed into the register (used at start-up); otherwise
// the register advances every clock cycle. taps[i] (1 <= i < L) enables the
// feedback XOR in front of stage i; taps[0] is not used (stage 0 always takes
// q[L-1]). q is the current state. Reset clears the state to zero; a
// zero state is a fixed point, so the LFSR must be loaded before use.
//
// Structure (Fig. 8a of the paper) follows the paper; synchronous load and the
// reset value are this design's choices.
module prog_lfsr #(
  parameter int unsigned L = 64
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         load,
  input  logic [L-1:0] seed,
  input  logic [L-1:0] taps,
  output logic [L-1:0] q
);

  logic [L-1:0] fb;       // per-stage feedback after the tap switchbox
  logic [L-1:0] fb_open;  // unused second switchbox outputs
  logic [L-1:0] nxt;

  for (genvar i = 0; i < L; i++) begin : g_tap
    switchbox #(.W(1)) u_sb (
      .crossed(taps[i]),
      .a    (1'b0),
      .b    (q[L-1]),
      .y0   (fb[i]),
      .y1   (fb_open[i])
    );
  end

  always_comb begin
    nxt[0] = q[L-1];
    for (int unsigned i = 1; i < L; i++) begin
      nxt[i] = q[i-1] ^ fb[i];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    q <= '0;
    else if (load) q <= seed;
    else           q <= nxt;
  end

endmodule
