// error_monitor: trusted off-chip monitor that interprets a chip's encoded
// error signal.
//
// The monitor owns its own copy of the programmable LFSR, configured with the
// same polynomial and seed and started in the same clock cycle as the LFSR of
// the chip it watches. From it the monitor predicts, every cycle, the r-bit
// word the chip's error pins must show when no checker has seen an attack. Any
// other word means an attack; the monitor then raises mismatch for that cycle
// and sets the sticky attack flag.
//
// Interface: start loads the seed (the same cycle as the chip's start);
// err_sig is the chip's registered error signal. Checking begins two cycles
// after start, the first cycle in which the chip's error signal reflects the
// loaded seed, and runs until reset. mismatch is combinational, attack is
// registered and sticky. taps/seed as in prog_lfsr.
//
// The principle (separate LFSR with the same polynomial, seed and clock) follows
// the paper (Section II.F). The two-cycle alignment matches the one-cycle
// registered output of error_encoder in this design.
module error_monitor
  import tpad_pkg::*;
#(
  parameter int unsigned L = 64,
  parameter int unsigned R = 8
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [L-1:0] seed,
  input  logic [L-1:0] taps,
  input  logic [R-1:0] err_sig,
  output logic         mismatch,
  output logic         attack
);

  logic [L-1:0] q;
  logic [R-1:0] expected;
  logic [63:0]  q64;
  logic [15:0]  pick;
  logic         armed1, armed2;

  prog_lfsr #(.L(L)) u_lfsr (
    .clk(clk), .rst_n(rst_n), .load(start), .seed(seed), .taps(taps), .q(q)
  );

  assign q64  = 64'(q);
  assign pick = lfsr_pick(q64, R);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      expected <= '0;
      armed1   <= 1'b0;
      armed2   <= 1'b0;
      attack   <= 1'b0;
    end else begin
      expected <= pick[R-1:0];
      armed1   <= armed1 | start;
      armed2   <= armed1 & ~start;
      if (mismatch) attack <= 1'b1;
    end
  end

  assign mismatch = armed2 & (err_sig != expected);

endmodule
