// rand_parity: programmable randomized parity encoder, the OCP and checker
// building block of TPAD.
//
// Computes R check bits of a systematic linear code over K information bits:
// p[i] = XOR over j of (H[i][j] AND x[j]), i.e. the A part of a parity-check
// matrix [A | I_R]. The matrix is not fixed in the netlist. Every potential
// connection from x[j] into the XOR tree of p[i] goes through a two-input
// switchbox whose other input is tied to 0: with the SB crossed the data bit
// reaches the XOR tree, with it parallel the constant 0 does. Each connection
// therefore has probability 1/2 of being used, as in the randomized parity
// construction, and the matrix actually used is known only to whoever programs
// the configuration memory.
//
// Interface: x[K-1:0] information bits; h[R*K-1:0] configuration, h[i*K+j] = 1
// connects x[j] to check bit i; p[R-1:0] check bits. Purely combinational.
//
// The code itself (random matrix with every row and every column non-zero,
// chosen off-chip) follows the paper. Building every matrix entry from one SB
// with a grounded input is this design's way of realising the programmability;
// the paper instead inserts SBs into a synthesised netlist with its
// Algorithm 1, a netlist-level transformation that RTL cannot express. The
// unused second output of each switchbox is left open on purpose.
module rand_parity #(
  parameter int unsigned K = 8,
  parameter int unsigned R = 8
) (
  input  logic [K-1:0]   x,
  input  logic [R*K-1:0] h,
  output logic [R-1:0]   p
);

  logic [R*K-1:0] routed;
  logic [R*K-1:0] unused_out;

  for (genvar i = 0; i < R; i++) begin : g_row
    for (genvar j = 0; j < K; j++) begin : g_col
      switchbox #(.W(1)) u_sb (
        .crossed(h[i*K+j]),
        .a    (1'b0),
        .b    (x[j]),
        .y0   (routed[i*K+j]),
        .y1   (unused_out[i*K+j])
      );
    end
    assign p[i] = ^routed[i*K +: K];
  end

endmodule
