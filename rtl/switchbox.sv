// switchbox: two-input switchbox (SB), the unit of TPAD's hidden
// programmability.
//
// An SB sits on two disjoint wires (a -> y0 and b -> y1). In the parallel
// configuration (crossed = 0) it passes them straight through; in the crossed
// configuration (crossed = 1) it swaps them, so a -> y1 and b -> y0. Anyone who
// inspects the netlist sees both possible wirings but not which one the
// configuration memory selects, which hides the function of the checking logic
// the SB is inserted into.
//
// Interface: crossed is a static configuration bit (held in a configuration
// memory, see sb_config); a/b are the two input wire bundles of width W, y0/y1
// the two output bundles. Purely combinational, no timing of its own.
//
// The parallel/crossed behaviour is the paper's. In silicon the configuration
// bit of each SB lives in a pair of RRAM cells above the transistors; here it is
// an ordinary input driven by flip-flops, the alternative the paper mentions for
// standard technology.
module switchbox #(
  parameter int unsigned W = 1
) (
  input  logic         crossed,
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  output logic [W-1:0] y0,
  output logic [W-1:0] y1
);

  always_comb begin
    if (crossed) begin
      y0 = b;
      y1 = a;
    end else begin
      y0 = a;
      y1 = b;
    end
  end

endmodule
