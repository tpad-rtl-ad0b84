// sb_config: configuration memory for all programmable (switchbox) elements of
// a TPAD chip.
//
// Holds NWORDS words of PW bits and presents them as one flat vector cfg, from
// which the chip takes its parity matrices, LFSR polynomial and seed and the
// starting check bits. It is written through the simple SRAM-like programming
// port of an RRAM switchbox array: an address (addr), program data (prg_in) and
// a write enable (we). A write takes effect at the next clock edge. The port is
// only used while configuring the chip.
//
// The programming interface (addr, prg_in, we) follows the paper's RRAM
// switchbox (Fig. 12). The paper stores the configuration in non-volatile RRAM
// cells; this design uses flip-flops, the standard-technology alternative the
// paper names, so the configuration is lost at power-off and is deliberately
// not cleared by reset. Word width and depth are this design's choices.
module sb_config #(
  parameter int unsigned PW     = 8,
  parameter int unsigned NWORDS = 66,
  localparam int unsigned AW    = (NWORDS > 1) ? $clog2(NWORDS) : 1
) (
  input  logic               clk,
  input  logic [AW-1:0]      addr,
  input  logic [PW-1:0]      prg_in,
  input  logic               we,
  output logic [NWORDS*PW-1:0] cfg
);

  logic [PW-1:0] words [NWORDS];

  always_ff @(posedge clk) begin
    if (we && (32'(addr) < NWORDS)) words[addr] <= prg_in;
  end

  always_comb begin
    for (int unsigned i = 0; i < NWORDS; i++) cfg[i*PW +: PW] = words[i];
  end

endmodule
