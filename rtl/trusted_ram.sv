// trusted_ram: single-port RAM with TPAD memory CED (concurrent error
// detection of Trojans in the array, decoder and read/write logic).
//
// On a write the randomized parity of {address, data} is computed and stored
// with the data, so the check bits bind each word to the location it was
// written to. The RAM works in write-through mode: during a write the word
// being written is sensed and appears on the internal RAM_Out bus. Output
// latches pass RAM_Out to dout only after a read and hold it otherwise.
// Two checkers run one cycle after each operation:
//   read checker  (after a read):  the check bits on RAM_Out must equal the
//                 parity of {read address, RAM_Out data}, and dout must equal
//                 RAM_Out;
//   write checker (after a write): RAM_Out must equal RAM_In (the word and
//                 check bits presented for writing) and its check bits must
//                 match {write address, data}.
// A wrong word, wrong address, a read done as a write or a write not done
// therefore shows up on rd_err or wr_err, which are r-bit LFSR-encoded words
// (equal to lfsr_bits when nothing is wrong).
//
// Interface: op selects idle, read or write for addr/din in this cycle; the
// read word appears on dout in the next cycle (dout_valid high) and stays
// until the next read. h configures the R x (AW+DW) parity matrix over
// {addr, data} (address bits in the low positions). rd_err/wr_err refer to the
// operation of the previous cycle. The array has no reset.
//
// Follows the paper's memory CED (Section II.D, Fig. 7a, Table I) for reads
// and writes. The idle rows of Table I are not checked: the paper does not say
// what RAM_Out shows in an idle cycle. Folding the word comparisons into the
// r-bit checker (tpad_pkg::fold_or) is this design's choice.
module trusted_ram
  import tpad_pkg::*;
#(
  parameter int unsigned AW = 8,
  parameter int unsigned DW = 16,
  parameter int unsigned R  = 8,
  localparam int unsigned DEPTH = 1 << AW,
  localparam int unsigned CW    = AW + DW
) (
  input  logic           clk,
  input  logic           rst_n,
  input  ram_op_e        op,
  input  logic [AW-1:0]  addr,
  input  logic [DW-1:0]  din,
  input  logic [R*CW-1:0] h,
  input  logic [R-1:0]   lfsr_bits,
  output logic [DW-1:0]  dout,
  output logic           dout_valid,
  output logic [R-1:0]   rd_err,
  output logic [R-1:0]   wr_err
);

  typedef struct packed {
    logic [DW-1:0] data;
    logic [R-1:0]  check;
  } ram_word_t;

  ram_word_t     mem [DEPTH];
  ram_word_t     ram_in, ram_in_q, ram_out;
  ram_op_e       op_q;
  logic [AW-1:0] addr_q;
  logic [DW-1:0] data_hold;
  logic [R-1:0]  wr_parity, out_parity;
  logic [R-1:0]  rd_diff, wr_diff;

  // Encoder: parity of {address, data} for the word being written.
  rand_parity #(.K(CW), .R(R)) u_rp_wr (.x({din, addr}), .h(h), .p(wr_parity));
  assign ram_in = '{data: din, check: wr_parity};

  // Array with write-through sensing.
  always_ff @(posedge clk) begin
    if (op == RAM_WRITE) mem[addr] <= ram_in;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ram_out  <= '0;
      ram_in_q <= '0;
      op_q     <= RAM_IDLE;
      addr_q   <= '0;
    end else begin
      op_q     <= op;
      addr_q   <= addr;
      ram_in_q <= ram_in;
      if (op == RAM_WRITE)     ram_out <= ram_in;
      else if (op == RAM_READ) ram_out <= mem[addr];
    end
  end

  // Output latches: dout follows RAM_Out only after a read.
  assign dout_valid = (op_q == RAM_READ);
  assign dout       = dout_valid ? ram_out.data : data_hold;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) data_hold <= '0;
    else        data_hold <= dout;
  end

  // Checkers: expected check bits of what is on RAM_Out, for the address used.
  rand_parity #(.K(CW), .R(R)) u_rp_chk (.x({ram_out.data, addr_q}), .h(h), .p(out_parity));

  always_comb begin
    logic [63:0] d64;
    d64     = 64'(dout ^ ram_out.data);
    rd_diff = (out_parity ^ ram_out.check) | R'(fold_or(d64, R));
    d64     = 64'(ram_out ^ ram_in_q);
    wr_diff = (out_parity ^ ram_out.check) | R'(fold_or(d64, R));
  end

  ced_checker #(.R(R)) u_rd_chk (
    .valid(op_q == RAM_READ), .actual(rd_diff), .predicted('0),
    .lfsr_bits(lfsr_bits), .err(rd_err)
  );

  ced_checker #(.R(R)) u_wr_chk (
    .valid(op_q == RAM_WRITE), .actual(wr_diff), .predicted('0),
    .lfsr_bits(lfsr_bits), .err(wr_err)
  );

endmodule
