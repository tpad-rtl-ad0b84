// lz77_ced: TPAD logic CED for the LZ77 compressor by inverse function.
//
// The output characteristic predictor (OCP) is simply a buffer holding a copy
// of every character the compressor accepted. The checker decompresses every
// codeword the compressor emits (lz77_decoder) and compares each decompressed
// character with the oldest buffered input character in an LFSR-encoded
// equality checker. Because LZ77 is lossless, any change to a codeword, to the
// compressor's dictionary or to its match logic that alters the decompressed
// text is detected, and since distances are relative to a moving window an
// old, replayed codeword no longer decodes to the right text.
//
// Interface: in_push/in_char copy each accepted input character into the
// buffer; cw_push/cw_* queue each emitted codeword. ready is low when either
// queue is full; the compressor must then stall. ced_err is the r-bit checker
// word (lfsr_bits when no mismatch); ram_rd_err/ram_wr_err come from the
// memory CED of the decoder's dictionary. dec_valid/dec_char expose the
// decompressed stream; drained is high when both queues are empty and the
// decoder is idle. Checking lags the compressor by the queue occupancy.
//
// Buffer-plus-inverse-function checking follows the paper (Section V.A).
// Queue depths, the stall rule and the comparison of a decompressed character
// arriving with an empty buffer (reported as a mismatch) are this design's
// choices. The buffer must hold at least LMAX + 1 characters, or the
// compressor could stall forever on a long match; BUF_DEPTH defaults to 512.
module lz77_ced
  import tpad_pkg::*;
#(
  parameter int unsigned W         = 8,
  parameter int unsigned CP_W      = 8,
  parameter int unsigned CL_W      = 8,
  parameter int unsigned R         = 8,
  parameter int unsigned BUF_DEPTH = 512,
  parameter int unsigned CW_DEPTH  = 16
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  in_push,
  input  logic [W-1:0]          in_char,
  input  logic                  cw_push,
  input  logic [CP_W-1:0]       cw_cp,
  input  logic [CL_W-1:0]       cw_cl,
  input  logic [W-1:0]          cw_cn,
  output logic                  ready,
  input  logic [R*(CP_W+W)-1:0] h_ram,
  input  logic [R-1:0]          lfsr_bits,
  output logic [R-1:0]          ced_err,
  output logic [R-1:0]          ram_rd_err,
  output logic [R-1:0]          ram_wr_err,
  output logic                  dec_valid,
  output logic [W-1:0]          dec_char,
  output logic                  drained
);

  localparam int unsigned CWW = CP_W + CL_W + W;

  logic           buf_empty, buf_full, cw_empty, cw_full, cw_pop, dec_idle;
  logic [W-1:0]   buf_head;
  logic [CWW-1:0] cw_head;
  logic [R-1:0]   diff;
  logic [$clog2(BUF_DEPTH):0] buf_count;
  logic [$clog2(CW_DEPTH):0]  cw_count;

  sync_fifo #(.W(W), .DEPTH(BUF_DEPTH)) u_inbuf (
    .clk(clk), .rst_n(rst_n), .push(in_push), .din(in_char),
    .pop(dec_valid & ~buf_empty), .dout(buf_head), .empty(buf_empty),
    .full(buf_full), .count(buf_count)
  );

  sync_fifo #(.W(CWW), .DEPTH(CW_DEPTH)) u_cwq (
    .clk(clk), .rst_n(rst_n), .push(cw_push), .din({cw_cp, cw_cl, cw_cn}),
    .pop(cw_pop), .dout(cw_head), .empty(cw_empty), .full(cw_full),
    .count(cw_count)
  );

  lz77_decoder #(.W(W), .CP_W(CP_W), .CL_W(CL_W), .R(R)) u_dec (
    .clk(clk), .rst_n(rst_n), .cw_empty(cw_empty),
    .cw_cp(cw_head[CWW-1 -: CP_W]), .cw_cl(cw_head[W +: CL_W]),
    .cw_cn(cw_head[W-1:0]), .cw_pop(cw_pop),
    .out_valid(dec_valid), .out_char(dec_char), .h_ram(h_ram),
    .lfsr_bits(lfsr_bits), .ram_rd_err(ram_rd_err), .ram_wr_err(ram_wr_err),
    .idle(dec_idle)
  );

  assign ready   = ~buf_full & ~cw_full;
  assign drained = buf_empty & cw_empty & dec_idle;

  // Equality checker: any differing bit, or a character with nothing to
  // compare against, changes the checker word.
  always_comb begin
    diff = R'(fold_or(64'(dec_char ^ buf_head), R));
    if (buf_empty) diff = '1;
  end

  ced_checker #(.R(R)) u_eq_chk (
    .valid(dec_valid), .actual(diff), .predicted('0),
    .lfsr_bits(lfsr_bits), .err(ced_err)
  );

endmodule
