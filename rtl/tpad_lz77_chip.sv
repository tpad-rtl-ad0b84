// tpad_lz77_chip: an LZ77 compressor chip protected with TPAD.
//
// The four TPAD modules surround the compressor:
//   input decoding   - the 8-bit input characters arrive with R check bits
//                      encoded by the sending chip; input_decoder checks them;
//   logic CED        - lz77_ced keeps a copy of the input and decompresses
//                      every codeword to compare it (inverse-function CED);
//                      the decompressor's dictionary RAM carries memory CED;
//   output encoding  - every codeword (Cp, Cl, Cn) leaves the chip with R
//                      history-dependent check bits from output_encoder;
//   error encoding   - the four r-bit checker words (input decoder, equality
//                      checker, RAM read checker, RAM write checker) are merged
//                      by error_encoder with r bits of a programmable 64-bit
//                      LFSR into the R error pins.
// All parity matrices, the LFSR polynomial and seed and the starting check
// bits of both directions come from one configuration memory (sb_config),
// written through the addr/prg_in/we programming port before start.
//
// Configuration map (bit offsets into the flat configuration vector):
//   H_IN  R*W bits     input decoder matrix
//   H_OUT R*CWW bits   output encoder matrix
//   H_RAM R*(CP_W+W)   dictionary RAM matrix ({address, data}, address low)
//   TAPS  L bits       LFSR feedback taps
//   SEED  L bits       LFSR seed
//   IN_INIT  R bits    sender's starting check bits
//   OUT_INIT R bits    starting output check bits
// in that order from bit 0; word i of the programming port holds bits
// [i*PW +: PW].
//
// Operation: program the configuration, pulse start for one cycle (loads the
// LFSR seed and both starting check bits), then stream characters with
// in_valid/in_ready. Codewords appear one cycle after the character that ends
// them on cw_valid/cw_data/cw_check, with cw_data = {Cp, Cl, Cn}. err_sig is
// registered and must follow the LFSR as predicted by an error monitor; an
// attack shows up one cycle after the checker sees it. flush ends the current
// string; busy stays high until all checking has caught up.
//
// The block structure follows the paper's TPAD architecture and its LZ77
// test chip (24 codeword bits, r = 8). The compressor's sizes (256-entry
// dictionary, 8-bit characters and match length up to 255) are this design's
// reading of the paper's ranges and of its 24 output bits.
module tpad_lz77_chip
  import tpad_pkg::*;
#(
  parameter int unsigned W         = 8,
  parameter int unsigned D         = 256,
  parameter int unsigned LMAX      = 255,
  parameter int unsigned R         = 8,
  parameter int unsigned L         = 64,
  parameter int unsigned PW        = 8,
  parameter int unsigned BUF_DEPTH = 512,
  parameter int unsigned CW_DEPTH  = 16,
  localparam int unsigned CP_W     = $clog2(D),
  localparam int unsigned CL_W     = $clog2(LMAX + 1),
  localparam int unsigned CWW      = CP_W + CL_W + W,
  localparam int unsigned OFF_HIN   = 0,
  localparam int unsigned OFF_HOUT  = OFF_HIN + R * W,
  localparam int unsigned OFF_HRAM  = OFF_HOUT + R * CWW,
  localparam int unsigned OFF_TAPS  = OFF_HRAM + R * (CP_W + W),
  localparam int unsigned OFF_SEED  = OFF_TAPS + L,
  localparam int unsigned OFF_IINIT = OFF_SEED + L,
  localparam int unsigned OFF_OINIT = OFF_IINIT + R,
  localparam int unsigned CFG_BITS  = OFF_OINIT + R,
  localparam int unsigned NWORDS    = (CFG_BITS + PW - 1) / PW,
  localparam int unsigned PAW       = (NWORDS > 1) ? $clog2(NWORDS) : 1
) (
  input  logic            clk,
  input  logic            rst_n,
  // configuration programming port
  input  logic [PAW-1:0]  prg_addr,
  input  logic [PW-1:0]   prg_in,
  input  logic            prg_we,
  input  logic            start,
  // encoded input stream
  input  logic            in_valid,
  input  logic [W-1:0]    in_data,
  input  logic [R-1:0]    in_check,
  output logic            in_ready,
  input  logic            flush,
  // encoded codeword stream
  output logic            cw_valid,
  output logic [CWW-1:0]  cw_data,
  output logic [R-1:0]    cw_check,
  // encoded error signal
  output logic [R-1:0]    err_sig,
  output logic            busy
);

  logic [NWORDS*PW-1:0] cfg;
  logic [L-1:0]         lfsr_q;
  logic [R-1:0]         lfsr_bits;
  logic [15:0]          pick;

  logic                 enc_ready, accept, enc_cw_valid, enc_pending, ced_ready, drained;
  logic [CP_W-1:0]      enc_cp;
  logic [CL_W-1:0]      enc_cl;
  logic [W-1:0]         enc_cn;
  logic [3:0][R-1:0]    chk;
  logic                 dec_valid;
  logic [W-1:0]         dec_char;

  sb_config #(.PW(PW), .NWORDS(NWORDS)) u_cfg (
    .clk(clk), .addr(prg_addr), .prg_in(prg_in), .we(prg_we), .cfg(cfg)
  );

  prog_lfsr #(.L(L)) u_lfsr (
    .clk(clk), .rst_n(rst_n), .load(start), .seed(cfg[OFF_SEED +: L]),
    .taps(cfg[OFF_TAPS +: L]), .q(lfsr_q)
  );

  assign pick      = lfsr_pick(64'(lfsr_q), R);
  assign lfsr_bits = pick[R-1:0];

  // Input decoding of the accepted characters.
  assign accept = in_valid & in_ready;

  input_decoder #(.K(W), .R(R)) u_indec (
    .clk(clk), .rst_n(rst_n), .init(start), .init_check(cfg[OFF_IINIT +: R]),
    .h(cfg[OFF_HIN +: R*W]), .valid(accept), .data(in_data), .check(in_check),
    .lfsr_bits(lfsr_bits), .err(chk[0])
  );

  // The protected function.
  lz77_encoder #(.W(W), .D(D), .LMAX(LMAX)) u_lz (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid & ~start), .in_data(in_data),
    .in_ready(enc_ready), .flush(flush & ~start), .cw_ready(ced_ready),
    .cw_valid(enc_cw_valid), .cw_cp(enc_cp), .cw_cl(enc_cl), .cw_cn(enc_cn),
    .pending(enc_pending)
  );

  assign in_ready = enc_ready & ~start;

  // Logic CED by the inverse function, with memory CED on its dictionary.
  lz77_ced #(.W(W), .CP_W(CP_W), .CL_W(CL_W), .R(R),
             .BUF_DEPTH(BUF_DEPTH), .CW_DEPTH(CW_DEPTH)) u_ced (
    .clk(clk), .rst_n(rst_n), .in_push(accept), .in_char(in_data),
    .cw_push(enc_cw_valid), .cw_cp(enc_cp), .cw_cl(enc_cl), .cw_cn(enc_cn),
    .ready(ced_ready), .h_ram(cfg[OFF_HRAM +: R*(CP_W+W)]),
    .lfsr_bits(lfsr_bits), .ced_err(chk[1]), .ram_rd_err(chk[2]),
    .ram_wr_err(chk[3]), .dec_valid(dec_valid), .dec_char(dec_char),
    .drained(drained)
  );

  // Output encoding of the codewords.
  output_encoder #(.K(CWW), .R(R)) u_outenc (
    .clk(clk), .rst_n(rst_n), .init(start), .init_check(cfg[OFF_OINIT +: R]),
    .h(cfg[OFF_HOUT +: R*CWW]), .valid(enc_cw_valid),
    .data({enc_cp, enc_cl, enc_cn}), .out_valid(cw_valid), .out_data(cw_data),
    .out_check(cw_check)
  );

  // Error signal encoding.
  error_encoder #(.R(R), .S(4)) u_errenc (
    .clk(clk), .rst_n(rst_n), .chk(chk), .lfsr_bits(lfsr_bits), .err_sig(err_sig)
  );

  assign busy = enc_pending | ~drained;

endmodule
