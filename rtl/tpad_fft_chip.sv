// tpad_fft_chip: a half-precision FFT chip protected with TPAD.
//
// The four TPAD modules surround the FFT engine:
//   input decoding   - every input sample (32 bits, FP16 {re, im}) arrives
//                      with R check bits from the sending chip; input_decoder
//                      checks them against the sender's chained parity code;
//   logic CED        - plancherel_ced compares N * sum x y* over each input
//                      frame with sum X Y* over the matching output frame;
//   output encoding  - every output sample leaves with R history-dependent
//                      check bits from output_encoder;
//   error encoding   - the two r-bit checker words (input decoder, Plancherel
//                      checker) are merged by error_encoder with r bits of a
//                      programmable 64-bit LFSR into the R error pins.
//
// Interface: the secret values are given on ports, in the order a
// configuration memory would hold them: h_in and h_out (R x 32 parity
// matrices, row i at [i*32 +: 32]), in_init/out_init (starting check bits),
// seed/taps (LFSR), tbl_* (transform pair y, Y) and thr (threshold T, FP16).
// A one-cycle start pulse loads the LFSR and both starting check values.
// Samples enter on x_valid/x_data/x_check while x_ready is high; results
// leave on X_valid/X_data/X_check one cycle after the engine emits them.
// err_sig is registered and follows the LFSR word unless a checker fired in
// the previous cycle. frame_done marks the cycle in which an output frame has
// been checked.
//
// Follows the paper's TPAD chip structure (input decoding, logic CED, output
// encoding, error encoding) and its FFT example (Plancherel CED, 8 check bits
// on the I/O). Bringing the configuration in on ports instead of through a
// configuration memory is this design's choice; the LZ77 chip shows the
// memory-programmed form.
module tpad_fft_chip
  import tpad_pkg::*;
#(
  parameter int unsigned N  = 128,
  parameter int unsigned R  = 8,
  parameter int unsigned L  = 64,
  localparam int unsigned NW = $clog2(N)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  // configuration
  input  logic [L-1:0]    seed,
  input  logic [L-1:0]    taps,
  input  logic [R*32-1:0] h_in,
  input  logic [R*32-1:0] h_out,
  input  logic [R-1:0]    in_init,
  input  logic [R-1:0]    out_init,
  input  logic            tbl_we,
  input  logic            tbl_sel,
  input  logic [NW-1:0]   tbl_addr,
  input  logic [31:0]     tbl_data,
  input  logic [15:0]     thr,
  // encoded sample streams
  input  logic            x_valid,
  input  logic [31:0]     x_data,
  input  logic [R-1:0]    x_check,
  output logic            x_ready,
  output logic            X_valid,
  output logic [31:0]     X_data,
  output logic [R-1:0]    X_check,
  // error pins
  output logic [R-1:0]    err_sig,
  output logic            frame_done
);
  logic [L-1:0]        q;
  logic [15:0]         pick;
  logic [R-1:0]        lfsr_bits;
  logic [1:0][R-1:0]   chk;
  logic                accept, eng_ready, eng_valid;
  logic [31:0]         eng_data;

  prog_lfsr #(.L(L)) u_lfsr (
    .clk(clk), .rst_n(rst_n), .load(start), .seed(seed), .taps(taps), .q(q)
  );

  assign pick      = lfsr_pick(64'(q), R);
  assign lfsr_bits = pick[R-1:0];

  // no sample is taken in the start cycle
  assign x_ready = eng_ready && !start;
  assign accept  = x_valid && x_ready;

  input_decoder #(.K(32), .R(R)) u_indec (
    .clk(clk), .rst_n(rst_n), .init(start), .init_check(in_init), .h(h_in),
    .valid(accept), .data(x_data), .check(x_check), .lfsr_bits(lfsr_bits),
    .err(chk[0])
  );

  fft_engine #(.N(N)) u_fft (
    .clk(clk), .rst_n(rst_n), .in_valid(accept), .in_data(x_data),
    .in_ready(eng_ready), .out_valid(eng_valid), .out_data(eng_data)
  );

  plancherel_ced #(.N(N), .R(R)) u_ced (
    .clk(clk), .rst_n(rst_n), .tbl_we(tbl_we), .tbl_sel(tbl_sel),
    .tbl_addr(tbl_addr), .tbl_data(tbl_data), .thr(thr),
    .x_valid(accept), .x_data(x_data), .X_valid(eng_valid), .X_data(eng_data),
    .lfsr_bits(lfsr_bits), .err(chk[1]), .frame_done(frame_done)
  );

  output_encoder #(.K(32), .R(R)) u_outenc (
    .clk(clk), .rst_n(rst_n), .init(start), .init_check(out_init), .h(h_out),
    .valid(eng_valid), .data(eng_data), .out_valid(X_valid), .out_data(X_data),
    .out_check(X_check)
  );

  error_encoder #(.R(R), .S(2)) u_errenc (
    .clk(clk), .rst_n(rst_n), .chk(chk), .lfsr_bits(lfsr_bits), .err_sig(err_sig)
  );
endmodule
