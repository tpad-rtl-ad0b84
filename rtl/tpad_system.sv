// tpad_system: a trusted system in the TPAD sense: a TPAD-protected chip (here
// the LZ77 compressor chip) and the trusted error monitor that watches its
// encoded error pins.
//
// The monitor runs its own LFSR with the polynomial and seed given on
// mon_taps/mon_seed, which the trusted party sets to the values it programmed
// into the chip, and is started by the same start pulse. attack goes high (and
// stays high) from the first cycle in which the chip's error pins differ from
// the predicted LFSR word; mismatch marks each such cycle. The chip's input
// and output streams are brought out unchanged: in a system they connect to
// the neighbouring chips, which encode and decode them the same way.
//
// The system also carries a second TPAD-protected chip, a half-precision FFT
// (tpad_fft_chip: FFT engine, Plancherel CED, I/O encoding, LFSR error
// encoding), with its own error monitor. Its secret values come in on the
// fft_* configuration ports (fft_mon_seed/fft_mon_taps for its monitor), and
// start starts both chips and both monitors. Samples enter encoded on
// fft_x_* and results leave encoded on fft_X_*. fft_attack is sticky like
// attack.
//
// Structure follows the paper's system view (chips with encoded data and an
// error monitor per chip, Fig. 4). Everything else is described in
// tpad_lz77_chip, plancherel_ced and error_monitor.
module tpad_system
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
  parameter int unsigned FFT_N     = 128,
  localparam int unsigned CP_W     = $clog2(D),
  localparam int unsigned CL_W     = $clog2(LMAX + 1),
  localparam int unsigned CWW      = CP_W + CL_W + W,
  localparam int unsigned CFG_BITS = R * W + R * CWW + R * (CP_W + W) + 2 * L + 2 * R,
  localparam int unsigned NWORDS   = (CFG_BITS + PW - 1) / PW,
  localparam int unsigned PAW      = (NWORDS > 1) ? $clog2(NWORDS) : 1,
  localparam int unsigned FNW      = $clog2(FFT_N)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic [PAW-1:0]  prg_addr,
  input  logic [PW-1:0]   prg_in,
  input  logic            prg_we,
  input  logic            start,
  input  logic [L-1:0]    mon_seed,
  input  logic [L-1:0]    mon_taps,
  input  logic            in_valid,
  input  logic [W-1:0]    in_data,
  input  logic [R-1:0]    in_check,
  output logic            in_ready,
  input  logic            flush,
  output logic            cw_valid,
  output logic [CWW-1:0]  cw_data,
  output logic [R-1:0]    cw_check,
  output logic [R-1:0]    err_sig,
  output logic            busy,
  output logic            mismatch,
  output logic            attack,
  // FFT checking
  input  logic [L-1:0]    fft_seed,
  input  logic [L-1:0]    fft_taps,
  input  logic [L-1:0]    fft_mon_seed,
  input  logic [L-1:0]    fft_mon_taps,
  input  logic [R*32-1:0] fft_h_in,
  input  logic [R*32-1:0] fft_h_out,
  input  logic [R-1:0]    fft_in_init,
  input  logic [R-1:0]    fft_out_init,
  input  logic            fft_tbl_we,
  input  logic            fft_tbl_sel,
  input  logic [FNW-1:0]  fft_tbl_addr,
  input  logic [31:0]     fft_tbl_data,
  input  logic [15:0]     fft_thr,
  input  logic            fft_x_valid,
  input  logic [31:0]     fft_x_data,
  input  logic [R-1:0]    fft_x_check,
  output logic            fft_x_ready,
  output logic            fft_X_valid,
  output logic [31:0]     fft_X_data,
  output logic [R-1:0]    fft_X_check,
  output logic [R-1:0]    fft_err_sig,
  output logic            fft_frame_done,
  output logic            fft_mismatch,
  output logic            fft_attack
);

  tpad_lz77_chip #(
    .W(W), .D(D), .LMAX(LMAX), .R(R), .L(L), .PW(PW),
    .BUF_DEPTH(BUF_DEPTH), .CW_DEPTH(CW_DEPTH)
  ) u_chip (
    .clk(clk), .rst_n(rst_n), .prg_addr(prg_addr), .prg_in(prg_in),
    .prg_we(prg_we), .start(start), .in_valid(in_valid), .in_data(in_data),
    .in_check(in_check), .in_ready(in_ready), .flush(flush),
    .cw_valid(cw_valid), .cw_data(cw_data), .cw_check(cw_check),
    .err_sig(err_sig), .busy(busy)
  );

  error_monitor #(.L(L), .R(R)) u_mon (
    .clk(clk), .rst_n(rst_n), .start(start), .seed(mon_seed), .taps(mon_taps),
    .err_sig(err_sig), .mismatch(mismatch), .attack(attack)
  );

  // The protected FFT chip and its monitor
  tpad_fft_chip #(.N(FFT_N), .R(R), .L(L)) u_fft_chip (
    .clk(clk), .rst_n(rst_n), .start(start), .seed(fft_seed), .taps(fft_taps),
    .h_in(fft_h_in), .h_out(fft_h_out), .in_init(fft_in_init), .out_init(fft_out_init),
    .tbl_we(fft_tbl_we), .tbl_sel(fft_tbl_sel), .tbl_addr(fft_tbl_addr),
    .tbl_data(fft_tbl_data), .thr(fft_thr), .x_valid(fft_x_valid),
    .x_data(fft_x_data), .x_check(fft_x_check), .x_ready(fft_x_ready),
    .X_valid(fft_X_valid), .X_data(fft_X_data), .X_check(fft_X_check),
    .err_sig(fft_err_sig), .frame_done(fft_frame_done)
  );

  error_monitor #(.L(L), .R(R)) u_fft_mon (
    .clk(clk), .rst_n(rst_n), .start(start), .seed(fft_mon_seed), .taps(fft_mon_taps),
    .err_sig(fft_err_sig), .mismatch(fft_mismatch), .attack(fft_attack)
  );

endmodule
