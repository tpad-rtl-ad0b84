// plancherel_ced: TPAD concurrent error detection for an N-point FFT engine,
// based on the Plancherel theorem of the discrete Fourier transform.
//
// For any transform pair y <-> Y,  N * sum_n x_n conj(y_n) = sum_k X_k conj(Y_k).
// The output characteristic predictor (OCP) accumulates the left side over
// each input frame x; the checker accumulates the right side over the
// matching output frame X and reports an attack when the two differ by more
// than a threshold T in the real or the imaginary part. The pair (y, Y) is
// secret and programmed at start-up, so an attacker cannot build an output
// change that keeps both sides equal, and, unlike a sum-of-squares (Parseval)
// check, a permutation of the outputs is detected.
//
// Arithmetic: samples and table entries are IEEE half-precision (FP16)
// numbers packed as {re, im}. Every FP16 value is an integer multiple of
// 2^-24, so every product of two of them is an exact multiple of 2^-48; the
// products are formed from the 11-bit significands and shifted into a wide
// two's-complement fixed-point accumulator (ACC_W bits, LSB 2^-48). The
// checker itself therefore adds no roundoff, and only the FFT's own roundoff
// has to fit under T. Infinity and NaN in a frame count as an attack.
//
// Interface: tbl_we/tbl_sel/tbl_addr/tbl_data write y (tbl_sel = 0) or Y
// (tbl_sel = 1) entry tbl_addr; Y must be stored in the order in which the FFT
// emits its outputs. thr is T as an FP16 number. x_valid/x_data deliver input
// samples and X_valid/X_data output samples, each frame N samples in order.
// The OCP's frame result waits in a small queue (PEND_DEPTH frames), so the
// FFT may be several frames deep. On the cycle that completes an output frame
// err carries the r-bit checker word: lfsr_bits when the frame passes, its
// complement when it fails; in every other cycle err = lfsr_bits. An output
// frame that arrives with no input frame pending also fails.
//
// Follows the paper: OCP = N * sum x y*, checker = sum X Y*, compared with a
// threshold T for roundoff, y/Y programmed at start-up. This design's own
// choices: exact fixed-point accumulation, the per-component |.| > T test,
// the frame queue and the table write port.
module plancherel_ced
  import tpad_pkg::*;
#(
  parameter int unsigned N          = 128,
  parameter int unsigned R          = 8,
  parameter int unsigned PEND_DEPTH = 4,
  localparam int unsigned NW        = $clog2(N),
  localparam int unsigned ACC_W     = 84 + NW + 2
) (
  input  logic            clk,
  input  logic            rst_n,
  // programming of the transform pair and the threshold
  input  logic            tbl_we,
  input  logic            tbl_sel,
  input  logic [NW-1:0]   tbl_addr,
  input  logic [31:0]     tbl_data,
  input  logic [15:0]     thr,
  // FFT input and output streams
  input  logic            x_valid,
  input  logic [31:0]     x_data,
  input  logic            X_valid,
  input  logic [31:0]     X_data,
  // encoded checker word
  input  logic [R-1:0]    lfsr_bits,
  output logic [R-1:0]    err,
  output logic            frame_done
);
  typedef logic signed [ACC_W-1:0] acc_t;
  typedef struct packed { acc_t re; acc_t im; } cacc_t;

  // FP16 helpers -----------------------------------------------------------
  // magnitude of an FP16 number as an integer multiple of 2^-24 (41 bits)
  function automatic logic [40:0] fp16_mag(input logic [14:0] f);
    logic [10:0] m;
    int unsigned e;
    m = {(f[14:10] != 5'd0), f[9:0]};
    e = (f[14:10] == 5'd0) ? 1 : int'(f[14:10]);
    return 41'(m) << (e - 1);
  endfunction

  function automatic logic fp16_special(input logic [4:0] f_exp);
    return f_exp == 5'h1f;
  endfunction

  // exact product a*b of two FP16 numbers, LSB 2^-48
  function automatic acc_t fp16_prod(input logic [15:0] a, input logic [15:0] b);
    logic [21:0] mp;
    int unsigned ea, eb;
    acc_t        mag;
    mp  = 22'({(a[14:10] != 5'd0), a[9:0]}) * 22'({(b[14:10] != 5'd0), b[9:0]});
    ea  = (a[14:10] == 5'd0) ? 1 : int'(a[14:10]);
    eb  = (b[14:10] == 5'd0) ? 1 : int'(b[14:10]);
    mag = acc_t'(mp) << (ea + eb - 2);
    return (a[15] ^ b[15]) ? -mag : mag;
  endfunction

  // (ar + j ai) * conj(br + j bi)
  function automatic cacc_t cmul_conj(input logic [31:0] a, input logic [31:0] b);
    cacc_t p;
    p.re = fp16_prod(a[31:16], b[31:16]) + fp16_prod(a[15:0], b[15:0]);
    p.im = fp16_prod(a[15:0], b[31:16]) - fp16_prod(a[31:16], b[15:0]);
    return p;
  endfunction

  // Transform pair tables ---------------------------------------------------
  logic [31:0] y_tbl  [N];
  logic [31:0] Yc_tbl [N];

  always_ff @(posedge clk) begin
    if (tbl_we && !tbl_sel) y_tbl[tbl_addr]  <= tbl_data;
    if (tbl_we &&  tbl_sel) Yc_tbl[tbl_addr] <= tbl_data;
  end

  // OCP: N * sum x conj(y) ----------------------------------------------------
  logic [NW-1:0] n_idx, k_idx;
  cacc_t         acc_x, acc_X, term_x, term_X, sum_x, sum_X;
  logic          bad_x, bad_X;
  logic          push, pop;
  logic          q_full, q_empty;
  logic [2*ACC_W:0] q_out;

  assign term_x = cmul_conj(x_data, y_tbl[n_idx]);
  assign term_X = cmul_conj(X_data, Yc_tbl[k_idx]);
  assign sum_x.re = acc_x.re + term_x.re;
  assign sum_x.im = acc_x.im + term_x.im;
  assign sum_X.re = acc_X.re + term_X.re;
  assign sum_X.im = acc_X.im + term_X.im;

  assign push = x_valid && (n_idx == NW'(N - 1));
  assign pop  = X_valid && (k_idx == NW'(N - 1)) && !q_empty;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      n_idx <= '0;
      acc_x <= '0;
      bad_x <= 1'b0;
    end else if (x_valid) begin
      n_idx <= n_idx + 1'b1;
      if (push) begin
        acc_x <= '0;
        bad_x <= 1'b0;
      end else begin
        acc_x <= sum_x;
        bad_x <= bad_x | fp16_special(x_data[30:26]) | fp16_special(x_data[14:10]);
      end
    end
  end

  // The queue holds {special value seen, N * sum}; N is a power of two.
  sync_fifo #(.W(2 * ACC_W + 1), .DEPTH(PEND_DEPTH)) u_pend (
    .clk, .rst_n,
    .push (push && !q_full),
    .din  ({bad_x | fp16_special(x_data[30:26]) | fp16_special(x_data[14:10]),
            sum_x.re <<< NW, sum_x.im <<< NW}),
    .full (q_full),
    .pop,
    .dout (q_out),
    .empty(q_empty),
    .count()
  );

  // Checker: sum X conj(Y), compared with the OCP -----------------------------
  logic  frame_end, bad_frame, overflow;
  acc_t  d_re, d_im, a_re, a_im, t_fix;

  assign frame_end = X_valid && (k_idx == NW'(N - 1));
  assign d_re  = sum_X.re - acc_t'(q_out[2*ACC_W-1 -: ACC_W]);
  assign d_im  = sum_X.im - acc_t'(q_out[ACC_W-1:0]);
  assign a_re  = d_re[ACC_W-1] ? -d_re : d_re;
  assign a_im  = d_im[ACC_W-1] ? -d_im : d_im;
  assign t_fix = acc_t'(fp16_mag(thr[14:0])) << 24;

  always_comb begin
    bad_frame = q_empty || q_out[2*ACC_W] || bad_X
             || fp16_special(X_data[30:26]) || fp16_special(X_data[14:10])
             || (a_re > t_fix) || (a_im > t_fix);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      k_idx    <= '0;
      acc_X    <= '0;
      bad_X    <= 1'b0;
      overflow <= 1'b0;
    end else begin
      if (push && q_full) overflow <= 1'b1;
      if (X_valid) begin
        k_idx <= k_idx + 1'b1;
        if (frame_end) begin
          acc_X <= '0;
          bad_X <= 1'b0;
        end else begin
          acc_X <= sum_X;
          bad_X <= bad_X | fp16_special(X_data[30:26]) | fp16_special(X_data[14:10]);
        end
      end
    end
  end

  // A lost OCP result (queue overflow) makes the next frames fail as well.
  ced_checker #(.R(R)) u_chk (
    .valid    (frame_end),
    .actual   ({R{bad_frame | overflow}}),
    .predicted('0),
    .lfsr_bits(lfsr_bits),
    .err      (err)
  );

  assign frame_done = frame_end;

  frame_queue_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    !(push && q_full))
    else $warning("plancherel_ced: more than PEND_DEPTH input frames ahead of the output");
endmodule
