// tb_plancherel_ced: self-checking testbench for the Plancherel-theorem FFT
// checker at its full size (N = 128, r = 8).
//
// The testbench plays the FFT engine: it draws a random white-noise vector y
// with small, non-zero entries, computes its DFT Y in double precision and
// programs both, rounded to FP16, into the checker. Each frame is a random
// input x and its DFT X, both rounded to FP16 (so the roundoff is that of an
// ideal FP16 FFT), with T = 0.5. The expected verdict is worked out in double precision from
// the same FP16 numbers. Frames cover:
//   * correct FFT outputs (must pass), one and two frames in flight;
//   * two outputs swapped, and all outputs rotated (permutations, invisible
//     to a sum-of-squares check);
//   * one output changed by a small amount and by a large amount;
//   * a NaN on an output;
//   * an output frame with no input frame before it.
// The checker word must equal the LFSR bits on every cycle except the end of
// a failing frame, where it must be their complement.
module tb_plancherel_ced;
  localparam int unsigned N = 128;
  localparam int unsigned R = 8;
  localparam real PI = 3.14159265358979323846;
  localparam logic [15:0] THR = 16'h3800;   // 0.5

  logic clk = 0, rst_n = 0;
  logic tbl_we = 0, tbl_sel = 0;
  logic [6:0]  tbl_addr = '0;
  logic [31:0] tbl_data = '0;
  logic x_valid = 0, X_valid = 0;
  logic [31:0] x_data = '0, X_data = '0;
  logic [R-1:0] lfsr_bits = '0, err;
  logic frame_done;
  int checks = 0, failures = 0;
  int n_pass = 0, n_fail = 0;

  always #5 clk = ~clk;

  plancherel_ced #(.N(N), .R(R)) dut (
    .clk, .rst_n, .tbl_we, .tbl_sel, .tbl_addr, .tbl_data, .thr(THR),
    .x_valid, .x_data, .X_valid, .X_data, .lfsr_bits, .err, .frame_done
  );

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real pow2(int e);
    real v;
    v = 1.0;
    for (int i = 0; i < e; i++) v = v * 2.0;
    for (int i = 0; i > e; i--) v = v / 2.0;
    return v;
  endfunction

  function automatic logic [15:0] r2h(real v);
    logic s;
    real  a;
    int   e, m;
    s = v < 0.0;
    a = s ? -v : v;
    if (a == 0.0) return {s, 15'd0};
    e = 0;
    while (a >= pow2(e + 1)) e++;
    while (a < pow2(e)) e--;
    if (e < -14) begin
      m = $rtoi(a / pow2(-24) + 0.5);
      if (m >= 1024) return {s, 5'd1, 10'd0};
      return {s, 5'd0, 10'(m)};
    end
    m = $rtoi(a / pow2(e) * 1024.0 + 0.5);
    if (m >= 2048) begin m = 1024; e++; end
    return {s, 5'(e + 15), 10'(m - 1024)};
  endfunction

  // uniform in [-1000/div, 1000/div], steps of 1/div
  function automatic real rnd(real div);
    int v;
    v = int'($urandom % 2001) - 1000;
    return real'(v) / div;
  endfunction

  function automatic logic [31:0] c2h(real re, real im);
    logic [15:0] hr, hi;
    hr = r2h(re);
    hi = r2h(im);
    return {hr, hi};
  endfunction

  function automatic real h2r(logic [15:0] f);
    real v;
    if (f[14:10] == 5'd0) v = real'(f[9:0]) * pow2(-24);
    else v = real'(1024 + f[9:0]) * pow2(int'(f[14:10]) - 25);
    return f[15] ? -v : v;
  endfunction

  real yr [N], yi [N];
  logic [31:0] yh [N], Yh [N], xh [N], Xh [N];

  // DFT of (ar, ai), rounded to FP16
  task automatic dft(input real ar [N], input real ai [N], output logic [31:0] out [N]);
    for (int k = 0; k < N; k++) begin
      real sr, si;
      sr = 0.0; si = 0.0;
      for (int n = 0; n < N; n++) begin
        real c, s;
        c = $cos(2.0 * PI * real'(n * k % N) / N);
        s = -$sin(2.0 * PI * real'(n * k % N) / N);
        sr += ar[n] * c - ai[n] * s;
        si += ar[n] * s + ai[n] * c;
      end
      out[k] = c2h(sr, si);
    end
  endtask

  task automatic new_frame();
    real xr [N], xi [N];
    for (int n = 0; n < N; n++) begin
      xh[n] = c2h(rnd(1000.0), rnd(1000.0));
      xr[n] = h2r(xh[n][31:16]);
      xi[n] = h2r(xh[n][15:0]);
    end
    dft(xr, xi, Xh);
  endtask

  // expected verdict: 1 = fail, -1 = too close to the threshold to call
  function automatic int verdict(logic [31:0] xs [N], logic [31:0] Xs [N], bit has_input);
    real lr, li, rr, ri, dr, di, t;
    bit special;
    if (!has_input) return 1;
    lr = 0.0; li = 0.0; rr = 0.0; ri = 0.0; special = 0;
    for (int i = 0; i < N; i++) begin
      if (Xs[i][14:10] == 5'h1f || Xs[i][30:26] == 5'h1f) special = 1;
      lr += h2r(xs[i][31:16]) * h2r(yh[i][31:16]) + h2r(xs[i][15:0]) * h2r(yh[i][15:0]);
      li += h2r(xs[i][15:0]) * h2r(yh[i][31:16]) - h2r(xs[i][31:16]) * h2r(yh[i][15:0]);
      rr += h2r(Xs[i][31:16]) * h2r(Yh[i][31:16]) + h2r(Xs[i][15:0]) * h2r(Yh[i][15:0]);
      ri += h2r(Xs[i][15:0]) * h2r(Yh[i][31:16]) - h2r(Xs[i][31:16]) * h2r(Yh[i][15:0]);
    end
    if (special) return 1;
    dr = rr - N * lr; di = ri - N * li;
    dr = dr < 0 ? -dr : dr;
    di = di < 0 ? -di : di;
    t = h2r(THR);
    if ((dr > t - 1e-3 && dr < t + 1e-3) || (di > t - 1e-3 && di < t + 1e-3)) return -1;
    return (dr > t || di > t) ? 1 : 0;
  endfunction

  // random LFSR word every cycle, and the checker word outside frame ends
  always @(posedge clk) begin
    lfsr_bits <= R'($urandom);
    if (rst_n && !frame_done) begin
      checks++;
      if (err !== lfsr_bits) begin
        failures++;
        $display("err %h differs from lfsr %h outside a frame end", err, lfsr_bits);
      end
    end
  end

  task automatic send_input(input logic [31:0] xs [N]);
    for (int i = 0; i < N; i++) begin
      x_valid <= 1; x_data <= xs[i];
      @(posedge clk);
    end
    x_valid <= 0;
  endtask

  task automatic send_output(input logic [31:0] Xs [N], input int expect_fail_i, input string what);
    bit expect_fail;
    expect_fail = expect_fail_i == 1;
    for (int i = 0; i < N; i++) begin
      X_valid <= 1; X_data <= Xs[i];
      #1;
      if (i == N - 1) begin
        if (!frame_done) begin
          failures++;
          $display("%s: frame_done missing", what);
        end
        if (expect_fail_i >= 0) begin
          checks++;
          if (err !== (expect_fail ? ~lfsr_bits : lfsr_bits)) begin
            failures++;
            $display("%s: err %h lfsr %h, expected %s", what, err, lfsr_bits,
                     expect_fail ? "fail" : "pass");
          end
          if (expect_fail) n_fail++; else n_pass++;
        end
      end
      @(posedge clk);
    end
    X_valid <= 0;
  endtask

  initial begin
    logic [31:0] xs_a [N], Xs_a [N], xs_b [N], Xs_b [N], Xm [N];
    logic [31:0] tmp;
    // transform pair
    for (int n = 0; n < N; n++) begin
      // no zero parts, so that every sample takes part in the check
      do yh[n] = c2h(rnd(4000.0), rnd(4000.0));
      while (yh[n][30:16] == 15'd0 || yh[n][14:0] == 15'd0);
      yr[n] = h2r(yh[n][31:16]);
      yi[n] = h2r(yh[n][15:0]);
    end
    dft(yr, yi, Yh);
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int i = 0; i < 2 * N; i++) begin
      tbl_we <= 1; tbl_sel <= i >= N; tbl_addr <= 7'(i % N);
      tbl_data <= (i < N) ? yh[i % N] : Yh[i % N];
      @(posedge clk);
    end
    tbl_we <= 0;

    // correct frames, one in flight
    repeat (3) begin
      new_frame();
      send_input(xh);
      send_output(Xh, verdict(xh, Xh, 1), "clean");
    end
    // two frames in flight
    new_frame(); xs_a = xh; Xs_a = Xh;
    new_frame(); xs_b = xh; Xs_b = Xh;
    send_input(xs_a);
    send_input(xs_b);
    send_output(Xs_a, verdict(xs_a, Xs_a, 1), "clean, first of two");
    send_output(Xs_b, verdict(xs_b, Xs_b, 1), "clean, second of two");
    // permutation of two outputs
    new_frame();
    Xm = Xh; tmp = Xm[3]; Xm[3] = Xm[77]; Xm[77] = tmp;
    send_input(xh);
    send_output(Xm, verdict(xh, Xm, 1), "two outputs swapped");
    // all outputs rotated by one position
    new_frame();
    for (int i = 0; i < N; i++) Xm[i] = Xh[(i + 1) % N];
    send_input(xh);
    send_output(Xm, verdict(xh, Xm, 1), "outputs rotated");
    // small and large change of one output
    new_frame();
    Xm = Xh; Xm[10][31:16] = r2h(h2r(Xm[10][31:16]) + 0.0625);
    send_input(xh);
    send_output(Xm, verdict(xh, Xm, 1), "small change");
    new_frame();
    Xm = Xh; Xm[50][15:0] = r2h(h2r(Xm[50][15:0]) + 8.0);
    send_input(xh);
    send_output(Xm, verdict(xh, Xm, 1), "large change");
    // NaN
    new_frame();
    Xm = Xh; Xm[0][31:16] = 16'h7e00;
    send_input(xh);
    send_output(Xm, 1, "NaN output");
    // output with no input frame
    new_frame();
    send_output(Xh, 1, "output without input");
    // and the checker recovers for the next correct frame
    new_frame();
    send_input(xh);
    send_output(Xh, verdict(xh, Xh, 1), "clean after attacks");

    checks++;
    if (n_pass < 5 || n_fail < 4) begin
      failures++;
      $display("too few decided frames: %0d passing, %0d failing", n_pass, n_fail);
    end
    $display("frames: %0d passing, %0d failing as expected", n_pass, n_fail);
    repeat (2) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
