// tb_fft_engine: self-checking testbench for the FP16 FFT engine at N = 128.
//
// Random frames (uniform real and imaginary parts in [-1, 1], rounded to
// FP16), an impulse and a constant are transformed; every output is compared
// with a double-precision DFT of the same FP16 inputs. An output passes when
// its error is at most 1% of the frame's largest output magnitude (FP16
// roundoff over 7 stages stays far below that; any wrong twiddle, index or
// sign is far above). Impulse and constant frames must be exact (to 1e-9,
// the accuracy of the double-precision reference). The latency
// from the last input sample to the first output must be (N/2)*log2(N)
// cycles plus one.
module tb_fft_engine;
  localparam int unsigned N = 128;
  localparam real PI = 3.14159265358979323846;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, out_valid;
  logic [31:0] in_data = '0, out_data;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  fft_engine #(.N(N)) dut (.clk, .rst_n, .in_valid, .in_data, .in_ready, .out_valid, .out_data);

  initial begin
    #200000;
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
    if (a < pow2(-14)) return {s, 15'd0};
    e = 0;
    while (a >= pow2(e + 1)) e++;
    while (a < pow2(e)) e--;
    m = $rtoi(a / pow2(e) * 1024.0 + 0.5);
    if (m >= 2048) begin m = 1024; e++; end
    return {s, 5'(e + 15), 10'(m - 1024)};
  endfunction

  function automatic real h2r(logic [15:0] f);
    real v;
    if (f[14:10] == 5'd0) return 0.0;
    v = real'(1024 + f[9:0]) * pow2(int'(f[14:10]) - 25);
    return f[15] ? -v : v;
  endfunction

  function automatic real rnd();
    int v;
    v = int'($urandom % 2001) - 1000;
    return real'(v) / 1000.0;
  endfunction

  logic [31:0] xin [N];
  real Xr [N], Xi [N];

  task automatic run_frame(input string what, input bit exact);
    real maxmag, maxerr;
    int  lat;
    for (int k = 0; k < N; k++) begin
      Xr[k] = 0.0; Xi[k] = 0.0;
      for (int n = 0; n < N; n++) begin
        real c, s, xr, xi;
        c  = $cos(2.0 * PI * real'(n * k % N) / N);
        s  = -$sin(2.0 * PI * real'(n * k % N) / N);
        xr = h2r(xin[n][31:16]);
        xi = h2r(xin[n][15:0]);
        Xr[k] += xr * c - xi * s;
        Xi[k] += xr * s + xi * c;
      end
    end
    while (!in_ready) @(negedge clk);
    for (int n = 0; n < N; n++) begin
      in_valid = 1; in_data = xin[n];
      @(negedge clk);
    end
    in_valid = 0;
    lat = 0;
    while (!out_valid) begin @(negedge clk); lat++; end
    checks++;
    if (lat != (N / 2) * $clog2(N)) begin
      failures++;
      $display("%s: latency %0d, expected %0d", what, lat, (N / 2) * $clog2(N));
    end
    maxmag = 0.0;
    for (int k = 0; k < N; k++) begin
      real m;
      m = Xr[k] * Xr[k] + Xi[k] * Xi[k];
      if (m > maxmag) maxmag = m;
    end
    maxmag = $sqrt(maxmag);
    maxerr = 0.0;
    for (int k = 0; k < N; k++) begin
      real er, ei, e;
      checks++;
      if (!out_valid) begin
        failures++;
        $display("%s: output %0d missing", what, k);
      end
      er = h2r(out_data[31:16]) - Xr[k];
      ei = h2r(out_data[15:0]) - Xi[k];
      e  = $sqrt(er * er + ei * ei);
      if (e > maxerr) maxerr = e;
      if (exact ? (e > 1e-9) : (e > 0.01 * maxmag)) begin
        failures++;
        if (failures < 10) $display("%s: X[%0d] = %h, expected %f %f", what, k, out_data, Xr[k], Xi[k]);
      end
      @(negedge clk);
    end
    $display("%s: largest |X| %f, largest error %f", what, maxmag, maxerr);
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int f = 0; f < 3; f++) begin
      for (int n = 0; n < N; n++) xin[n] = {r2h(rnd()), 16'h0} | 32'(r2h(rnd()));
      run_frame("random", 0);
    end
    for (int n = 0; n < N; n++) xin[n] = (n == 0) ? 32'h4100_0000 : 32'h0;
    run_frame("impulse", 1);
    for (int n = 0; n < N; n++) xin[n] = 32'h3c00_bc00;
    run_frame("constant", 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
