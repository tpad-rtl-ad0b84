// tb_parity_detection: detection probability of randomized parity codes for
// k = 100 information bits and r = 3 ... 8 check bits (the Monte Carlo
// experiment behind the detection-probability curves of randomized parity).
//
// For every trial a new code is drawn: each column of the r x 100 matrix is a
// uniformly random non-zero r-bit value, and the draw is repeated if some row
// comes out all-zero; this samples uniformly from the codes whose parity-check
// matrix has no zero row or column. A random 100-bit word and a random error
// pattern with e flipped bits are applied to rand_parity instances; the error
// is detected when the check bits of the corrupted word differ from those of
// the original one.
// Checks: single-bit errors are always detected (every column is non-zero);
// for e >= 5 the measured detection rate is within 0.03 of 1 - 2^-r.
// The measured rates are printed as a table.
module tb_parity_detection;
  localparam int unsigned K = 100;
  localparam int unsigned TRIALS = 400;
  localparam int E_LIST [6] = '{1, 2, 5, 10, 50, 100};

  logic [K-1:0]   x;
  logic [8*K-1:0] h [3:8];
  logic [7:0]     p [3:8];
  int checks = 0, failures = 0;

  for (genvar r = 3; r <= 8; r++) begin : g_r
    rand_parity #(.K(K), .R(r)) u_rp (.x(x), .h(h[r][r*K-1:0]), .p(p[r][r-1:0]));
  end

  initial begin
    #100000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic draw_code(input int r);
    bit ok;
    do begin
      h[r] = '0;
      for (int j = 0; j < K; j++) begin
        int unsigned col;
        col = 1 + ($urandom % ((1 << r) - 1));
        for (int i = 0; i < r; i++) h[r][i*K + j] = col[i];
      end
      ok = 1;
      for (int i = 0; i < r; i++) if (h[r][i*K +: K] == '0) ok = 0;
    end while (!ok);
  endtask

  initial begin
    for (int r = 3; r <= 8; r++) h[r] = '0;
    $display("  r   e=1     e=2     e=5     e=10    e=50    e=100   (1-2^-r)");
    for (int r = 3; r <= 8; r++) begin
      real rate [6];
      int  det_big, n_big;
      det_big = 0; n_big = 0;
      for (int ei = 0; ei < 6; ei++) begin
        int det;
        det = 0;
        for (int t = 0; t < TRIALS; t++) begin
          logic [K-1:0] err;
          logic [7:0]   p0;
          int           placed;
          draw_code(r);
          x = {$urandom, $urandom, $urandom, $urandom};
          #1 p0 = p[r];
          err = '0;
          placed = 0;
          while (placed < E_LIST[ei]) begin
            int unsigned pos;
            pos = $urandom % K;
            if (!err[pos]) begin err[pos] = 1'b1; placed++; end
          end
          x = x ^ err;
          #1;
          if (p[r] != p0) det++;
        end
        rate[ei] = real'(det) / TRIALS;
        if (E_LIST[ei] == 1) begin
          checks++;
          if (det != TRIALS) begin
            failures++;
            $display("r=%0d: a single-bit error escaped", r);
          end
        end
        if (E_LIST[ei] >= 5) begin
          det_big += det;
          n_big += TRIALS;
        end
      end
      $display("  %0d   %.3f   %.3f   %.3f   %.3f   %.3f   %.3f   (%.3f)", r,
               rate[0], rate[1], rate[2], rate[3], rate[4], rate[5], 1.0 - 1.0 / (1 << r));
      begin
        real meas, ideal;
        meas  = real'(det_big) / n_big;
        ideal = 1.0 - 1.0 / (1 << r);
        checks++;
        if (meas < ideal - 0.03 || meas > ideal + 0.03) begin
          failures++;
          $display("r=%0d: detection rate %.4f for e>=5, expected about %.4f", r, meas, ideal);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
