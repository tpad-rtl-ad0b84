// tb_rand_parity: self-checking test of the programmable randomized parity
// encoder. For random matrices and inputs the check bits are compared with
// p[i] = parity of the inputs selected by row i, computed here by counting
// ones. Also checks the single-bit-error property: with every column
// non-zero, flipping any one input bit changes the check bits.
module tb_rand_parity;
  localparam int unsigned K = 24;
  localparam int unsigned R = 8;
  logic [K-1:0]   x;
  logic [R*K-1:0] h;
  logic [R-1:0]   p, p_ref, p_saved;
  int checks = 0, failures = 0;

  rand_parity #(.K(K), .R(R)) dut (.x(x), .h(h), .p(p));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 500; n++) begin
      for (int i = 0; i < R*K; i += 32) h[i +: 32] = $urandom;
      x = K'($urandom);
      #1;
      for (int i = 0; i < R; i++) begin
        int ones;
        ones = 0;
        for (int j = 0; j < K; j++) if (h[i*K+j] && x[j]) ones++;
        p_ref[i] = ones % 2;
      end
      checks++;
      if (p !== p_ref) begin
        failures++;
        $display("parity mismatch n=%0d p=%h ref=%h", n, p, p_ref);
      end
    end
    // Identity-like matrix: every column non-zero, so single flips are seen.
    h = '0;
    for (int j = 0; j < K; j++) h[(j % R)*K + j] = 1'b1;
    x = K'($urandom);
    #1;
    p_saved = p;
    for (int j = 0; j < K; j++) begin
      x[j] = ~x[j];
      #1;
      checks++;
      if (p === p_saved) begin
        failures++;
        $display("single-bit flip %0d not seen", j);
      end
      x[j] = ~x[j];
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
