// tb_error_encoder: self-checking test of the error-signal combiner. Each
// cycle the S checker words are either all equal to the LFSR bits (the
// registered error signal must then equal those bits one cycle later) or one
// or more checkers deviate (the signal must then differ from the LFSR bits in
// every bit position where some checker deviates).
module tb_error_encoder;
  localparam int unsigned R = 8;
  localparam int unsigned S = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [S-1:0][R-1:0] chk;
  logic [R-1:0]        lfsr_bits, err_sig, exp_lfsr, exp_dev;
  int checks = 0, failures = 0;

  error_encoder #(.R(R), .S(S)) dut (.clk(clk), .rst_n(rst_n), .chk(chk), .lfsr_bits(lfsr_bits), .err_sig(err_sig));

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    chk = '0; lfsr_bits = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 400; n++) begin
      @(negedge clk);
      lfsr_bits = R'($urandom);
      exp_dev = '0;
      for (int s = 0; s < S; s++) begin
        logic [R-1:0] d;
        d = (n % 2 == 0) ? '0 : (($urandom % 3 == 0) ? R'($urandom) : '0);
        chk[s] = lfsr_bits ^ d;
        exp_dev |= d;
      end
      exp_lfsr = lfsr_bits;
      @(posedge clk);
      #1;
      checks++;
      if ((err_sig ^ exp_lfsr) !== exp_dev) begin
        failures++;
        $display("n=%0d err_sig=%h lfsr=%h deviating bits=%h", n, err_sig, exp_lfsr, exp_dev);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
