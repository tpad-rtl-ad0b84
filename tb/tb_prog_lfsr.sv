// tb_prog_lfsr: self-checking test of the programmable LFSR.
// (1) 64-bit LFSR with random taps and seed: every step is compared with a
//     polynomial-arithmetic model (multiply the state by x modulo the
//     feedback polynomial).
// (2) 4-bit LFSR programmed for x^4 + x + 1 (primitive): the sequence must
//     return to the seed after exactly 15 steps and visit 15 distinct states.
module tb_prog_lfsr;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        load64, load4;
  logic [63:0] seed64, taps64, q64, ref64;
  logic [3:0]  seed4, taps4, q4;
  int checks = 0, failures = 0;

  prog_lfsr #(.L(64)) dut64 (.clk(clk), .rst_n(rst_n), .load(load64), .seed(seed64), .taps(taps64), .q(q64));
  prog_lfsr #(.L(4))  dut4  (.clk(clk), .rst_n(rst_n), .load(load4),  .seed(seed4),  .taps(taps4),  .q(q4));

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit seen [16];
    load64 = 0; load4 = 0;
    seed64 = {$urandom, $urandom} | 64'h1;
    taps64 = {$urandom, $urandom};
    seed4  = 4'b0001;
    taps4  = 4'b0010;              // XOR in front of stage 1: x^4 + x + 1
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    load64 = 1; load4 = 1;
    @(negedge clk);
    load64 = 0; load4 = 0;
    checks++;
    if (q64 !== seed64 || q4 !== seed4) begin
      failures++;
      $display("seed not loaded");
    end
    ref64 = seed64;
    for (int n = 0; n < 15; n++) begin
      logic [63:0] poly;
      poly = {taps64[63:1], 1'b1};
      seen[q4] = 1'b1;
      ref64 = ref64[63] ? ({ref64[62:0], 1'b0} ^ poly) : {ref64[62:0], 1'b0};
      @(negedge clk);
      checks++;
      if (q64 !== ref64) begin
        failures++;
        $display("64-bit step %0d: q=%h ref=%h", n, q64, ref64);
      end
      if (n < 14) begin
        checks++;
        if (q4 === seed4 || seen[q4]) begin
          failures++;
          $display("4-bit LFSR repeated early at step %0d (q=%h)", n, q4);
        end
      end
    end
    checks++;
    if (q4 !== seed4) begin
      failures++;
      $display("4-bit LFSR period is not 15 (q=%h)", q4);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
