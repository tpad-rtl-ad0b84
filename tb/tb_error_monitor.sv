// tb_error_monitor: self-checking test of the trusted error monitor. A model
// of the chip side (an LFSR stepped here by polynomial arithmetic, with the
// chosen bits taken through a one-cycle register) drives err_sig. The monitor
// must stay quiet for 300 clean cycles, flag the exact cycle of a single
// corrupted word, and keep the attack flag set afterwards.
module tb_error_monitor;
  import tpad_pkg::*;
  localparam int unsigned L = 64;
  localparam int unsigned R = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic         start, mismatch, attack;
  logic [L-1:0] seed, taps, model;
  logic [R-1:0] err_sig;
  int checks = 0, failures = 0;
  bit corrupt = 0;

  error_monitor #(.L(L), .R(R)) dut (
    .clk(clk), .rst_n(rst_n), .start(start), .seed(seed), .taps(taps),
    .err_sig(err_sig), .mismatch(mismatch), .attack(attack));

  // chip-side model: LFSR state and registered error word
  always_ff @(posedge clk) begin
    logic [L-1:0] poly;
    logic [15:0]  pk;
    poly = {taps[L-1:1], 1'b1};
    if (start) model <= seed;
    else       model <= model[L-1] ? ({model[L-2:0], 1'b0} ^ poly) : {model[L-2:0], 1'b0};
    pk      = lfsr_pick(model, R);
    err_sig <= pk[R-1:0] ^ (corrupt ? 8'h10 : 8'h00);
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    start = 0;
    seed = {$urandom, $urandom} | 64'h1;
    taps = {$urandom, $urandom};
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    for (int n = 0; n < 300; n++) begin
      @(negedge clk);
      checks++;
      if (mismatch || attack) begin
        failures++;
        $display("false alarm at cycle %0d", n);
      end
    end
    corrupt = 1;
    @(negedge clk);
    corrupt = 0;
    checks++;
    if (!mismatch) begin
      failures++;
      $display("corrupted error word not flagged");
    end
    repeat (3) @(negedge clk);
    checks++;
    if (mismatch || !attack) begin
      failures++;
      $display("after attack: mismatch=%0d attack=%0d (expected 0, 1)", mismatch, attack);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
