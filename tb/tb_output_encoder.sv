// tb_output_encoder: self-checking test of TPAD output encoding.
// (1) A 6-bit instance with an identity matrix reproduces the worked example:
//     codeword parity 110101 XOR previous check bits 010101 = 100000.
// (2) A 24-bit, 8-check-bit instance with a random matrix sends random words
//     (with gaps); every out_check must equal parity(word) XOR the previous
//     out_check, parity computed here by counting ones, with a latency of one
//     cycle.
module tb_output_encoder;
  localparam int unsigned K = 24;
  localparam int unsigned R = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic           init, valid;
  logic [R-1:0]   init_check, out_check, prev_ref;
  logic [R*K-1:0] h;
  logic [K-1:0]   data, out_data;
  logic           out_valid;
  logic           init6, valid6, out_valid6;
  logic [5:0]     data6, out_data6, out_check6;
  logic [35:0]    h6;
  int checks = 0, failures = 0;

  output_encoder #(.K(K), .R(R)) dut (
    .clk(clk), .rst_n(rst_n), .init(init), .init_check(init_check), .h(h),
    .valid(valid), .data(data), .out_valid(out_valid), .out_data(out_data),
    .out_check(out_check));

  output_encoder #(.K(6), .R(6)) dut6 (
    .clk(clk), .rst_n(rst_n), .init(init6), .init_check(6'b010101), .h(h6),
    .valid(valid6), .data(data6), .out_valid(out_valid6), .out_data(out_data6),
    .out_check(out_check6));

  function automatic logic [R-1:0] parity_ref(input logic [K-1:0] x, input logic [R*K-1:0] m);
    logic [R-1:0] p;
    for (int i = 0; i < R; i++) begin
      int ones = 0;
      for (int j = 0; j < K; j++) if (m[i*K+j] && x[j]) ones++;
      p[i] = ones % 2;
    end
    return p;
  endfunction

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    init = 0; valid = 0; data = '0; init6 = 0; valid6 = 0; data6 = '0;
    h6 = '0;
    for (int i = 0; i < 6; i++) h6[i*6+i] = 1'b1;
    for (int i = 0; i < R*K; i += 32) h[i +: 32] = $urandom;
    init_check = R'($urandom);
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    init = 1; init6 = 1;
    @(negedge clk);
    init = 0; init6 = 0;
    // worked example
    valid6 = 1; data6 = 6'b110101;
    @(negedge clk);
    valid6 = 0;
    checks++;
    if (!out_valid6 || out_check6 !== 6'b100000 || out_data6 !== 6'b110101) begin
      failures++;
      $display("example: out_check=%b (expected 100000)", out_check6);
    end
    // random stream
    prev_ref = init_check;
    for (int n = 0; n < 300; n++) begin
      logic [R-1:0] exp_check;
      logic [K-1:0] d;
      d = K'($urandom);
      valid = ($urandom % 4 != 0);
      data = d;
      exp_check = parity_ref(d, h) ^ prev_ref;
      @(negedge clk);
      checks++;
      if (valid) begin
        if (!out_valid || out_data !== d || out_check !== exp_check) begin
          failures++;
          $display("n=%0d out_check=%h expected=%h", n, out_check, exp_check);
        end
        prev_ref = exp_check;
      end else if (out_valid || out_check !== prev_ref) begin
        failures++;
        $display("n=%0d output changed without a valid word", n);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
