// tb_input_decoder: self-checking test of TPAD input decoding.
// (1) The worked example with 4 check bits: input FA with check bits 1 after
//     previous check bits B; the matrix makes parity(FA) = A, so no attack may
//     be reported; the same step with one data bit flipped must be reported.
// (2) An 8-bit, 8-check-bit stream encoded here the way a sending chip does
//     (check = parity(word) XOR previous check); clean words must give
//     err == lfsr_bits, words with flipped pins (data or check) must give
//     err != lfsr_bits whenever the parity of the flip is non-zero, which the
//     test computes independently.
module tb_input_decoder;
  localparam int unsigned K = 8;
  localparam int unsigned R = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic           init, valid, init4, valid4;
  logic [R-1:0]   init_check, check, lfsr_bits, err;
  logic [R*K-1:0] h;
  logic [K-1:0]   data, data4;
  logic [3:0]     check4, lfsr4, err4;
  logic [31:0]    h4;
  int checks = 0, failures = 0, attacks_seen = 0;

  input_decoder #(.K(K), .R(R)) dut (
    .clk(clk), .rst_n(rst_n), .init(init), .init_check(init_check), .h(h),
    .valid(valid), .data(data), .check(check), .lfsr_bits(lfsr_bits), .err(err));

  input_decoder #(.K(8), .R(4)) dut4 (
    .clk(clk), .rst_n(rst_n), .init(init4), .init_check(4'hB), .h(h4),
    .valid(valid4), .data(data4), .check(check4), .lfsr_bits(lfsr4), .err(err4));

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
    logic [R-1:0] prev;
    init = 0; valid = 0; init4 = 0; valid4 = 0; data = '0; data4 = '0;
    check = '0; check4 = '0; lfsr_bits = '0; lfsr4 = 4'h5;
    // matrix for the example: check bit i = data bit i (so parity(FA) = A)
    h4 = '0;
    for (int i = 0; i < 4; i++) h4[i*8+i] = 1'b1;
    for (int i = 0; i < R*K; i += 32) h[i +: 32] = $urandom;
    for (int j = 0; j < K; j++) h[(j % R)*K + j] = 1'b1;   // every column used
    init_check = R'($urandom);
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    init = 1; init4 = 1;
    @(negedge clk);
    init = 0; init4 = 0;
    // worked example, clean
    valid4 = 1; data4 = 8'hFA; check4 = 4'h1;
    #1;
    checks++;
    if (err4 !== lfsr4) begin
      failures++;
      $display("example: false alarm err=%h lfsr=%h", err4, lfsr4);
    end
    @(negedge clk);
    // previous is now 1; send FA again with check 1 ^ A = B, but flip a pin
    data4 = 8'hFB; check4 = 4'hB;
    #1;
    checks++;
    if (err4 === lfsr4) begin
      failures++;
      $display("example: pin attack not seen");
    end
    @(negedge clk);
    valid4 = 0;
    // random stream
    prev = init_check;
    for (int n = 0; n < 400; n++) begin
      logic [K-1:0] d, dflip;
      logic [R-1:0] c, cflip;
      bit attack;
      d = K'($urandom);
      c = parity_ref(d, h) ^ prev;
      attack = (n % 4 == 3);
      dflip = attack ? K'($urandom) : '0;
      cflip = (attack && n % 8 == 7) ? R'($urandom) : '0;
      valid = 1;
      data = d ^ dflip;
      check = c ^ cflip;
      lfsr_bits = R'($urandom);
      #1;
      checks++;
      if ((parity_ref(dflip, h) ^ cflip) == '0) begin
        if (err !== lfsr_bits) begin
          failures++;
          $display("n=%0d false alarm", n);
        end
      end else begin
        if (err === lfsr_bits) begin
          failures++;
          $display("n=%0d pin attack not seen", n);
        end else attacks_seen++;
      end
      prev = check;   // the receiver keeps what it received
      @(negedge clk);
    end
    valid = 0;
    checks++;
    if (attacks_seen == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
