// tb_lz77_encoder: self-checking test of the LZ77 compressor.
// Streams several texts through the compressor (one character per cycle,
// with random stalls from the codeword side), decompresses the codewords here
// with a reference decoder and requires the exact input back. Also checks:
//   * the worked string "abcabcabcx" gives literals a, b, c and then the
//     codeword (Cp = 2, Cl = 6, Cn = 'x');
//   * a run of 600 equal characters produces codewords with the maximum
//     length LMAX;
//   * a codeword appears in the same cycle as the character that ends it;
//   * flush emits the pending string.
module tb_lz77_encoder;
  localparam int unsigned W = 8;
  localparam int unsigned D = 256;
  localparam int unsigned LMAX = 255;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic         in_valid, in_ready, flush, cw_ready, cw_valid, pending;
  logic [W-1:0] in_data, cw_cn;
  logic [7:0]   cw_cp, cw_cl;
  int checks = 0, failures = 0, n_lmax = 0, n_copy = 0;

  byte sent [$];
  byte decoded [$];
  int  cws_cp [$], cws_cl [$], cws_cn [$];

  lz77_encoder #(.W(W), .D(D), .LMAX(LMAX)) dut (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_data(in_data),
    .in_ready(in_ready), .flush(flush), .cw_ready(cw_ready),
    .cw_valid(cw_valid), .cw_cp(cw_cp), .cw_cl(cw_cl), .cw_cn(cw_cn),
    .pending(pending));

  // Collect codewords and decode them with a reference decompressor.
  always @(posedge clk) begin
    if (rst_n && cw_valid) begin
      cws_cp.push_back(int'(cw_cp));
      cws_cl.push_back(int'(cw_cl));
      cws_cn.push_back(int'(cw_cn));
      if (cw_cl == LMAX) n_lmax++;
      if (cw_cl != 0) n_copy++;
      for (int i = 0; i < int'(cw_cl); i++) begin
        int idx;
        idx = decoded.size() - int'(cw_cp) - 1;
        if (idx < 0) begin
          failures++;
          $display("codeword points before the start of the text");
          decoded.push_back(8'h00);
        end else decoded.push_back(decoded[idx]);
      end
      decoded.push_back(byte'(cw_cn));
    end
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic send(input byte c);
    in_valid = 1; in_data = c;
    cw_ready = ($urandom % 8 != 0);
    @(posedge clk);
    while (!in_ready) begin
      #1 cw_ready = 1;
      @(posedge clk);
    end
    sent.push_back(c);
    #1 in_valid = 0;
    cw_ready = 1;
  endtask

  task automatic do_flush();
    @(negedge clk);
    flush = 1;
    @(negedge clk);
    flush = 0;
  endtask

  initial begin
    string s;
    in_valid = 0; in_data = '0; flush = 0; cw_ready = 1;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    // worked string
    s = "abcabcabcx";
    for (int i = 0; i < s.len(); i++) send(s[i]);
    @(negedge clk);
    checks++;
    if (cws_cp.size() != 4 || cws_cl[3] != 6 || cws_cp[3] != 2 || cws_cn[3] != "x" ||
        cws_cl[0] != 0 || cws_cn[0] != "a") begin
      failures++;
      $display("abcabcabcx: %0d codewords, last (%0d,%0d,%0d)", cws_cp.size(),
               cws_cp[cws_cp.size()-1], cws_cl[cws_cl.size()-1], cws_cn[cws_cn.size()-1]);
    end
    // same-cycle emission: 'q' is new, so the codeword comes with it
    @(negedge clk);
    in_valid = 1; in_data = "q"; cw_ready = 1;
    #1;
    checks++;
    if (!cw_valid || cw_cl != 0 || cw_cn != "q") begin
      failures++;
      $display("no codeword in the cycle of a new character");
    end
    @(posedge clk);
    sent.push_back("q");
    #1 in_valid = 0;
    // text with repetitions
    s = "to be or not to be, that is the question: whether tis nobler in the mind to suffer ";
    for (int r = 0; r < 4; r++)
      for (int i = 0; i < s.len(); i++) send(s[i]);
    // random text over a small alphabet
    for (int i = 0; i < 2000; i++) send(byte'("a" + $urandom % 4));
    // long run
    for (int i = 0; i < 600; i++) send("z");
    do_flush();
    checks++;
    if (pending) begin failures++; $display("flush left a pending string"); end
    for (int i = 0; i < 50; i++) send(byte'($urandom));
    send("k"); send("k"); send("k");
    do_flush();
    repeat (3) @(negedge clk);
    checks++;
    if (decoded.size() != sent.size()) begin
      failures++;
      $display("decoded %0d characters, sent %0d", decoded.size(), sent.size());
    end
    for (int i = 0; i < sent.size() && i < decoded.size(); i++) begin
      checks++;
      if (decoded[i] != sent[i]) begin
        failures++;
        if (failures < 10) $display("char %0d: decoded %h sent %h", i, decoded[i], sent[i]);
      end
    end
    checks++;
    if (n_lmax == 0 || n_copy < 50) begin
      failures++;
      $display("max-length codewords %0d, copy codewords %0d", n_lmax, n_copy);
    end
    $display("codewords %0d for %0d characters", cws_cp.size(), sent.size());
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
