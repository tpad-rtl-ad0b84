// tb_lz77_ced: self-checking test of the inverse-function logic CED of the
// LZ77 compressor (input buffer + decompressor with a memory-protected
// dictionary + equality checker).
// A compressor feeds it input characters and codewords. Checks:
//   * clean run: the decompressed stream equals the input, character for
//     character, and all three checker words equal the LFSR bits every cycle;
//   * the compressor is stalled while the queues are full (ready low) and
//     everything drains afterwards;
//   * emulated Trojans are detected: a codeword's next-character field
//     changed on its way to the checker (logic attack) gives ced_err != LFSR,
//     and a word changed inside the dictionary RAM gives ram_rd_err != LFSR.
module tb_lz77_ced;
  localparam int unsigned W = 8;
  localparam int unsigned R = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic         in_valid, in_ready, flush, enc_cw_valid, pending, ready;
  logic [W-1:0] in_data, enc_cn, cn_to_ced;
  logic [7:0]   enc_cp, enc_cl;
  logic [R*16-1:0] h_ram;
  logic [R-1:0] lfsr_bits, ced_err, ram_rd_err, ram_wr_err;
  logic         dec_valid, drained;
  logic [W-1:0] dec_char;
  bit           tamper_cw = 0, expect_clean = 1;
  int checks = 0, failures = 0, stalls = 0, ced_alarms = 0, ram_alarms = 0;
  byte sent [$];
  int  ndec = 0;

  lz77_encoder #(.W(W), .D(256), .LMAX(255)) u_enc (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_data(in_data),
    .in_ready(in_ready), .flush(flush), .cw_ready(ready),
    .cw_valid(enc_cw_valid), .cw_cp(enc_cp), .cw_cl(enc_cl), .cw_cn(enc_cn),
    .pending(pending));

  assign cn_to_ced = enc_cn ^ (tamper_cw ? 8'h04 : 8'h00);

  lz77_ced #(.W(W), .CP_W(8), .CL_W(8), .R(R), .BUF_DEPTH(512), .CW_DEPTH(16)) dut (
    .clk(clk), .rst_n(rst_n), .in_push(in_valid & in_ready), .in_char(in_data),
    .cw_push(enc_cw_valid), .cw_cp(enc_cp), .cw_cl(enc_cl), .cw_cn(cn_to_ced),
    .ready(ready), .h_ram(h_ram), .lfsr_bits(lfsr_bits), .ced_err(ced_err),
    .ram_rd_err(ram_rd_err), .ram_wr_err(ram_wr_err), .dec_valid(dec_valid),
    .dec_char(dec_char), .drained(drained));

  // Every cycle: compare the checkers with the LFSR bits; follow the
  // decompressed stream against what was sent.
  always @(negedge clk) begin
    if (rst_n) begin
      if (expect_clean) begin
        checks++;
        if (ced_err !== lfsr_bits || ram_rd_err !== lfsr_bits || ram_wr_err !== lfsr_bits) begin
          failures++;
          if (failures < 10) $display("false alarm: ced=%h rd=%h wr=%h lfsr=%h", ced_err, ram_rd_err, ram_wr_err, lfsr_bits);
        end
      end else begin
        if (ced_err !== lfsr_bits) ced_alarms++;
        if (ram_rd_err !== lfsr_bits) ram_alarms++;
      end
      if (dec_valid) begin
        if (expect_clean) begin
          checks++;
          if (ndec >= sent.size() || dec_char !== sent[ndec]) begin
            failures++;
            if (failures < 10) $display("decompressed char %0d = %h, sent %h", ndec, dec_char, sent[ndec]);
          end
        end
        ndec++;
      end
      if (in_valid && !in_ready) stalls++;
    end
  end

  always @(posedge clk) lfsr_bits <= R'($urandom);

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic send(input byte c);
    in_valid = 1; in_data = c;
    @(posedge clk);
    while (!in_ready) @(posedge clk);
    sent.push_back(c);
    #1 in_valid = 0;
  endtask

  task automatic drain();
    @(negedge clk); flush = 1; @(negedge clk); flush = 0;
    while (!drained || pending) @(negedge clk);
  endtask

  initial begin
    string s;
    in_valid = 0; in_data = '0; flush = 0;
    for (int i = 0; i < R*16; i += 32) h_ram[i +: 32] = $urandom;
    for (int j = 0; j < 16; j++) h_ram[(j % R)*16 + j] = 1'b1;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    s = "the quick brown fox jumps over the lazy dog; the quick brown fox jumps again. ";
    for (int r = 0; r < 6; r++) for (int i = 0; i < s.len(); i++) send(s[i]);
    for (int i = 0; i < 1500; i++) send(byte'("a" + $urandom % 3));
    for (int i = 0; i < 400; i++) send("y");
    drain();
    checks++;
    if (ndec != sent.size()) begin
      failures++;
      $display("decompressed %0d of %0d characters", ndec, sent.size());
    end
    checks++;
    if (stalls == 0) begin failures++; $display("compressor never stalled"); end
    // Logic attack: corrupt the next-character field of one codeword.
    expect_clean = 0;
    send("Q");                        // new character: literal codeword now
    @(negedge clk);
    in_valid = 1; in_data = "R"; tamper_cw = 1;
    @(posedge clk);
    #1 in_valid = 0; tamper_cw = 0;
    sent.push_back("R");
    drain();
    checks++;
    if (ced_alarms == 0) begin failures++; $display("corrupted codeword not detected"); end
    // Memory attack: corrupt a dictionary word, then make the decoder read it.
    dut.u_dec.u_dict.mem[8'(dut.u_dec.wptr - 8'd1)].data ^= 8'h81;
    send("R"); send("R"); send("R");
    drain();
    checks++;
    if (ram_alarms == 0) begin failures++; $display("corrupted dictionary word not detected"); end
    $display("stalls=%0d ced_alarms=%0d ram_alarms=%0d", stalls, ced_alarms, ram_alarms);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
