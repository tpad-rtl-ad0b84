// tb_tpad_system: end-to-end test of the TPAD LZ77 chip with its error
// monitor, at the default sizes (256-entry dictionary, 8 check bits, 64-bit
// LFSR).
//
// The test plays the neighbouring chips and the trusted party:
//   1. programs the configuration memory with random parity matrices (every
//      row and column non-zero), a random LFSR polynomial and seed and random
//      starting check bits, and gives the monitor the same polynomial and seed;
//   2. sends text as a TPAD sender would (check = parity(char) XOR previous
//      check), receives the codewords as a TPAD receiver would (verifying
//      every codeword's check bits), decompresses them and requires the exact
//      text back;
//   3. checks that the error monitor never reports an attack during the clean
//      run;
//   4. injects attacks and requires the monitor to see each of them: a pin
//      attack (input bit flipped after encoding), a logic attack (a codeword
//      changed inside the checker queue) and a memory attack (a dictionary
//      word changed);
//   5. drives the FFT chip with encoded samples and decodes its encoded
//      outputs: with the simple transform pair y = delta, Y = all ones it
//      sends two frames x = a * delta (output must be X = a everywhere; no
//      alarm allowed), one frame with a pin attack on one sample and one
//      frame whose sample is changed inside the engine after loading; the
//      FFT error monitor must report both. The FFT and the checker's
//      arithmetic are tested in depth by their own testbenches.
// It counts how often each mechanism happened (stall on full queues,
// literal codewords, copy codewords, maximum-length codewords, flush, each
// attack detected, FFT frames checked, FFT pin and logic attacks detected) and counts a failure for any that never happened.
module tb_tpad_system;
  import tpad_pkg::*;
  localparam int unsigned W = 8, R = 8, L = 64, CWW = 24, CW_RAM = 16;
  localparam int unsigned NBITS = R*W + R*CWW + R*CW_RAM + 2*L + 2*R;
  localparam int unsigned NWORDS = (NBITS + 7) / 8;
  localparam int unsigned O_HOUT = R*W, O_HRAM = O_HOUT + R*CWW, O_TAPS = O_HRAM + R*CW_RAM;
  localparam int unsigned O_SEED = O_TAPS + L, O_IINIT = O_SEED + L, O_OINIT = O_IINIT + R;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [6:0]   prg_addr;
  logic [7:0]   prg_in;
  logic         prg_we, start, in_valid, in_ready, flush, cw_valid, busy, mismatch, attack;
  logic [W-1:0] in_data;
  logic [R-1:0] in_check, cw_check, err_sig;
  logic [CWW-1:0] cw_data;
  logic [L-1:0] mon_seed, mon_taps;

  // FFT engine with its checking unit
  localparam int unsigned FN = 128;
  logic [L-1:0]  fft_seed, fft_taps;
  logic          fft_tbl_we, fft_tbl_sel, fft_x_valid, fft_x_ready, fft_X_valid;
  logic [6:0]    fft_tbl_addr;
  logic [31:0]   fft_tbl_data, fft_x_data, fft_X_data;
  logic [R-1:0]  fft_err_sig;
  logic          fft_frame_done, fft_mismatch, fft_attack;
  int            n_fft_frame = 0, n_fft_attack = 0, n_fft_pin = 0, fft_mismatches = 0;
  logic [R*32-1:0] fft_h_in, fft_h_out;
  logic [R-1:0]  fft_in_init, fft_out_init, fft_x_check, fft_X_check;
  logic [R-1:0]  fft_send_prev, fft_recv_prev;
  logic [NWORDS*8-1:0] cfg;

  int checks = 0, failures = 0;
  int n_stall = 0, n_literal = 0, n_copy = 0, n_lmax = 0, n_flush = 0;
  int n_pin = 0, n_logic = 0, n_mem = 0, mismatches = 0;
  logic [R-1:0] send_prev, recv_prev;
  byte sent [$];
  byte decoded [$];

  tpad_system dut (
    .clk(clk), .rst_n(rst_n), .prg_addr(prg_addr), .prg_in(prg_in), .prg_we(prg_we),
    .start(start), .mon_seed(mon_seed), .mon_taps(mon_taps), .in_valid(in_valid),
    .in_data(in_data), .in_check(in_check), .in_ready(in_ready), .flush(flush),
    .cw_valid(cw_valid), .cw_data(cw_data), .cw_check(cw_check), .err_sig(err_sig),
    .busy(busy), .mismatch(mismatch), .attack(attack),
    .fft_seed(fft_seed), .fft_taps(fft_taps), .fft_mon_seed(fft_seed),
    .fft_mon_taps(fft_taps), .fft_tbl_we(fft_tbl_we), .fft_tbl_sel(fft_tbl_sel),
    .fft_tbl_addr(fft_tbl_addr), .fft_tbl_data(fft_tbl_data), .fft_thr(16'h3800),
    .fft_h_in(fft_h_in), .fft_h_out(fft_h_out), .fft_in_init(fft_in_init),
    .fft_out_init(fft_out_init), .fft_x_check(fft_x_check), .fft_X_check(fft_X_check),
    .fft_x_valid(fft_x_valid), .fft_x_data(fft_x_data), .fft_x_ready(fft_x_ready),
    .fft_X_valid(fft_X_valid),
    .fft_X_data(fft_X_data), .fft_err_sig(fft_err_sig), .fft_frame_done(fft_frame_done),
    .fft_mismatch(fft_mismatch), .fft_attack(fft_attack));

  // One FFT frame with the transform pair y = delta (y_0 = 1), Y = all ones:
  // input x = a * delta, whose transform is X_k = a for every k (exact in
  // FP16). With tamper set, the engine's working copy of x_0 is changed just
  // after loading, as a Trojan in the FFT datapath would.
  // With pin set, sample 3 has bit 20 flipped after it was encoded.
  task automatic fft_frame(input logic [15:0] a, input bit tamper, input bit pin = 0);
    while (!fft_x_ready) @(negedge clk);
    for (int i = 0; i < FN; i++) begin
      logic [31:0] smp;
      smp = (i == 0) ? {a, 16'h0000} : 32'h0;
      fft_x_check = parity32(fft_h_in, smp) ^ fft_send_prev;
      fft_send_prev = fft_x_check;
      fft_x_valid = 1; fft_x_data = (pin && i == 3) ? smp ^ 32'h0010_0000 : smp;
      @(negedge clk);
    end
    fft_x_valid = 0;
    if (tamper) dut.u_fft_chip.u_fft.mem[0] = dut.u_fft_chip.u_fft.mem[0] ^ 32'h0400_0000;
    while (!fft_X_valid) @(negedge clk);
    for (int i = 0; i < FN; i++) begin
      checks++;
      if (!tamper && !pin && fft_X_data !== {a, 16'h0000}) begin
        failures++;
        $display("FFT output %0d = %h, expected %h", i, fft_X_data, {a, 16'h0000});
      end
      @(negedge clk);
    end
    repeat (4) @(negedge clk);
  endtask

  function automatic logic [R-1:0] parity_ref(input logic [31:0] x, input int k, input int off);
    logic [R-1:0] p;
    for (int i = 0; i < R; i++) begin
      int ones = 0;
      for (int j = 0; j < k; j++) if (cfg[off + i*k + j] && x[j]) ones++;
      p[i] = 1'(ones % 2);
    end
    return p;
  endfunction

  // random matrix with all rows and columns non-zero (randomized parity code)
  task automatic random_matrix(input int off, input int k);
    bit ok;
    do begin
      for (int i = 0; i < R*k; i++) cfg[off+i] = 1'($urandom % 2);
      ok = 1;
      for (int i = 0; i < R; i++) begin
        bit any = 0;
        for (int j = 0; j < k; j++) any |= cfg[off + i*k + j];
        if (!any) ok = 0;
      end
      for (int j = 0; j < k; j++) begin
        bit any = 0;
        for (int i = 0; i < R; i++) any |= cfg[off + i*k + j];
        if (!any) ok = 0;
      end
    end while (!ok);
  endtask

  function automatic logic [R-1:0] parity32(input logic [R*32-1:0] h, input logic [31:0] x);
    logic [R-1:0] p;
    for (int i = 0; i < R; i++) p[i] = ^(h[i*32 +: 32] & x);
    return p;
  endfunction

  // random R x 32 matrix with all rows and columns non-zero
  task automatic random_h32(output logic [R*32-1:0] h);
    bit ok;
    do begin
      for (int i = 0; i < R*32; i++) h[i] = 1'($urandom % 2);
      ok = 1;
      for (int i = 0; i < R; i++) if (h[i*32 +: 32] == '0) ok = 0;
      for (int j = 0; j < 32; j++) begin
        bit any;
        any = 0;
        for (int i = 0; i < R; i++) any |= h[i*32 + j];
        if (!any) ok = 0;
      end
    end while (!ok);
  endtask

  // Receiver of the FFT chip's output stream: check bits must decode.
  always @(posedge clk) begin
    if (rst_n && !start && fft_X_valid) begin
      checks++;
      if ((fft_X_check ^ fft_recv_prev) !== parity32(fft_h_out, fft_X_data)) begin
        failures++;
        $display("FFT output %h: check bits %h do not decode", fft_X_data, fft_X_check);
      end
      fft_recv_prev = fft_X_check;
    end
  end

  // Receiver of the codeword stream (the next chip): input decoding and
  // decompression.
  always @(posedge clk) begin
    if (rst_n && !start && cw_valid) begin
      logic [7:0] cp, cl, cn;
      logic [R-1:0] expect_p;
      {cp, cl, cn} = cw_data;
      expect_p = cw_check ^ recv_prev;
      checks++;
      if (expect_p !== parity_ref(32'(cw_data), CWW, O_HOUT)) begin
        failures++;
        $display("codeword %h: check bits %h do not decode", cw_data, cw_check);
      end
      recv_prev = cw_check;
      if (cl == 0) n_literal++; else n_copy++;
      if (cl == 255) n_lmax++;
      for (int i = 0; i < int'(cl); i++) begin
        int idx;
        idx = decoded.size() - int'(cp) - 1;
        decoded.push_back(idx >= 0 ? decoded[idx] : 8'h00);
      end
      decoded.push_back(byte'(cn));
    end
  end

  always @(negedge clk) begin
    if (mismatch) mismatches++;
    if (fft_mismatch) fft_mismatches++;
    if (fft_frame_done) n_fft_frame++;
    if (in_valid && !in_ready) n_stall++;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic send(input byte c, input logic [W-1:0] pin_flip = '0);
    logic [R-1:0] chk;
    chk = parity_ref(32'(c), W, 0) ^ send_prev;
    in_valid = 1; in_data = c ^ pin_flip; in_check = chk;
    @(posedge clk);
    while (!in_ready) @(posedge clk);
    send_prev = chk;
    sent.push_back(c);
    #1 in_valid = 0;
  endtask

  task automatic drain();
    @(negedge clk); flush = 1; n_flush++; @(negedge clk); flush = 0;
    while (busy) @(negedge clk);
    repeat (3) @(negedge clk);
  endtask

  initial begin
    string s;
    int m0;
    prg_we = 0; prg_addr = '0; prg_in = '0; start = 0; in_valid = 0; in_data = '0;
    in_check = '0; flush = 0;
    fft_tbl_we = 0; fft_tbl_sel = 0; fft_tbl_addr = '0; fft_tbl_data = '0;
    fft_x_valid = 0; fft_x_data = '0;
    for (int i = 0; i < L; i++) fft_taps[i] = 1'($urandom % 2);
    for (int i = 0; i < L; i++) fft_seed[i] = 1'($urandom % 2);
    fft_seed[0] = 1'b1;
    random_h32(fft_h_in);
    random_h32(fft_h_out);
    fft_in_init = R'($urandom);
    fft_out_init = R'($urandom);
    fft_send_prev = fft_in_init;
    fft_recv_prev = fft_out_init;
    fft_x_check = '0;
    cfg = '0;
    random_matrix(0, W);
    random_matrix(O_HOUT, CWW);
    random_matrix(O_HRAM, CW_RAM);
    for (int i = 0; i < L; i++) cfg[O_TAPS+i] = 1'($urandom % 2);
    for (int i = 0; i < L; i++) cfg[O_SEED+i] = 1'($urandom % 2);
    cfg[O_SEED] = 1'b1;
    for (int i = 0; i < 2*R; i++) cfg[O_IINIT+i] = 1'($urandom % 2);
    mon_taps = cfg[O_TAPS +: L];
    mon_seed = cfg[O_SEED +: L];
    send_prev = cfg[O_IINIT +: R];
    recv_prev = cfg[O_OINIT +: R];
    repeat (2) @(posedge clk);
    rst_n = 1;
    // 1. program the configuration memory
    for (int a = 0; a < NWORDS; a++) begin
      @(negedge clk);
      prg_we = 1; prg_addr = 7'(a); prg_in = cfg[a*8 +: 8];
    end
    @(negedge clk);
    prg_we = 0;
    // FFT transform pair: y = delta, Y = all ones
    for (int i = 0; i < 2 * FN; i++) begin
      fft_tbl_we = 1; fft_tbl_sel = i >= FN; fft_tbl_addr = 7'(i % FN);
      fft_tbl_data = (i < FN) ? ((i == 0) ? 32'h3c00_0000 : 32'h0) : 32'h3c00_0000;
      @(negedge clk);
    end
    fft_tbl_we = 0;
    checks++;
    if (dut.u_chip.cfg[NBITS-1:0] !== cfg[NBITS-1:0]) begin
      failures++;
      $display("configuration not stored");
    end
    start = 1;
    @(negedge clk);
    start = 0;
    // 2. clean traffic
    s = "To be, or not to be, that is the question: Whether 'tis nobler in the mind to suffer the slings and arrows of outrageous fortune, or to take arms against a sea of troubles. ";
    for (int r = 0; r < 3; r++) for (int i = 0; i < s.len(); i++) send(s[i]);
    for (int i = 0; i < 1000; i++) send(byte'("a" + $urandom % 4));
    for (int i = 0; i < 300; i++) send("-");
    drain();
    checks++;
    if (decoded.size() != sent.size()) begin
      failures++;
      $display("received %0d characters, sent %0d", decoded.size(), sent.size());
    end
    for (int i = 0; i < sent.size() && i < decoded.size(); i++) begin
      checks++;
      if (decoded[i] != sent[i]) begin
        failures++;
        if (failures < 10) $display("character %0d: got %h sent %h", i, decoded[i], sent[i]);
      end
    end
    // 3. no false alarm
    checks++;
    if (attack || mismatches != 0) begin
      failures++;
      $display("false alarm during clean run (%0d mismatching cycles)", mismatches);
    end
    // 4a. pin attack: one input character flipped after encoding
    m0 = mismatches;
    send("P", 8'h20);
    drain();
    if (mismatches > m0) n_pin++;
    // 4b. logic attack: change a queued codeword inside the checker
    m0 = mismatches;
    @(negedge clk);
    in_valid = 1; in_data = "X"; in_check = parity_ref(32'("X"), W, 0) ^ send_prev;
    send_prev = in_check;
    @(posedge clk);
    #1 in_valid = 0;
    dut.u_chip.u_ced.u_cwq.mem[dut.u_chip.u_ced.u_cwq.rd_ptr] ^= 24'h000001;
    drain();
    if (mismatches > m0) n_logic++;
    // 4c. memory attack: change the newest dictionary word, then reuse it
    m0 = mismatches;
    dut.u_chip.u_ced.u_dec.u_dict.mem[8'(dut.u_chip.u_ced.u_dec.wptr - 8'd1)].data ^= 8'h11;
    send("X"); send("X"); send("X");
    drain();
    if (mismatches > m0) n_mem++;
    checks++;
    if (!attack) begin failures++; $display("monitor attack flag not set"); end

    // 5. FFT checking: two correct frames, then one with a changed output
    fft_frame(16'h4100, 0);   // a = 2.5
    fft_frame(16'hbc00, 0);   // a = -1
    checks++;
    if (fft_attack || fft_mismatches != 0) begin
      failures++;
      $display("FFT checker: false alarm on correct frames");
    end
    m0 = fft_mismatches;
    fft_frame(16'h4100, 0, 1);   // pin attack on one input sample
    if (fft_mismatches > m0) n_fft_pin++;
    m0 = fft_mismatches;
    fft_frame(16'h4100, 1);      // x_0 changed inside the engine
    if (fft_mismatches > m0) n_fft_attack++;

    $display("mechanisms: fft_frame=%0d fft_pin=%0d fft_attack=%0d", n_fft_frame, n_fft_pin, n_fft_attack);
    checks += 3;
    if (n_fft_frame != 4) begin failures++; $display("expected 4 FFT frames"); end
    if (n_fft_pin == 0) begin failures++; $display("FFT pin attack not detected"); end
    if (n_fft_attack == 0) begin failures++; $display("FFT output change not detected"); end
    $display("mechanisms: stall=%0d literal=%0d copy=%0d maxlen=%0d flush=%0d pin=%0d logic=%0d mem=%0d",
             n_stall, n_literal, n_copy, n_lmax, n_flush, n_pin, n_logic, n_mem);
    checks += 8;
    if (n_stall == 0)   begin failures++; $display("no stall happened"); end
    if (n_literal == 0) begin failures++; $display("no literal codeword"); end
    if (n_copy == 0)    begin failures++; $display("no copy codeword"); end
    if (n_lmax == 0)    begin failures++; $display("no maximum-length codeword"); end
    if (n_flush == 0)   begin failures++; $display("no flush"); end
    if (n_pin == 0)     begin failures++; $display("pin attack not detected"); end
    if (n_logic == 0)   begin failures++; $display("logic attack not detected"); end
    if (n_mem == 0)     begin failures++; $display("memory attack not detected"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
