// tb_trusted_ram: self-checking test of the RAM with memory CED.
// A reference array kept here is written and read with random addresses and
// data (and idle cycles). Checks, one cycle after each operation:
//   * reads return the reference data, dout holds between reads;
//   * with no tampering both checker words equal the LFSR bits;
//   * emulated Trojans are reported: a word changed inside the array ("wrong
//     data read"), a word copied to another location ("wrong address"), both
//     through hierarchical writes into the array; detection is required when
//     the parity computed here says the stored check bits no longer fit.
module tb_trusted_ram;
  import tpad_pkg::*;
  localparam int unsigned AW = 8;
  localparam int unsigned DW = 16;
  localparam int unsigned R  = 8;
  localparam int unsigned CW = AW + DW;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  ram_op_e       op;
  logic [AW-1:0] addr;
  logic [DW-1:0] din, dout;
  logic          dout_valid;
  logic [R*CW-1:0] h;
  logic [R-1:0]  lfsr_bits, rd_err, wr_err;
  logic [DW-1:0] ref_mem [1 << AW];
  bit            written [1 << AW];
  int checks = 0, failures = 0, detected = 0;

  trusted_ram #(.AW(AW), .DW(DW), .R(R)) dut (
    .clk(clk), .rst_n(rst_n), .op(op), .addr(addr), .din(din), .h(h),
    .lfsr_bits(lfsr_bits), .dout(dout), .dout_valid(dout_valid),
    .rd_err(rd_err), .wr_err(wr_err));

  function automatic logic [R-1:0] parity_ref(input logic [CW-1:0] x);
    logic [R-1:0] p;
    for (int i = 0; i < R; i++) begin
      int ones = 0;
      for (int j = 0; j < CW; j++) if (h[i*CW+j] && x[j]) ones++;
      p[i] = ones % 2;
    end
    return p;
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // One operation, then check the result one cycle later.
  task automatic do_op(input ram_op_e o, input logic [AW-1:0] a, input logic [DW-1:0] d,
                       input bit expect_alarm);
    logic [DW-1:0] held_dout;
    held_dout = dout;
    op = o; addr = a; din = d;
    @(negedge clk);
    op = RAM_IDLE;
    lfsr_bits = R'($urandom);
    #1;
    checks++;
    if (o == RAM_READ) begin
      if (!expect_alarm && (dout !== ref_mem[a] || !dout_valid)) begin
        failures++;
        $display("read %h: dout=%h expected %h", a, dout, ref_mem[a]);
      end
      if (expect_alarm ? (rd_err === lfsr_bits) : (rd_err !== lfsr_bits)) begin
        failures++;
        $display("read %h: rd_err=%h lfsr=%h alarm expected=%0d", a, rd_err, lfsr_bits, expect_alarm);
      end else if (expect_alarm) detected++;
      checks++;
      if (wr_err !== lfsr_bits) begin failures++; $display("wr_err during read"); end
    end else if (o == RAM_WRITE) begin
      if (wr_err !== lfsr_bits || rd_err !== lfsr_bits) begin
        failures++;
        $display("write %h: wr_err=%h rd_err=%h lfsr=%h", a, wr_err, rd_err, lfsr_bits);
      end
      checks++;
      if (dout !== held_dout) begin failures++; $display("dout changed on a write"); end
    end else begin
      if (dout !== held_dout || rd_err !== lfsr_bits || wr_err !== lfsr_bits) begin
        failures++;
        $display("idle cycle disturbed outputs");
      end
    end
    @(negedge clk);
  endtask

  initial begin
    op = RAM_IDLE; addr = '0; din = '0; lfsr_bits = '0;
    for (int i = 0; i < R*CW; i += 32) h[i +: 32] = $urandom;
    for (int j = 0; j < CW; j++) h[(j % R)*CW + j] = 1'b1;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int n = 0; n < 600; n++) begin
      int k;
      logic [AW-1:0] a;
      logic [DW-1:0] d;
      k = $urandom % 3;
      a = AW'($urandom % 32);
      d = DW'($urandom);
      if (k == 0 || !written[a]) begin
        do_op(RAM_WRITE, a, d, 0);
        ref_mem[a] = d;
        written[a] = 1;
      end else if (k == 1) do_op(RAM_READ, a, '0, 0);
      else do_op(RAM_IDLE, a, d, 0);
    end
    // Trojan: wrong data inside the array
    for (int n = 0; n < 20; n++) begin
      logic [AW-1:0] a;
      logic [DW-1:0] flip;
      a = AW'(n);
      if (!written[a]) begin do_op(RAM_WRITE, a, DW'($urandom), 0); ref_mem[a] = dut.mem[a].data; written[a] = 1; end
      flip = DW'($urandom) | DW'(1);
      dut.mem[a].data = dut.mem[a].data ^ flip;
      do_op(RAM_READ, a, '0, parity_ref({ref_mem[a] ^ flip, a}) != parity_ref({ref_mem[a], a}));
      dut.mem[a].data = ref_mem[a];
    end
    // Trojan: word stored at the wrong address (copied from a to b)
    for (int n = 0; n < 20; n++) begin
      logic [AW-1:0] a, b;
      a = AW'(n);
      b = AW'(n + 100);
      dut.mem[b] = dut.mem[a];
      ref_mem[b] = ref_mem[a];
      written[b] = 1;
      do_op(RAM_READ, b, '0, parity_ref({ref_mem[a], b}) != parity_ref({ref_mem[a], a}));
    end
    checks++;
    if (detected < 30) begin
      failures++;
      $display("only %0d emulated Trojans detected", detected);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
