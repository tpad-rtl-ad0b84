// tb_sb_config: self-checking test of the switchbox configuration memory.
// Writes random words at every address through the programming port, then
// rewrites a few, and checks the flat configuration vector word by word;
// writes with we low must not change anything.
module tb_sb_config;
  localparam int unsigned PW = 8;
  localparam int unsigned NWORDS = 66;
  logic clk = 0;
  always #5 clk = ~clk;

  logic [6:0]           addr;
  logic [PW-1:0]        prg_in;
  logic                 we;
  logic [NWORDS*PW-1:0] cfg;
  logic [PW-1:0]        shadow [NWORDS];
  int checks = 0, failures = 0;

  sb_config #(.PW(PW), .NWORDS(NWORDS)) dut (.clk(clk), .addr(addr), .prg_in(prg_in), .we(we), .cfg(cfg));

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_all();
    for (int i = 0; i < NWORDS; i++) begin
      checks++;
      if (cfg[i*PW +: PW] !== shadow[i]) begin
        failures++;
        $display("word %0d: %h expected %h", i, cfg[i*PW +: PW], shadow[i]);
      end
    end
  endtask

  initial begin
    we = 0; addr = '0; prg_in = '0;
    @(negedge clk);
    for (int i = 0; i < NWORDS; i++) begin
      addr = 7'(i); prg_in = PW'($urandom); we = 1;
      shadow[i] = prg_in;
      @(negedge clk);
    end
    we = 0;
    check_all();
    for (int n = 0; n < 40; n++) begin
      addr = 7'($urandom % NWORDS); prg_in = PW'($urandom); we = ($urandom % 2 == 0);
      if (we) shadow[addr] = prg_in;
      @(negedge clk);
    end
    we = 0;
    @(negedge clk);
    check_all();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
