// tb_switchbox: self-checking test of the two-input switchbox. Drives random
// wire values in both configurations and checks that the parallel setting
// passes a->y0, b->y1 and the crossed setting swaps them.
module tb_switchbox;
  localparam int unsigned W = 4;
  logic         crossed;
  logic [W-1:0] a, b, y0, y1;
  int checks = 0, failures = 0;

  switchbox #(.W(W)) dut (.crossed(crossed), .a(a), .b(b), .y0(y0), .y1(y1));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 200; n++) begin
      crossed = n[0];
      a = W'($urandom);
      b = W'($urandom);
      #1;
      checks++;
      if (crossed ? (y0 !== b || y1 !== a) : (y0 !== a || y1 !== b)) begin
        failures++;
        $display("mismatch crossed=%0d a=%h b=%h y0=%h y1=%h", crossed, a, b, y0, y1);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
