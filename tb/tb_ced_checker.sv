// tb_ced_checker: self-checking test of the LFSR-encoded checker. With equal
// actual and predicted words (or valid low) the output must be the LFSR bits;
// with any difference it must differ from them, in exactly the differing bits.
module tb_ced_checker;
  localparam int unsigned R = 8;
  logic         valid;
  logic [R-1:0] actual, predicted, lfsr_bits, err;
  int checks = 0, failures = 0;

  ced_checker #(.R(R)) dut (.valid(valid), .actual(actual), .predicted(predicted), .lfsr_bits(lfsr_bits), .err(err));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 300; n++) begin
      logic [R-1:0] flip;
      lfsr_bits = R'($urandom);
      actual    = R'($urandom);
      flip      = (n % 3 == 0) ? '0 : R'($urandom);
      predicted = actual ^ flip;
      valid     = (n % 5 != 4);
      #1;
      checks++;
      if (!valid || flip == '0) begin
        if (err !== lfsr_bits) begin
          failures++;
          $display("false alarm: valid=%0d err=%h lfsr=%h", valid, err, lfsr_bits);
        end
      end else if ((err ^ lfsr_bits) !== flip) begin
        failures++;
        $display("difference not reported: flip=%h err=%h lfsr=%h", flip, err, lfsr_bits);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
