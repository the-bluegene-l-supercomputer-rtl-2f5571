// tb_secded: encodes random words, then decodes them clean, with every
// single-bit error (all 72 positions) and with random double-bit errors.
// Clean and single-error words must come back exact (sec flags the single
// error); double errors must raise ded. Also checks the codeword has the
// data bits where the code places them.
module tb_secded;
  int checks = 0, failures = 0;
  logic [63:0] d, dd;
  logic [71:0] c, cr;
  logic sec, ded;
  secded_enc u_enc (.d, .c);
  secded_dec u_dec (.c(cr), .d(dd), .sec, .ded);

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    for (int t = 0; t < 300; t++) begin
      d = {$urandom, $urandom};
      #1;
      check(c[3] == d[0] && c[71] == d[63], "data placement");
      check(^c == 1'b0, "overall parity even");
      cr = c; #1;
      check(dd == d && !sec && !ded, "clean");
      for (int b = 0; b < 72; b++) begin
        cr = c; cr[b] = ~cr[b]; #1;
        check(dd == d && sec && !ded, $sformatf("single error at %0d", b));
      end
      for (int k = 0; k < 20; k++) begin
        int b1, b2;
        b1 = $urandom_range(0, 71);
        b2 = (b1 + $urandom_range(1, 71)) % 72;
        cr = c; cr[b1] = ~cr[b1]; cr[b2] = ~cr[b2]; #1;
        check(ded, "double error detected");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #10000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
