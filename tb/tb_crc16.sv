// tb_crc16: checks the link CRC step against the published check value of
// CRC-16/CCITT-FALSE ("123456789" -> 16'h29B1), against a bit-serial model,
// and against the residue property (a message followed by its own CRC gives
// zero), on random messages.
module tb_crc16;
  int checks = 0, failures = 0;
  logic [15:0] c_in, c_out;
  logic [7:0]  d;
  crc16 dut (.crc_in(c_in), .data(d), .crc_out(c_out));

  function automatic logic [15:0] ref_step(logic [15:0] c, logic [7:0] b);
    logic [15:0] r;
    r = c ^ {b, 8'h00};
    repeat (8) r = r[15] ? ((r << 1) ^ 16'h1021) : (r << 1);
    return r;
  endfunction

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    logic [15:0] crc, rc;
    logic [7:0] msg [0:8];
    string s = "123456789";
    crc = 16'hFFFF;
    for (int i = 0; i < 9; i++) begin
      c_in = crc; d = s[i]; #1; crc = c_out;
    end
    check(crc == 16'h29B1, $sformatf("check value %h", crc));
    for (int t = 0; t < 200; t++) begin
      int n;
      n = 1 + $urandom_range(0, 40);
      crc = 16'hFFFF; rc = 16'hFFFF;
      for (int i = 0; i < n; i++) begin
        c_in = crc; d = 8'($urandom); #1;
        rc = ref_step(rc, d);
        crc = c_out;
      end
      check(crc == rc, $sformatf("serial model %h vs %h", crc, rc));
      c_in = crc; d = rc[15:8]; #1; crc = c_out;
      c_in = crc; d = rc[7:0];  #1; crc = c_out;
      check(crc == 16'h0000, "residue");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
