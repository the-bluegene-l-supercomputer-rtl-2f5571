// tb_mp_sram: random reads and writes on both ports against an array model;
// checks one-clock read latency, read-before-write in the same clock, and
// that port 0 wins a same-word write collision.
module tb_mp_sram;
  localparam int WORDS = 64;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;
  logic [1:0] en = 0, we = 0;
  logic [1:0][5:0] addr = 0;
  logic [1:0][127:0] wdata = 0, rdata;
  mp_sram #(.WORDS(WORDS), .W(128)) dut (.*);
  logic [127:0] model [WORDS];
  int n_coll = 0;

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    // fill through both ports
    for (int i = 0; i < WORDS; i += 2) begin
      @(negedge clk);
      en = 2'b11; we = 2'b11; addr[0] = 6'(i); addr[1] = 6'(i + 1);
      wdata[0] = {4{32'(i)}}; wdata[1] = {4{32'(i + 1)}};
      model[i] = wdata[0]; model[i + 1] = wdata[1];
    end
    for (int t = 0; t < 4000; t++) begin
      logic [1:0][127:0] exp;
      logic [1:0] rd_chk;
      @(negedge clk);
      for (int p = 0; p < 2; p++) begin
        en[p] = 1'($urandom); we[p] = 1'($urandom);
        addr[p] = 6'($urandom_range(0, 7));
        wdata[p] = {$urandom, $urandom, $urandom, $urandom};
        exp[p] = model[addr[p]];
        rd_chk[p] = en[p];
      end
      if (en[1] && we[1] && !(en[0] && we[0] && addr[0] == addr[1])) model[addr[1]] = wdata[1];
      if (en[0] && we[0]) model[addr[0]] = wdata[0];
      if (&en && &we && addr[0] == addr[1]) n_coll++;
      @(posedge clk); #1;
      for (int p = 0; p < 2; p++) if (rd_chk[p]) check(rdata[p] == exp[p], "read data");
    end
    en = 0;
    check(n_coll > 20, "collisions exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
