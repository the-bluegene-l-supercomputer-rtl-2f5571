// tb_pkt_fifo: drives random packets into the tentative-write FIFO, commits
// or drops each one at random, pops at random, and compares everything read
// with a queue model that only ever receives committed packets. Also checks
// that uncommitted bytes are invisible and that 'free' accounts for them.
module tb_pkt_fifo;
  localparam int DEPTH = 64;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic wr = 0, commit = 0, drop = 0, rd = 0;
  logic [7:0] wdata = 0;
  logic [3:0][7:0] peek;
  logic [6:0] count, free;
  pkt_fifo #(.DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  logic [7:0] model[$];
  logic [7:0] pend[$];

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    check(count == 0 && free == DEPTH, "empty after reset");
    for (int p = 0; p < 300; p++) begin
      int n;
      n = 1 + $urandom_range(0, 12);
      pend.delete();
      for (int i = 0; i < n; i++) begin
        @(negedge clk);
        wr = (int'(free) > 0); wdata = 8'($urandom);
        rd = ($urandom_range(0, 3) == 0) && count != 0;
        if (rd) begin
          check(peek[0] == model[0], $sformatf("pop data %h vs %h", peek[0], model[0]));
          void'(model.pop_front());
        end
        if (wr) pend.push_back(wdata);
        @(posedge clk); #1;
        wr = 0; rd = 0;
      end
      check(int'(count) == model.size(), "tentative bytes invisible");
      @(negedge clk);
      if ($urandom_range(0, 2) != 0) begin
        commit = 1;
        foreach (pend[i]) model.push_back(pend[i]);
      end else drop = 1;
      @(posedge clk); #1;
      commit = 0; drop = 0;
      check(int'(count) == model.size(), $sformatf("count %0d vs %0d", count, model.size()));
      check(int'(free) == DEPTH - model.size(), "free");
      if (model.size() >= 4)
        check(peek[1] == model[1] && peek[2] == model[2] && peek[3] == model[3], "peek header");
      // drain sometimes
      while (model.size() > 40) begin
        @(negedge clk); rd = 1;
        check(peek[0] == model[0], "drain data");
        void'(model.pop_front());
        @(posedge clk); #1; rd = 0;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
