// tb_lock_box: two processors hammer a few locks with random acquire and
// release requests; a model of owners decides what each request should get.
// Checks mutual exclusion, the one-clock answer, that CPU0 wins a tie, that
// only the owner can release, and the lock state vector.
module tb_lock_box;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [1:0] acq = 0, rel = 0, got, bad_release;
  logic [1:0][5:0] idx = 0;
  logic [63:0] locked;
  lock_box dut (.*);

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  int owner [64];   // -1 free, else cpu
  int n_tie = 0, n_busy = 0;

  initial begin
    foreach (owner[i]) owner[i] = -1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check(locked == 0, "all free after reset");
    for (int t = 0; t < 5000; t++) begin
      logic [1:0] eg, ebad;
      int o_before [64];
      for (int c = 0; c < 2; c++) begin
        idx[c] = 6'($urandom_range(0, 3));
        acq[c] = ($urandom_range(0, 2) == 0);
        rel[c] = !acq[c] && ($urandom_range(0, 2) == 0);
      end
      o_before = owner;
      eg = '0; ebad = '0;
      for (int c = 0; c < 2; c++)
        if (rel[c]) begin
          if (o_before[idx[c]] == c) owner[idx[c]] = -1; else ebad[c] = 1;
        end
      if (acq[0] && o_before[idx[0]] == -1) begin owner[idx[0]] = 0; eg[0] = 1; end
      if (acq[1] && o_before[idx[1]] == -1 && !(acq[0] && idx[0] == idx[1])) begin
        owner[idx[1]] = 1; eg[1] = 1;
      end
      if (acq[0] && acq[1] && idx[0] == idx[1] && o_before[idx[0]] == -1) n_tie++;
      if ((acq[0] && o_before[idx[0]] != -1)) n_busy++;
      @(posedge clk); #1;
      acq = 0; rel = 0;
      check(got == eg, $sformatf("got %b vs %b", got, eg));
      check(bad_release == ebad, "bad release flag");
      for (int i = 0; i < 4; i++) check(locked[i] == (owner[i] != -1), "lock state");
      @(negedge clk);
    end
    check(n_tie > 10 && n_busy > 10, "ties and busy locks seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
