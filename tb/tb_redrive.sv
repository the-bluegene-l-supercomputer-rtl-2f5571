// tb_redrive: random traffic on all inputs of the re-drive chip in both
// route settings, switching between them; checks that each output carries
// the right input one clock later (include: cable->mid-plane->cable;
// skip: cable passes through, mid-plane loops on itself).
module tb_redrive;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic sel_include = 0;
  logic [8:0] cable_in = 0, mid_in = 0, cable_out, mid_out;
  redrive #(.W(9)) dut (.*);
  int n_inc = 0, n_skip = 0;

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 2000; t++) begin
      logic [8:0] ec, em;
      @(negedge clk);
      if (t % 100 == 0) sel_include = ~sel_include;
      cable_in = 9'($urandom); mid_in = 9'($urandom);
      ec = sel_include ? mid_in : cable_in;
      em = sel_include ? cable_in : mid_in;
      if (sel_include) n_inc++; else n_skip++;
      @(posedge clk); #1;
      check(cable_out == ec && mid_out == em, "route");
    end
    check(n_inc > 0 && n_skip > 0, "both settings");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
