// tb_ddr_ctrl: writes random lines through the controller into the DDR model
// and reads them back. Checks read data, the two 144-bit beats per line, that
// a single flipped bit on the bus is corrected and counted, that a double
// error is reported, and the command-to-response timing.
module tb_ddr_ctrl;
  import bgl_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic mem_vld = 0, mem_rdy, mem_we = 0, mem_resp_vld;
  logic [31:0] mem_addr = 0;
  logic [255:0] mem_wdata = 0, mem_resp_data;
  logic ddr_cmd_vld, ddr_cmd_we, ddr_dq_out_vld, ddr_dq_in_vld;
  logic [31:0] ddr_cmd_addr, n_sec, n_ded;
  logic [143:0] ddr_dq_out, ddr_dq_in;
  logic flip1 = 0, flip2 = 0;
  int n_reads, n_writes, beats = 0, nw0 = 0;
  localparam int LAT = 12;

  ddr_ctrl dut (.*);
  ddr_model #(.LAT(LAT)) u_mem (.clk, .cmd_vld(ddr_cmd_vld), .cmd_we(ddr_cmd_we), .cmd_addr(ddr_cmd_addr),
    .dq_out_vld(ddr_dq_out_vld), .dq_out(ddr_dq_out), .dq_in_vld(ddr_dq_in_vld), .dq_in(ddr_dq_in),
    .flip1, .flip2, .n_reads, .n_writes);
  always @(posedge clk) if (rst_n && ddr_dq_out_vld) beats <= beats + 1;

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  logic [255:0] model [16];

  task automatic xact(input logic we, input int line, input logic [255:0] d, output logic [255:0] r, output int cyc);
    @(negedge clk);
    wait (mem_rdy);
    mem_vld = 1; mem_we = we; mem_addr = 32'(line * 32); mem_wdata = d;
    @(negedge clk);
    mem_vld = 0;
    cyc = 1;
    while (!mem_resp_vld) begin @(negedge clk); cyc++; end
    r = mem_resp_data;
  endtask

  initial begin
    logic [255:0] r;
    int cyc;
    repeat (3) @(posedge clk);
    rst_n = 1;
    nw0 = n_writes;   // commands seen before reset took hold do not count
    for (int i = 0; i < 16; i++) begin
      model[i] = {8{$urandom}};
      xact(1, i, model[i], r, cyc);
      check(cyc == 4, $sformatf("write ack after %0d", cyc));
    end
    check(beats == 32 && n_writes - nw0 == 16, "two beats per line");
    for (int t = 0; t < 60; t++) begin
      int i;
      i = $urandom_range(0, 15);
      flip1 = (t % 5 == 1);
      flip2 = (t % 13 == 7);
      xact(0, i, '0, r, cyc);
      flip1 = 0;
      if (!flip2) check(r == model[i], "read data (corrected)");
      flip2 = 0;
      check(cyc == LAT + 5, $sformatf("read latency %0d", cyc));
    end
    check(n_sec >= 10, $sformatf("single errors corrected %0d", n_sec));
    check(n_ded >= 4, $sformatf("double errors detected %0d", n_ded));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
