// tb_l3_cache: a small L3 (16 KB, 8 ways, two banks) with a line-memory
// model behind it. Both ports issue random 128-bit reads and writes over a
// region four times the cache size, so lines are replaced and dirty lines
// written back; every read is compared with a memory model. Also checks the
// hit latency, that the two banks serve the two ports at the same time, and
// that a bit flipped in the eDRAM array is corrected and counted.
module tb_l3_cache;
  import bgl_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  localparam int HL = 20, MLAT = 30;

  logic init_done;
  logic [1:0] req_vld = 0, req_rdy, req_we = 0, resp_vld;
  logic [1:0][31:0] req_addr = 0;
  logic [1:0][127:0] req_wdata = 0;
  logic [1:0][255:0] resp_data;
  logic mem_vld, mem_rdy, mem_we, mem_resp_vld;
  logic [31:0] mem_addr;
  logic [255:0] mem_wdata, mem_resp_data;
  logic [31:0] n_hit, n_miss, n_sec, n_ded;

  l3_cache #(.BYTES(16384), .WAYS(8), .HIT_LAT(HL)) dut (.*);

  // line memory behind the cache
  logic [255:0] lmem [logic [26:0]];
  function automatic logic [255:0] rdl(logic [26:0] a);
    return lmem.exists(a) ? lmem[a] : {8{5'h0, a}};
  endfunction
  int mbusy = 0, mcnt = 0, n_wb = 0; logic [31:0] ma; logic mwe;
  assign mem_rdy = (mbusy == 0);
  always @(posedge clk) begin
    mem_resp_vld <= 0;
    if (mbusy == 0 && mem_vld) begin
      mbusy = 1; mcnt = MLAT; ma = mem_addr; mwe = mem_we;
      if (mem_we) begin lmem[mem_addr[31:5]] = mem_wdata; n_wb++; end
    end else if (mbusy) begin
      mcnt--;
      if (mcnt == 0) begin mbusy = 0; mem_resp_vld <= 1; mem_resp_data <= rdl(ma[31:5]); end
    end
  end

  // reference: 128-bit halves
  logic [127:0] ref_m [logic [27:0]];
  function automatic logic [127:0] rdh(logic [27:0] a);
    logic [255:0] l;
    if (ref_m.exists(a)) return ref_m[a];
    l = {8{5'h0, a[27:1]}};
    return a[0] ? l[255:128] : l[127:0];
  endfunction

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  int lat [2];
  logic [127:0] got [2];
  task automatic access(input int p, input logic we, input logic [31:0] a, input logic [127:0] d);
    @(negedge clk);
    req_vld[p] = 1; req_we[p] = we; req_addr[p] = a; req_wdata[p] = d;
    #1;
    while (!req_rdy[p]) begin @(negedge clk); #1; end
    @(negedge clk);
    req_vld[p] = 0;
    lat[p] = 1;
    while (!resp_vld[p]) begin @(negedge clk); lat[p]++; end
    got[p] = a[4] ? resp_data[p][255:128] : resp_data[p][127:0];
  endtask

  int both_busy = 0;
  always @(posedge clk)
    if (dut.g_bank[0].u_bank.st != 3'd1 && dut.g_bank[1].u_bank.st != 3'd1) both_busy++;

  initial begin
    int t0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (init_done);
    // a miss then a hit on the same line
    access(0, 0, 32'h100, '0);
    check(got[0] == rdh(28'h10), "miss data");
    access(0, 0, 32'h110, '0);
    check(got[0] == rdh(28'h11), "hit data");
    check(lat[0] == HL + 2, $sformatf("hit latency %0d", lat[0]));
    // ECC: flip one bit of the stored line and read it again
    begin
      int set, way;
      set = (32'h100 >> 6) % 32;
      for (way = 0; way < 8; way++)
        if (dut.g_bank[0].u_bank.valid[set][way] && dut.g_bank[0].u_bank.tagm[set][way] == 0) break;
      dut.g_bank[0].u_bank.dmem[{5'(set), 3'(way)}][100] = ~dut.g_bank[0].u_bank.dmem[{5'(set), 3'(way)}][100];
      access(0, 0, 32'h100, '0);
      check(got[0] == rdh(28'h10) && n_sec == 1, $sformatf("single eDRAM error corrected: way %0d sec %0d", way, n_sec));
    end
    // concurrent, different banks (address bit 5)
    fork
      access(0, 0, 32'h100, '0);
      access(1, 0, 32'h120, '0);
    join
    check(both_busy > HL / 2, "both banks busy at once");
    // random traffic from both ports
    for (int t = 0; t < 600; t++) begin
      logic [1:0][31:0] a; logic [1:0] we; logic [1:0][127:0] d;
      for (int p = 0; p < 2; p++) begin
        a[p]  = 32'($urandom_range(0, 4095) * 16);
        if (p == 1 && a[1][31:4] == a[0][31:4]) a[1] = a[1] ^ 32'h10;
        we[p] = ($urandom_range(0, 2) == 0);
        d[p]  = {$urandom, $urandom, $urandom, $urandom};
      end
      fork
        access(0, we[0], a[0], d[0]);
        access(1, we[1], a[1], d[1]);
      join
      for (int p = 0; p < 2; p++) begin
        if (we[p]) ref_m[a[p][31:4]] = d[p];
        else check(got[p] == rdh(a[p][31:4]), $sformatf("port %0d read %h", p, a[p]));
      end
    end
    check(n_wb > 20, $sformatf("dirty write-backs %0d", n_wb));
    check(n_miss > 100 && n_hit > 10, "hits and misses");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (500000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

