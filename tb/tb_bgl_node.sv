// tb_bgl_node: one node with a DDR model on its memory pins; the testbench
// plays the processors and the torus neighbours.
//  - memory: processor reads see about 25 clocks for an L2 miss that hits in
//    L3, about 75 for one that goes to external DDR, and 6 for an L2 hit
//    (prefetched next line); data written by one processor is read back by
//    the other (L3 shared);
//  - a single-bit error on the DDR bus is corrected;
//  - lock box and shared SRAM pass a value between the processors;
//  - torus: a packet for the +x neighbour leaves on the +x link with a CRC
//    computed here; a packet arriving on the -x link is delivered to the
//    reception FIFO; a packet injected for the node itself is discarded;
//  - tree: as root with no children a reduction returns the node's own word.
module tb_bgl_node;
  import bgl_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [2:0][7:0] dims, my;
  logic [1:0] tree_parent; logic [2:0] tree_child_en;
  link_fwd_t [5:0] link_in, link_out;
  link_bwd_t [5:0] link_in_bwd, link_out_bwd;
  logic [6:0] inj_wr; logic [6:0][7:0] inj_data; logic [6:0][15:0] inj_free;
  logic [11:0] rec_rd; logic [11:0][7:0] rec_data; logic [11:0][15:0] rec_count;
  tree_flit_t [2:0] tree_in, tree_out; logic [2:0] tree_in_rdy, tree_out_rdy;
  tree_flit_t tree_inj, tree_rec; logic tree_inj_rdy, tree_rec_rdy;
  logic [1:0] cpu_req_vld, cpu_req_rdy, cpu_req_we, cpu_resp_vld;
  logic [1:0][31:0] cpu_req_addr; logic [1:0][127:0] cpu_req_wdata, cpu_resp_rdata;
  logic l3_ready;
  logic [1:0] lock_acq, lock_rel, lock_got; logic [1:0][5:0] lock_idx;
  logic [1:0] sram_en, sram_we; logic [1:0][9:0] sram_addr; logic [1:0][127:0] sram_wdata, sram_rdata;
  logic ddr_cmd_vld, ddr_cmd_we, ddr_dq_out_vld, ddr_dq_in_vld;
  logic [31:0] ddr_cmd_addr; logic [143:0] ddr_dq_out, ddr_dq_in;
  logic [17:0][31:0] stats;
  logic flip1 = 0, flip2 = 0; int n_reads, n_writes;

  bgl_node dut (.*);
  ddr_model #(.LAT(44)) u_mem (.clk, .cmd_vld(ddr_cmd_vld), .cmd_we(ddr_cmd_we), .cmd_addr(ddr_cmd_addr),
    .dq_out_vld(ddr_dq_out_vld), .dq_out(ddr_dq_out), .dq_in_vld(ddr_dq_in_vld), .dq_in(ddr_dq_in),
    .flip1, .flip2, .n_reads, .n_writes);

  int tree_seen = 0;
  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  function automatic logic [15:0] crc_ref(logic [15:0] c, logic [7:0] b);
    logic [15:0] r;
    r = c ^ {b, 8'h00};
    repeat (8) r = r[15] ? ((r << 1) ^ 16'h1021) : (r << 1);
    return r;
  endfunction

  task automatic cpu(input int p, input logic we, input logic [31:0] a, input logic [127:0] d,
                     output logic [127:0] r, output int cyc);
    @(negedge clk);
    while (!cpu_req_rdy[p]) @(negedge clk);
    cpu_req_vld[p] = 1; cpu_req_we[p] = we; cpu_req_addr[p] = a; cpu_req_wdata[p] = d;
    @(negedge clk);
    cpu_req_vld[p] = 0;
    cyc = 1;
    while (!cpu_resp_vld[p]) begin @(negedge clk); cyc++; end
    r = cpu_resp_rdata[p];
  endtask

  initial begin
    logic [127:0] r;
    int cyc;
    dims = {8'd1, 8'd1, 8'd4}; my = '0;
    tree_parent = 2'd3; tree_child_en = '0;
    link_in = '0; link_out_bwd = '0; inj_wr = '0; inj_data = '0; rec_rd = '0;
    tree_in = '0; tree_out_rdy = '1; tree_inj = '0; tree_rec_rdy = 1;
    cpu_req_vld = '0; cpu_req_we = '0; cpu_req_addr = '0; cpu_req_wdata = '0;
    lock_acq = '0; lock_rel = '0; lock_idx = '0; sram_en = '0; sram_we = '0; sram_addr = '0; sram_wdata = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (l3_ready);

    // ---------- memory ----------
    cpu(0, 1, 32'h0000_4000, 128'hA5A5_0001, r, cyc);              // write-through, allocates in L3
    cpu(1, 0, 32'h0000_4000, '0, r, cyc);                          // other CPU: L2 miss, L3 hit
    check(r == 128'hA5A5_0001, "CPU1 reads CPU0's data through the shared L3");
    check(cyc >= 22 && cyc <= 28, $sformatf("L3 hit latency %0d (about 25)", cyc));
    repeat (150) @(negedge clk);                                    // let the prefetch of 0x4020 finish
    cpu(0, 0, 32'h0008_0000, '0, r, cyc);                          // L3 miss
    check(r == '0, "unwritten memory reads zero");
    check(cyc >= 70 && cyc <= 80, $sformatf("L3 miss latency %0d (about 75)", cyc));
    repeat (120) @(negedge clk);                                    // prefetch of next line completes
    cpu(0, 0, 32'h0008_0020, '0, r, cyc);
    check(cyc == 6, $sformatf("prefetched line: L2 hit latency %0d", cyc));
    // push a written line out to DDR and read it back with a bus error
    for (int k = 0; k < 9; k++) cpu(0, 1, 32'h0010_0000 + 32'(k) * 32'h0002_0000, 128'(k + 100), r, cyc);
    flip1 = 1;
    cpu(1, 0, 32'h0010_0000, '0, r, cyc);
    flip1 = 0;
    check(r == 128'd100, "line evicted to DDR and read back corrected");
    check(stats[16] >= 1, "ECC correction counted");

    // ---------- lock box and SRAM ----------
    @(negedge clk);
    lock_acq = 2'b11; lock_idx[0] = 6'd5; lock_idx[1] = 6'd5;
    @(negedge clk);
    lock_acq = 0;
    check(lock_got == 2'b01, "CPU0 wins the lock");
    sram_en = 2'b01; sram_we = 2'b01; sram_addr[0] = 10'd7; sram_wdata[0] = 128'hBEEF;
    @(negedge clk);
    lock_rel = 2'b01; sram_en = 2'b10; sram_we = 0; sram_addr[1] = 10'd7;
    @(negedge clk);
    lock_rel = 0; sram_en = 0;
    check(sram_rdata[1] == 128'hBEEF, "CPU1 reads CPU0's SRAM word");
    lock_acq = 2'b10;
    @(negedge clk);
    lock_acq = 0;
    check(lock_got == 2'b10, "CPU1 gets the released lock");

    // ---------- torus ----------
    begin
      logic [7:0] pkt [64];
      logic [15:0] c;
      int n;
      // to +x neighbour (x = 1), deterministic, 64 bytes
      for (int k = 0; k < 64; k++) pkt[k] = (k == 0) ? 8'b001_0_0_000 : (k == 1) ? 8'd1 : (k < 4) ? 8'd0 : 8'(k);
      for (int k = 0; k < 64; k++) begin
        @(negedge clk); inj_wr[3] = 1; inj_data[3] = pkt[k];
      end
      @(negedge clk); inj_wr[3] = 0;
      n = 0; c = 16'hFFFF;
      while (n < 66) begin
        @(posedge clk); #1;
        if (link_out[0].vld) begin
          if (n < 64) begin
            check(link_out[0].data == ((n == 0) ? (pkt[0] | 8'h04) : pkt[n]), "byte on +x link");
            c = crc_ref(c, link_out[0].data);
          end else check(link_out[0].data == ((n == 64) ? c[15:8] : c[7:0]), "CRC on +x link");
          n++;
        end
      end
      @(negedge clk); link_out_bwd[0].ack = 1; @(negedge clk); link_out_bwd[0].ack = 0;
      check(stats[1] == 1, "escape VC used for deterministic packet");
      // from the -x neighbour, 32 bytes on VC0 for this node
      c = 16'hFFFF;
      for (int k = 0; k < 34; k++) begin
        logic [7:0] b;
        b = (k == 0) ? 8'b000_1_0_000 : (k < 4) ? 8'd0 : 8'(k * 3);
        if (k < 32) c = crc_ref(c, b);
        else b = (k == 32) ? c[15:8] : c[7:0];
        @(negedge clk); link_in[1] = '{vld: 1'b1, data: b};
      end
      @(negedge clk); link_in[1] = '0;
      repeat (60) @(negedge clk);
      check(rec_count[2] == 32, $sformatf("packet in reception FIFO of -x VC0: %0d", rec_count[2]));
      for (int k = 0; k < 32; k++) begin
        check(rec_data[2] == ((k == 0) ? 8'b000_1_0_000 : (k < 4) ? 8'd0 : 8'(k * 3)), "received byte");
        rec_rd[2] = 1; @(negedge clk); rec_rd[2] = 0;
      end
      // for itself: discarded
      for (int k = 0; k < 32; k++) begin
        @(negedge clk); inj_wr[0] = 1; inj_data[0] = (k == 0) ? 8'h00 : 8'h00;
      end
      @(negedge clk); inj_wr[0] = 0;
      repeat (60) @(negedge clk);
      check(stats[4] == 1 && stats[3] == 1, "self packet discarded, one delivered");
    end

    // ---------- tree ----------
    tree_inj = '{vld: 1'b1, op: TOP_MAX, data: 32'd77};
    #1;
    while (!tree_inj_rdy) begin @(negedge clk); #1; end
    @(negedge clk);
    tree_inj = '0;
    repeat (3) @(negedge clk);
    check(stats[8] == 1, $sformatf("tree reduction at the root (%0d)", stats[8]));
    check(tree_seen == 1, "one tree result");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // catch the tree result when it comes round
  always @(posedge clk) if (rst_n && tree_rec.vld && tree_rec_rdy) begin
    check(tree_rec.data == 32'd77 && tree_rec.op == TOP_MAX, "tree result");
    tree_seen++;
  end
  initial begin
    repeat (200000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
