// tb_bgl_xring: end-to-end test of one x-line of eight nodes with its two
// re-drive chips, at the design's full default size (8 nodes, 4 MB L3 each).
// The testbench plays the processors of every node, an external DDR device
// per node, and the cables, which it loops back from the east end to the west
// end (a torus of one mid-plane reached through the cables).
//  Phase A: re-drives set to skip the cables, the line is its own ring of 8.
//    - every node sends random packets (1..8 chunks, adaptive or
//      deterministic, some with the deposit bit, some to itself) from random
//      injection FIFOs; every packet is checked byte by byte at each node
//      that must receive it, and nowhere else;
//    - rounds of tree reductions (ADD, MAX, AND, OR, XOR) with a value from
//      every node, and broadcasts from one node, checked at every node;
//    - every node's processors write and read memory: shared data, L2
//      prefetch hit (6 clocks), L3 hit (about 25), L3 miss to DDR (about 75),
//      DDR bus errors (single bit corrected, double bit flagged);
//    - lock box and shared SRAM hand a value between a node's processors.
//  Phase B: re-drives include the cables; the testbench flips data bits on the
//    cable now and then, so link CRC errors and retransmissions happen; the
//    same packet checks are applied and the cables must carry traffic.
// At the end each mechanism's counter, summed over the nodes, must be
// non-zero, and every packet must have been received as expected.
module tb_bgl_xring;
  import bgl_pkg::*;
  localparam int NX = 8;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [2:0][7:0] dims, base;
  logic sel_include;
  link_bundle_t cable_e_in, cable_e_out, cable_w_in, cable_w_out;
  link_fwd_t [NX-1:0][3:0] yz_in, yz_out;
  link_bwd_t [NX-1:0][3:0] yz_in_bwd, yz_out_bwd;
  logic [NX-1:0][1:0] tree_parent; logic [NX-1:0][2:0] tree_child_en;
  tree_flit_t tree_up_in, tree_up_out; logic tree_up_in_rdy, tree_up_out_rdy;
  tree_flit_t [NX-1:0] tree_inj, tree_rec; logic [NX-1:0] tree_inj_rdy, tree_rec_rdy;
  logic [NX-1:0][NINJ-1:0] inj_wr; logic [NX-1:0][NINJ-1:0][7:0] inj_data; logic [NX-1:0][NINJ-1:0][15:0] inj_free;
  logic [NX-1:0][NREC-1:0] rec_rd; logic [NX-1:0][NREC-1:0][7:0] rec_data; logic [NX-1:0][NREC-1:0][15:0] rec_count;
  logic [NX-1:0][1:0] cpu_req_vld, cpu_req_rdy, cpu_req_we, cpu_resp_vld;
  logic [NX-1:0][1:0][31:0] cpu_req_addr; logic [NX-1:0][1:0][127:0] cpu_req_wdata, cpu_resp_rdata;
  logic [NX-1:0] l3_ready;
  logic [NX-1:0][1:0] lock_acq, lock_rel, lock_got; logic [NX-1:0][1:0][5:0] lock_idx;
  logic [NX-1:0][1:0] sram_en, sram_we; logic [NX-1:0][1:0][9:0] sram_addr; logic [NX-1:0][1:0][127:0] sram_wdata, sram_rdata;
  logic [NX-1:0] ddr_cmd_vld, ddr_cmd_we, ddr_dq_out_vld, ddr_dq_in_vld;
  logic [NX-1:0][31:0] ddr_cmd_addr; logic [NX-1:0][143:0] ddr_dq_out, ddr_dq_in;
  logic [NX-1:0][17:0][31:0] stats;
  logic [NX-1:0] flip1 = '0, flip2 = '0;

  bgl_xring dut (.*);

  for (genvar n = 0; n < NX; n++) begin : g_mem
    int n_reads, n_writes;
    ddr_model #(.LAT(44)) u_mem (.clk, .cmd_vld(ddr_cmd_vld[n]), .cmd_we(ddr_cmd_we[n]),
      .cmd_addr(ddr_cmd_addr[n]), .dq_out_vld(ddr_dq_out_vld[n]), .dq_out(ddr_dq_out[n]),
      .dq_in_vld(ddr_dq_in_vld[n]), .dq_in(ddr_dq_in[n]), .flip1(flip1[n]), .flip2(flip2[n]),
      .n_reads, .n_writes);
  end

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 30) $display("FAIL @%0t: %s", $time, msg); end
  endtask

  // ---------------- cables: looped east end -> west end, with bit errors
  logic corrupt_e = 0, corrupt_w = 0, phase_b = 0;
  int   cable_bytes_a = 0, cable_bytes_b = 0, n_flipped = 0;
  always_comb begin
    cable_e_in = cable_e_out;
    cable_w_in = cable_w_out;
    if (corrupt_e) cable_e_in.f.data = cable_e_out.f.data ^ 8'h10;
    if (corrupt_w) cable_w_in.f.data = cable_w_out.f.data ^ 8'h01;
  end
  always @(negedge clk) begin
    corrupt_e <= phase_b && cable_e_out.f.vld && ($urandom % 400 == 0);
    corrupt_w <= phase_b && cable_w_out.f.vld && ($urandom % 400 == 0);
    if (corrupt_e || corrupt_w) n_flipped++;
    if (rst_n && (cable_e_out.f.vld || cable_w_out.f.vld)) begin
      if (phase_b) cable_bytes_b++; else cable_bytes_a++;
    end
  end

  // ---------------- torus packets: scoreboard
  function automatic logic [7:0] pb(int src, int seq, int k);
    return 8'(src * 37 + seq * 11 + k * 7 + (k >> 3));
  endfunction
  int          remaining [int];
  logic [7:0]  exp_b0    [int];
  logic [7:0]  exp_dst   [int];
  logic [NX-1:0] rcv_mask [int];
  int          n_sent = 0, n_recv = 0, n_self = 0;

  task automatic send_pkts(int n, int npk, int seq0);
    for (int i = 0; i < npk; i++) begin
      int seq, key, chunks, len, f, dst, r;
      bit adaptive, deposit;
      logic [7:0] b0;
      logic [NX-1:0] mask;
      seq = seq0 + i; key = n * 65536 + seq;
      chunks = 1 + $urandom % 8; len = chunks * CHUNK;
      adaptive = $urandom % 2; deposit = 0;
      r = $urandom % 16;
      if (r == 0) dst = n;                                    // to itself: discarded
      else if (r < 4 && !adaptive) begin deposit = 1; dst = (n + 3) % NX; end
      else dst = (n + 1 + $urandom % (NX - 1)) % NX;
      mask = '0;
      if (deposit) for (int h = 1; h <= 3; h++) mask[(n + h) % NX] = 1'b1;
      else if (dst != n) mask[dst] = 1'b1;
      b0 = {3'(chunks - 1), adaptive, deposit, 3'b000};
      remaining[key] = $countones(mask); exp_b0[key] = b0; exp_dst[key] = 8'(dst); rcv_mask[key] = mask;
      if (dst == n) n_self++;
      f = $urandom % 6;
      @(negedge clk);
      while (inj_free[n][f] < 16'(len)) @(negedge clk);
      for (int k = 0; k < len; k++) begin
        inj_wr[n][f] = 1'b1;
        case (k)
          0: inj_data[n][f] = b0;
          1: inj_data[n][f] = 8'(dst);
          2, 3: inj_data[n][f] = 8'd0;
          4: inj_data[n][f] = 8'(n);
          5: inj_data[n][f] = 8'(seq);
          6: inj_data[n][f] = 8'(seq >> 8);
          default: inj_data[n][f] = pb(n, seq, k);
        endcase
        @(negedge clk);
      end
      inj_wr[n][f] = 1'b0;
      n_sent++;
      repeat ($urandom % 40) @(negedge clk);
    end
  endtask

  // reception: drain every FIFO a byte per clock, check whole packets
  logic [7:0] rbuf [NX][NREC][$];
  task automatic got_packet(int n, int f);
    int src, seq, key, len;
    bit ok;
    len = rbuf[n][f].size();
    src = int'(rbuf[n][f][4]); seq = int'({rbuf[n][f][6], rbuf[n][f][5]}); key = src * 65536 + seq;
    if (!remaining.exists(key)) begin
      check(0, $sformatf("node %0d fifo %0d: unknown packet src %0d seq %0d", n, f, src, seq));
      return;
    end
    ok = (rbuf[n][f][0] & 8'hFB) == exp_b0[key] && rbuf[n][f][1] == exp_dst[key]
         && rbuf[n][f][2] == 0 && rbuf[n][f][3] == 0;
    for (int k = 7; k < len; k++) if (rbuf[n][f][k] != pb(src, seq, k)) ok = 0;
    check(ok, $sformatf("node %0d: packet src %0d seq %0d content", n, src, seq));
    check(rcv_mask[key][n], $sformatf("node %0d: packet src %0d seq %0d not for this node", n, src, seq));
    rcv_mask[key][n] = 1'b0;
    remaining[key]--;
    n_recv++;
  endtask
  always @(negedge clk) begin
    for (int n = 0; n < NX; n++)
      for (int f = 0; f < NREC; f++) begin
        rec_rd[n][f] <= 1'b0;
        if (rst_n && rec_count[n][f] != 0 && !rec_rd[n][f]) begin
          rbuf[n][f].push_back(rec_data[n][f]);
          rec_rd[n][f] <= 1'b1;
          if (rbuf[n][f].size() == CHUNK * (int'(rbuf[n][f][0][7:5]) + 1)) begin
            got_packet(n, f);
            rbuf[n][f].delete();
          end
        end
      end
  end

  task automatic drain(int limit);
    int left, t;
    t = 0;
    do begin
      repeat (100) @(negedge clk);
      t += 100;
      left = 0;
      foreach (remaining[k]) left += remaining[k];
    end while (left != 0 && t < limit);
    check(left == 0, $sformatf("%0d packet copies never arrived", left));
  endtask

  // ---------------- tree
  int tree_got [NX];
  logic [31:0] tree_val [NX];
  logic [2:0]  tree_op  [NX];
  int n_tree_rounds = 0;
  always @(posedge clk)
    for (int n = 0; n < NX; n++)
      if (rst_n && tree_rec[n].vld && tree_rec_rdy[n]) begin
        tree_got[n]++; tree_val[n] = tree_rec[n].data; tree_op[n] = tree_rec[n].op;
      end

  function automatic logic [NX-1:0] inj_vlds();
    for (int n = 0; n < NX; n++) inj_vlds[n] = tree_inj[n].vld;
  endfunction
  task automatic tree_rounds(int nr);
    for (int r = 0; r < nr; r++) begin
      logic [31:0] v [NX];
      logic [31:0] expv;
      tree_op_e op;
      int src;
      op = tree_op_e'($urandom % 6);
      src = $urandom % NX;
      for (int n = 0; n < NX; n++) begin
        v[n] = (op == TOP_AND) ? ~(32'd1 << ($urandom % 32)) : (op == TOP_OR) ? (32'd1 << ($urandom % 32)) : $urandom;
        tree_got[n] = 0;
      end
      expv = v[0];
      for (int n = 1; n < NX; n++)
        case (op)
          TOP_ADD: expv = expv + v[n];
          TOP_MAX: expv = ($signed(v[n]) > $signed(expv)) ? v[n] : expv;   // signed integers
          TOP_AND: expv = expv & v[n];
          TOP_OR:  expv = expv | v[n];
          TOP_XOR: expv = expv ^ v[n];
          default: ;
        endcase
      if (op == TOP_BCAST) expv = v[src];
      @(negedge clk);
      for (int n = 0; n < NX; n++) begin
        if (op != TOP_BCAST || n == src) tree_inj[n] = '{vld: 1'b1, op: op, data: v[n]};
      end
      // each node holds its word until the tree takes it
      #1;
      while (|inj_vlds()) begin
        logic [NX-1:0] taken;
        for (int n = 0; n < NX; n++) taken[n] = tree_inj[n].vld && tree_inj_rdy[n];
        @(negedge clk);
        for (int n = 0; n < NX; n++) if (taken[n]) tree_inj[n] = '0;
        #1;
      end
      repeat (40) @(negedge clk);
      for (int n = 0; n < NX; n++)
        check(tree_got[n] == 1 && tree_val[n] == expv && tree_op[n] == 3'(op),
              $sformatf("tree round %0d op %0d node %0d: got %0d results, %h vs %h", r, op, n,
                        tree_got[n], tree_val[n], expv));
      n_tree_rounds++;
    end
  endtask

  // ---------------- memory, lock box and SRAM of one node
  task automatic cpu(int n, int p, logic we, logic [31:0] a, logic [127:0] d,
                     output logic [127:0] r, output int cyc);
    @(negedge clk);
    while (!cpu_req_rdy[n][p]) @(negedge clk);
    cpu_req_vld[n][p] = 1; cpu_req_we[n][p] = we; cpu_req_addr[n][p] = a; cpu_req_wdata[n][p] = d;
    @(negedge clk);
    cpu_req_vld[n][p] = 0;
    cyc = 1;
    while (!cpu_resp_vld[n][p]) begin @(negedge clk); cyc++; end
    r = cpu_resp_rdata[n][p];
  endtask

  int lat_l2 [NX], lat_l3 [NX], lat_mem [NX];
  task automatic mem_test(int n);
    logic [127:0] r, d;
    int cyc;
    logic [31:0] a;
    d = {$urandom, $urandom, $urandom, 32'(n)};
    cpu(n, 0, 1, 32'h0000_4000, d, r, cyc);
    cpu(n, 1, 0, 32'h0000_4000, '0, r, cyc);
    lat_l3[n] = cyc;
    check(r == d, $sformatf("node %0d: CPU1 reads CPU0's data", n));
    check(cyc >= 22 && cyc <= 28, $sformatf("node %0d: L3 hit latency %0d", n, cyc));
    repeat (150) @(negedge clk);
    cpu(n, 1, 0, 32'h0000_4020, '0, r, cyc);
    check(cyc == 6, $sformatf("node %0d: CPU1 prefetched line, L2 hit latency %0d", n, cyc));
    repeat (150) @(negedge clk);
    cpu(n, 0, 0, 32'h0008_0000, '0, r, cyc);
    lat_mem[n] = cyc;
    check(r == '0, $sformatf("node %0d: unwritten memory reads zero", n));
    check(cyc >= 70 && cyc <= 80, $sformatf("node %0d: L3 miss latency %0d", n, cyc));
    repeat (150) @(negedge clk);
    cpu(n, 0, 0, 32'h0008_0020, '0, r, cyc);
    lat_l2[n] = cyc;
    check(cyc == 6, $sformatf("node %0d: prefetched line, L2 hit latency %0d", n, cyc));
    // nine lines of one L3 set: the first goes out to DDR and comes back
    for (int k = 0; k < 9; k++) begin
      a = 32'h0010_0000 + 32'(k) * 32'h0002_0000;
      cpu(n, k % 2, 1, a, {96'(n), 32'(k + 100)}, r, cyc);
    end
    flip1[n] = 1'b1;
    cpu(n, 1, 0, 32'h0010_0000, '0, r, cyc);
    flip1[n] = 1'b0;
    check(r == {96'(n), 32'd100}, $sformatf("node %0d: line back from DDR, bit error corrected", n));
    if (n == NX - 1) begin
      flip2[n] = 1'b1;
      cpu(n, 0, 0, 32'h0040_0000, '0, r, cyc);
      flip2[n] = 1'b0;
    end
    // random write/read-back in the node's own memory
    for (int k = 0; k < 12; k++) begin
      a = {8'h0, 4'($urandom), 15'($urandom), 5'h0};
      d = {$urandom, $urandom, $urandom, $urandom};
      cpu(n, $urandom % 2, 1, a, d, r, cyc);
      cpu(n, $urandom % 2, 0, a, '0, r, cyc);
      check(r == d, $sformatf("node %0d: read-back at %h", n, a));
    end
  endtask

  int n_lock_handoff = 0;
  task automatic lock_sram_test(int n);
    logic [127:0] d;
    d = {$urandom, $urandom, $urandom, $urandom};
    @(negedge clk);
    lock_acq[n] = 2'b11; lock_idx[n][0] = 6'(n); lock_idx[n][1] = 6'(n);
    @(negedge clk);
    lock_acq[n] = 2'b00;
    check(lock_got[n] == 2'b01, $sformatf("node %0d: CPU0 wins the lock", n));
    sram_en[n] = 2'b01; sram_we[n] = 2'b01; sram_addr[n][0] = 10'(n * 3); sram_wdata[n][0] = d;
    @(negedge clk);
    lock_rel[n] = 2'b01; sram_en[n] = 2'b10; sram_we[n] = 2'b00; sram_addr[n][1] = 10'(n * 3);
    @(negedge clk);
    lock_rel[n] = 2'b00; sram_en[n] = 2'b00;
    check(sram_rdata[n][1] == d, $sformatf("node %0d: CPU1 reads CPU0's SRAM word", n));
    lock_acq[n] = 2'b10;
    @(negedge clk);
    lock_acq[n] = 2'b00;
    check(lock_got[n] == 2'b10, $sformatf("node %0d: CPU1 gets the released lock", n));
    lock_rel[n] = 2'b10;
    @(negedge clk);
    lock_rel[n] = 2'b00;
    n_lock_handoff++;
  endtask

  // ---------------- main sequence
  localparam int NPK_A = 30, NPK_B = 20;
  int n_done = 0;
  initial begin
    longint tot [18];
    string names [18] = '{"adaptive hops", "escape hops", "deposits", "deliveries", "discards",
                          "link CRC errors", "retransmissions", "token stalls", "tree reductions",
                          "tree broadcasts", "L2 hits cpu0", "L2 hits cpu1", "L2 prefetches cpu0",
                          "L2 prefetches cpu1", "L3 hits", "L3 misses", "ECC corrections",
                          "ECC uncorrectable"};
    dims = {8'd1, 8'd1, 8'(NX)}; base = '0; sel_include = 0;
    yz_in = '0; yz_out_bwd = '0;
    for (int n = 0; n < NX; n++) begin
      tree_parent[n] = (n == 0) ? 2'd3 : 2'd0;
      tree_child_en[n] = {2 * n + 2 < NX, 2 * n + 1 < NX, 1'b0};
    end
    tree_up_in = '0; tree_up_out_rdy = 1; tree_inj = '0; tree_rec_rdy = '1;
    inj_wr = '0; inj_data = '0;
    cpu_req_vld = '0; cpu_req_we = '0; cpu_req_addr = '0; cpu_req_wdata = '0;
    lock_acq = '0; lock_rel = '0; lock_idx = '0; sram_en = '0; sram_we = '0; sram_addr = '0; sram_wdata = '0;
    for (int n = 0; n < NX; n++) tree_got[n] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (&l3_ready);
    $display("phase A: line as its own ring of %0d nodes", NX);
    fork
      for (int n = 0; n < NX; n++) begin
        fork
          automatic int nn = n;
          begin
            send_pkts(nn, NPK_A, 0);
            n_done++;
          end
          begin
            mem_test(nn);
            lock_sram_test(nn);
            n_done++;
          end
        join_none
      end
      tree_rounds(12);
    join
    wait (n_done == 2 * NX);
    drain(10000);
    check(cable_bytes_a == 0, $sformatf("%0d bytes on the cables while they are skipped", cable_bytes_a));

    $display("phase B: line included through the (looped) cables, with bit errors");
    repeat (20) @(negedge clk);
    sel_include = 1;
    phase_b = 1;
    repeat (5) @(negedge clk);
    for (int n = 0; n < NX; n++) begin
      fork
        automatic int nn = n;
        begin
          send_pkts(nn, NPK_B, 1000);
          n_done++;
        end
      join_none
    end
    wait (n_done == 3 * NX);
    drain(10000);
    check(cable_bytes_b > 0, "cables carried traffic");

    for (int i = 0; i < 18; i++) begin
      tot[i] = 0;
      for (int n = 0; n < NX; n++) tot[i] += stats[n][i];
      $display("  %-20s %0d", names[i], tot[i]);
      check(tot[i] > 0, $sformatf("mechanism never happened: %s", names[i]));
    end
    $display("  packets sent %0d (%0d to self), copies received %0d; cable bytes %0d, bit flips %0d",
             n_sent, n_self, n_recv, cable_bytes_b, n_flipped);
    $display("  tree rounds %0d; lock hand-offs %0d; latencies node 0: L2 %0d, L3 %0d, DDR %0d",
             n_tree_rounds, n_lock_handoff, lat_l2[0], lat_l3[0], lat_mem[0]);
    check(n_self > 0 && n_flipped > 0 && n_tree_rounds == 12 && n_lock_handoff == NX, "mechanism counts");
    check(tot[4] == longint'(n_self), "every packet to itself discarded");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
