// bgl_node: the logic of one node ASIC that can be built from its
// description: the torus and tree network logic, the memory path from the two
// processors' L2 buffers through the shared L3 to the DDR controller, and the
// lock box and multiport SRAM the two processors share.
//
// The two PowerPC 440 cores with their double FPUs and L1 caches, the
// Ethernet, the JTAG unit and the serial link circuits are not part of this
// RTL; their connections are ports. Processor k talks to its L2 buffer over
// cpu_req/cpu_resp (128-bit, one request outstanding), to the lock box and
// the SRAM directly, and to the torus injection/reception FIFOs and the tree
// injection/reception channels, which in the chip are reached through the
// L2; here they are plain ports that either processor may use (nothing ties a
// FIFO to a processor). Torus and tree links, the 144-bit DDR data bus and the
// configuration (torus size, own coordinates, tree port roles) are ports too.
//
// Every block keeps its own timing; see each module. After reset the L3
// spends one clock per set clearing its directory (l3_ready goes high).
module bgl_node
  import bgl_pkg::*;
(
  input  logic                        clk,
  input  logic                        rst_n,
  // configuration
  input  logic [2:0][7:0]             dims,
  input  logic [2:0][7:0]             my,
  input  logic [1:0]                  tree_parent,
  input  logic [2:0]                  tree_child_en,
  // torus links
  input  link_fwd_t [NLINK-1:0]       link_in,
  output link_bwd_t [NLINK-1:0]       link_in_bwd,
  output link_fwd_t [NLINK-1:0]       link_out,
  input  link_bwd_t [NLINK-1:0]       link_out_bwd,
  // torus FIFOs
  input  logic [NINJ-1:0]             inj_wr,
  input  logic [NINJ-1:0][7:0]        inj_data,
  output logic [NINJ-1:0][15:0]       inj_free,
  input  logic [NREC-1:0]             rec_rd,
  output logic [NREC-1:0][7:0]        rec_data,
  output logic [NREC-1:0][15:0]       rec_count,
  // tree links and local channels
  input  tree_flit_t [2:0]            tree_in,
  output logic [2:0]                  tree_in_rdy,
  output tree_flit_t [2:0]            tree_out,
  input  logic [2:0]                  tree_out_rdy,
  input  tree_flit_t                  tree_inj,
  output logic                        tree_inj_rdy,
  output tree_flit_t                  tree_rec,
  input  logic                        tree_rec_rdy,
  // processor memory ports (one per core)
  input  logic [1:0]                  cpu_req_vld,
  output logic [1:0]                  cpu_req_rdy,
  input  logic [1:0]                  cpu_req_we,
  input  logic [1:0][31:0]            cpu_req_addr,
  input  logic [1:0][CPU_BITS-1:0]    cpu_req_wdata,
  output logic [1:0]                  cpu_resp_vld,
  output logic [1:0][CPU_BITS-1:0]    cpu_resp_rdata,
  output logic                        l3_ready,
  // lock box and shared SRAM
  input  logic [1:0]                  lock_acq,
  input  logic [1:0]                  lock_rel,
  input  logic [1:0][5:0]             lock_idx,
  output logic [1:0]                  lock_got,
  input  logic [1:0]                  sram_en,
  input  logic [1:0]                  sram_we,
  input  logic [1:0][9:0]             sram_addr,
  input  logic [1:0][CPU_BITS-1:0]    sram_wdata,
  output logic [1:0][CPU_BITS-1:0]    sram_rdata,
  // external DDR memory
  output logic                        ddr_cmd_vld,
  output logic                        ddr_cmd_we,
  output logic [31:0]                 ddr_cmd_addr,
  output logic                        ddr_dq_out_vld,
  output logic [143:0]                ddr_dq_out,
  input  logic                        ddr_dq_in_vld,
  input  logic [143:0]                ddr_dq_in,
  // event counters: 0 adaptive grants, 1 escape grants, 2 deposits,
  // 3 torus deliveries, 4 discards, 5 CRC errors, 6 retransmissions,
  // 7 token stalls, 8 tree reductions, 9 tree broadcasts, 10/11 L2 hits
  // cpu0/cpu1, 12/13 L2 prefetches, 14 L3 hits, 15 L3 misses, 16 ECC
  // corrections (L3 + DDR), 17 uncorrectable ECC errors
  output logic [17:0][31:0]           stats
);
  // ---------------- torus ----------------
  torus_router u_torus (
    .clk, .rst_n, .dims, .my, .link_in, .link_in_bwd, .link_out, .link_out_bwd,
    .inj_wr, .inj_data, .inj_free, .rec_rd, .rec_data, .rec_count,
    .n_adaptive(stats[0]), .n_escape(stats[1]), .n_deposit(stats[2]), .n_delivered(stats[3]),
    .n_discard(stats[4]), .n_crc_err(stats[5]), .n_retry(stats[6]), .n_tok_stall(stats[7]));

  // ---------------- tree -----------------
  tree_router u_tree (
    .clk, .rst_n, .parent(tree_parent), .child_en(tree_child_en),
    .in(tree_in), .in_rdy(tree_in_rdy), .out(tree_out), .out_rdy(tree_out_rdy),
    .inj(tree_inj), .inj_rdy(tree_inj_rdy), .rec(tree_rec), .rec_rdy(tree_rec_rdy),
    .n_reduce(stats[8]), .n_bcast(stats[9]));

  // ---------------- memory path ----------
  logic [1:0]                 l3_vld, l3_rdy, l3_we, l3_rsp;
  logic [1:0][31:0]           l3_addr;
  logic [1:0][CPU_BITS-1:0]   l3_wdata;
  logic [1:0][LINE_BITS-1:0]  l3_rsp_data;
  logic [1:0][31:0]           l2_miss;

  for (genvar c = 0; c < 2; c++) begin : g_l2
    l2_prefetch u_l2 (
      .clk, .rst_n,
      .req_vld(cpu_req_vld[c]), .req_rdy(cpu_req_rdy[c]), .req_we(cpu_req_we[c]),
      .req_addr(cpu_req_addr[c]), .req_wdata(cpu_req_wdata[c]),
      .resp_vld(cpu_resp_vld[c]), .resp_rdata(cpu_resp_rdata[c]),
      .l3_vld(l3_vld[c]), .l3_rdy(l3_rdy[c]), .l3_we(l3_we[c]), .l3_addr(l3_addr[c]),
      .l3_wdata(l3_wdata[c]), .l3_resp_vld(l3_rsp[c]), .l3_resp_data(l3_rsp_data[c]),
      .n_hit(stats[10+c]), .n_miss(l2_miss[c]), .n_prefetch(stats[12+c]));
  end

  logic                 m_vld, m_rdy, m_we, m_rsp;
  logic [31:0]          m_addr;
  logic [LINE_BITS-1:0] m_wdata, m_rsp_data;
  logic [31:0]          l3_sec, l3_ded, d_sec, d_ded;

  l3_cache u_l3 (
    .clk, .rst_n, .init_done(l3_ready),
    .req_vld(l3_vld), .req_rdy(l3_rdy), .req_we(l3_we), .req_addr(l3_addr), .req_wdata(l3_wdata),
    .resp_vld(l3_rsp), .resp_data(l3_rsp_data),
    .mem_vld(m_vld), .mem_rdy(m_rdy), .mem_we(m_we), .mem_addr(m_addr), .mem_wdata(m_wdata),
    .mem_resp_vld(m_rsp), .mem_resp_data(m_rsp_data),
    .n_hit(stats[14]), .n_miss(stats[15]), .n_sec(l3_sec), .n_ded(l3_ded));

  ddr_ctrl u_ddr (
    .clk, .rst_n, .mem_vld(m_vld), .mem_rdy(m_rdy), .mem_we(m_we), .mem_addr(m_addr),
    .mem_wdata(m_wdata), .mem_resp_vld(m_rsp), .mem_resp_data(m_rsp_data),
    .ddr_cmd_vld, .ddr_cmd_we, .ddr_cmd_addr, .ddr_dq_out_vld, .ddr_dq_out,
    .ddr_dq_in_vld, .ddr_dq_in, .n_sec(d_sec), .n_ded(d_ded));

  assign stats[16] = l3_sec + d_sec;
  assign stats[17] = l3_ded + d_ded;

  // ---------------- processor-to-processor ----------
  logic [1:0]  lock_bad;
  logic [63:0] lock_state;
  lock_box u_lock (
    .clk, .rst_n, .acq(lock_acq), .rel(lock_rel), .idx(lock_idx), .got(lock_got),
    .bad_release(lock_bad), .locked(lock_state));

  mp_sram u_sram (
    .clk, .en(sram_en), .we(sram_we), .addr(sram_addr), .wdata(sram_wdata), .rdata(sram_rdata));

  logic unused;
  assign unused = ^{l2_miss, lock_bad, lock_state};
endmodule
