// bgl_xring: one x-line of a mid-plane, NX nodes (8 in a mid-plane of
// 8x8x8) chained along the torus x dimension, with the re-drive chips that
// sit where the line leaves the mid-plane.
//
// Node i's +x link goes to node i+1's -x link. At the ends the links pass
// through two re-drive chips, one per direction of travel. A host-set bit,
// sel_include, chooses the partition: 1 puts the line into the larger torus
// through the cables (cable_e_* towards +x, cable_w_* towards -x); 0 closes
// the line on itself so its nodes form their own ring, cut off from the
// cables. The torus size and coordinates that the routing uses are
// configuration inputs and must match the chosen partition. The nodes' y and
// z links, processor ports, DDR pins and counters are arrays of ports, index
// = node number. The tree ports of the nodes are wired as a binary tree:
// node i>0 has its port 0 on port 1 + (i-1)%2 of node (i-1)/2; node 0's port 0
// leads out of the line (tree_up_*). Tree roles (parent, children) are
// configuration inputs per node and must match that wiring.
// The nodes per mid-plane edge, the re-drive partitioning and the binary-tree
// shape follow the paper; this particular tree wiring is this design's choice.
module bgl_xring
  import bgl_pkg::*;
#(
  parameter int NX = 8
) (
  input  logic                               clk,
  input  logic                               rst_n,
  input  logic [2:0][7:0]                    dims,
  input  logic [2:0][7:0]                    base,          // coordinates of node 0
  input  logic                               sel_include,
  input  link_bundle_t                       cable_e_in,    // eastbound, from -x
  output link_bundle_t                       cable_e_out,   // eastbound, to +x
  input  link_bundle_t                       cable_w_in,    // westbound, from +x
  output link_bundle_t                       cable_w_out,   // westbound, to -x
  // y and z links of every node: index 0..3 = +y -y +z -z
  input  link_fwd_t [NX-1:0][3:0]            yz_in,
  output link_bwd_t [NX-1:0][3:0]            yz_in_bwd,
  output link_fwd_t [NX-1:0][3:0]            yz_out,
  input  link_bwd_t [NX-1:0][3:0]            yz_out_bwd,
  // tree
  input  logic [NX-1:0][1:0]                 tree_parent,
  input  logic [NX-1:0][2:0]                 tree_child_en,
  input  tree_flit_t                         tree_up_in,
  output logic                               tree_up_in_rdy,
  output tree_flit_t                         tree_up_out,
  input  logic                               tree_up_out_rdy,
  input  tree_flit_t [NX-1:0]                tree_inj,
  output logic [NX-1:0]                      tree_inj_rdy,
  output tree_flit_t [NX-1:0]                tree_rec,
  input  logic [NX-1:0]                      tree_rec_rdy,
  // torus FIFOs
  input  logic [NX-1:0][NINJ-1:0]            inj_wr,
  input  logic [NX-1:0][NINJ-1:0][7:0]       inj_data,
  output logic [NX-1:0][NINJ-1:0][15:0]      inj_free,
  input  logic [NX-1:0][NREC-1:0]            rec_rd,
  output logic [NX-1:0][NREC-1:0][7:0]       rec_data,
  output logic [NX-1:0][NREC-1:0][15:0]      rec_count,
  // processors' memory, lock and SRAM ports
  input  logic [NX-1:0][1:0]                 cpu_req_vld,
  output logic [NX-1:0][1:0]                 cpu_req_rdy,
  input  logic [NX-1:0][1:0]                 cpu_req_we,
  input  logic [NX-1:0][1:0][31:0]           cpu_req_addr,
  input  logic [NX-1:0][1:0][CPU_BITS-1:0]   cpu_req_wdata,
  output logic [NX-1:0][1:0]                 cpu_resp_vld,
  output logic [NX-1:0][1:0][CPU_BITS-1:0]   cpu_resp_rdata,
  output logic [NX-1:0]                      l3_ready,
  input  logic [NX-1:0][1:0]                 lock_acq,
  input  logic [NX-1:0][1:0]                 lock_rel,
  input  logic [NX-1:0][1:0][5:0]            lock_idx,
  output logic [NX-1:0][1:0]                 lock_got,
  input  logic [NX-1:0][1:0]                 sram_en,
  input  logic [NX-1:0][1:0]                 sram_we,
  input  logic [NX-1:0][1:0][9:0]            sram_addr,
  input  logic [NX-1:0][1:0][CPU_BITS-1:0]   sram_wdata,
  output logic [NX-1:0][1:0][CPU_BITS-1:0]   sram_rdata,
  // DDR pins of every node
  output logic [NX-1:0]                      ddr_cmd_vld,
  output logic [NX-1:0]                      ddr_cmd_we,
  output logic [NX-1:0][31:0]                ddr_cmd_addr,
  output logic [NX-1:0]                      ddr_dq_out_vld,
  output logic [NX-1:0][143:0]               ddr_dq_out,
  input  logic [NX-1:0]                      ddr_dq_in_vld,
  input  logic [NX-1:0][143:0]               ddr_dq_in,
  output logic [NX-1:0][17:0][31:0]          stats
);
  // per-node link views
  link_fwd_t [NX-1:0][NLINK-1:0] l_in, l_out;
  link_bwd_t [NX-1:0][NLINK-1:0] l_in_bwd, l_out_bwd;

  // bundles leaving the line's ends and re-entering through the re-drives
  link_bundle_t east_end, west_end, east_into0, west_intoN;

  for (genvar i = 0; i < NX; i++) begin : g_x
    // y/z links straight to ports
    for (genvar d = 0; d < 4; d++) begin : g_yz
      assign l_in[i][2+d]      = yz_in[i][d];
      assign l_out_bwd[i][2+d] = yz_out_bwd[i][d];
      assign yz_out[i][d]      = l_out[i][2+d];
      assign yz_in_bwd[i][d]   = l_in_bwd[i][2+d];
    end
    // x links: port 1 (-x) takes eastbound data from the west neighbour and
    // carries the acks/tokens for this node's westbound output; port 0 (+x)
    // the mirror image
    if (i == 0) begin : g_w
      assign l_in[i][1]      = east_into0.f;
      assign l_out_bwd[i][1] = east_into0.b;
    end else begin : g_w
      assign l_in[i][1]      = l_out[i-1][0];
      assign l_out_bwd[i][1] = l_in_bwd[i-1][0];
    end
    if (i == NX - 1) begin : g_e
      assign l_in[i][0]      = west_intoN.f;
      assign l_out_bwd[i][0] = west_intoN.b;
    end else begin : g_e
      assign l_in[i][0]      = l_out[i+1][1];
      assign l_out_bwd[i][0] = l_in_bwd[i+1][1];
    end

    // tree wiring
    tree_flit_t [2:0] t_in, t_out;
    logic [2:0]       t_in_rdy, t_out_rdy;

    logic [2:0][7:0] my_c;
    assign my_c[0] = base[0] + 8'(i);
    assign my_c[1] = base[1];
    assign my_c[2] = base[2];

    bgl_node u_node (
      .clk, .rst_n, .dims, .my(my_c),
      .tree_parent(tree_parent[i]), .tree_child_en(tree_child_en[i]),
      .link_in(l_in[i]), .link_in_bwd(l_in_bwd[i]), .link_out(l_out[i]), .link_out_bwd(l_out_bwd[i]),
      .inj_wr(inj_wr[i]), .inj_data(inj_data[i]), .inj_free(inj_free[i]),
      .rec_rd(rec_rd[i]), .rec_data(rec_data[i]), .rec_count(rec_count[i]),
      .tree_in(t_in), .tree_in_rdy(t_in_rdy), .tree_out(t_out), .tree_out_rdy(t_out_rdy),
      .tree_inj(tree_inj[i]), .tree_inj_rdy(tree_inj_rdy[i]),
      .tree_rec(tree_rec[i]), .tree_rec_rdy(tree_rec_rdy[i]),
      .cpu_req_vld(cpu_req_vld[i]), .cpu_req_rdy(cpu_req_rdy[i]), .cpu_req_we(cpu_req_we[i]),
      .cpu_req_addr(cpu_req_addr[i]), .cpu_req_wdata(cpu_req_wdata[i]),
      .cpu_resp_vld(cpu_resp_vld[i]), .cpu_resp_rdata(cpu_resp_rdata[i]), .l3_ready(l3_ready[i]),
      .lock_acq(lock_acq[i]), .lock_rel(lock_rel[i]), .lock_idx(lock_idx[i]), .lock_got(lock_got[i]),
      .sram_en(sram_en[i]), .sram_we(sram_we[i]), .sram_addr(sram_addr[i]),
      .sram_wdata(sram_wdata[i]), .sram_rdata(sram_rdata[i]),
      .ddr_cmd_vld(ddr_cmd_vld[i]), .ddr_cmd_we(ddr_cmd_we[i]), .ddr_cmd_addr(ddr_cmd_addr[i]),
      .ddr_dq_out_vld(ddr_dq_out_vld[i]), .ddr_dq_out(ddr_dq_out[i]),
      .ddr_dq_in_vld(ddr_dq_in_vld[i]), .ddr_dq_in(ddr_dq_in[i]), .stats(stats[i]));
  end

  // tree: port 0 up, ports 1/2 down to children 2i+1 / 2i+2
  for (genvar i = 0; i < NX; i++) begin : g_t
    if (i == 0) begin : g_up
      assign g_x[0].t_in[0]     = tree_up_in;
      assign tree_up_in_rdy     = g_x[0].t_in_rdy[0];
      assign tree_up_out        = g_x[0].t_out[0];
      assign g_x[0].t_out_rdy[0] = tree_up_out_rdy;
    end else begin : g_up
      localparam int P = (i - 1) / 2;
      localparam int Q = 1 + (i - 1) % 2;
      assign g_x[i].t_in[0]      = g_x[P].t_out[Q];
      assign g_x[P].t_out_rdy[Q] = g_x[i].t_in_rdy[0];
      assign g_x[P].t_in[Q]      = g_x[i].t_out[0];
      assign g_x[i].t_out_rdy[0] = g_x[P].t_in_rdy[Q];
    end
    for (genvar q = 1; q < 3; q++) begin : g_leaf
      if (2 * i + q >= NX) begin : g_none
        assign g_x[i].t_in[q]      = '0;
        assign g_x[i].t_out_rdy[q] = 1'b1;
        logic unused_leaf;
        assign unused_leaf = ^{g_x[i].t_out[q], g_x[i].t_in_rdy[q]};
      end
    end
  end

  // ends of the line and the re-drive chips
  assign east_end = '{f: l_out[NX-1][0], b: l_in_bwd[NX-1][0]};
  assign west_end = '{f: l_out[0][1],    b: l_in_bwd[0][1]};

  redrive #(.W($bits(link_bundle_t))) u_redrive_e (
    .clk, .rst_n, .sel_include, .cable_in(cable_e_in), .cable_out(cable_e_out),
    .mid_in(east_end), .mid_out(east_into0));
  redrive #(.W($bits(link_bundle_t))) u_redrive_w (
    .clk, .rst_n, .sel_include, .cable_in(cable_w_in), .cable_out(cable_w_out),
    .mid_in(west_end), .mid_out(west_intoN));

endmodule
