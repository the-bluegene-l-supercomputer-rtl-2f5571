// tree_router: the global tree logic of one node.
//
// A node has three bi-directional tree ports; configuration says which port
// leads to the parent (parent = 3 marks the root of the tree segment) and
// which ports have children (child_en). Every port direction is a word-wide
// valid/ready channel; each outgoing channel has one register, which takes a
// new word only when it is empty, so no ready signal passes combinationally
// from one node to the next (a word per two clocks per channel at most).
//
// Up the tree, a reduction word (sum, max, AND, OR, XOR) is formed when the
// local node and every enabled child have offered a word of the same
// operation: the words are combined by tree_alu and sent to the parent. A
// broadcast word from the local node or a child is passed up unchanged (local
// first, then ports 0..2). At the root the up-going word turns round and goes
// down. Down the tree, a word from the parent is copied to every child and to
// the local reception channel, so the combined result of a reduction reaches
// every contributing node and the root of a segment can send to all its
// sub-leaves. Each hop costs one register.
//
// The operations, the combine-then-broadcast scheme and the three ports are
// the paper's; the word format, handshake and port configuration inputs are
// this design's choices.
module tree_router
  import bgl_pkg::*;
#(
  parameter int NPORT = 3
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic [1:0]              parent,     // 3 = this node is the root
  input  logic [NPORT-1:0]        child_en,
  input  tree_flit_t [NPORT-1:0]  in,
  output logic [NPORT-1:0]        in_rdy,
  output tree_flit_t [NPORT-1:0]  out,
  input  logic [NPORT-1:0]        out_rdy,
  input  tree_flit_t              inj,
  output logic                    inj_rdy,
  output tree_flit_t              rec,
  input  logic                    rec_rdy,
  output logic [31:0]             n_reduce,
  output logic [31:0]             n_bcast
);
  wire is_root = (parent == 2'd3);

  logic [NPORT-1:0] can_load;
  logic             rec_can;
  always_comb begin
    for (int p = 0; p < NPORT; p++) can_load[p] = !out[p].vld;
    rec_can = !rec.vld;
  end

  // ---- reduction: local word combined with every enabled child
  logic [NPORT:0][TW-1:0] acc;
  logic [NPORT-1:0][TW-1:0] alu_y;
  assign acc[0] = inj.data;
  for (genvar p = 0; p < NPORT; p++) begin : g_alu
    tree_alu u_alu (.op(inj.op), .a(acc[p]), .b(in[p].data), .y(alu_y[p]));
    assign acc[p+1] = child_en[p] ? alu_y[p] : acc[p];
  end

  logic red_all;
  always_comb begin
    red_all = inj.vld && inj.op != TOP_BCAST;
    for (int p = 0; p < NPORT; p++)
      if (child_en[p] && !(in[p].vld && in[p].op == inj.op)) red_all = 1'b0;
  end

  // ---- broadcast going up: local first, then children
  logic             bc_any, bc_loc;
  logic [1:0]       bc_port;
  always_comb begin
    bc_loc  = inj.vld && inj.op == TOP_BCAST;
    bc_any  = bc_loc;
    bc_port = '0;
    for (int p = NPORT - 1; p >= 0; p--)
      if (child_en[p] && in[p].vld && in[p].op == TOP_BCAST && !bc_loc) begin
        bc_any = 1'b1; bc_port = 2'(p);
      end
  end

  logic dn_ok, up_ok, fire_red, fire_bc, fire_dn;
  tree_flit_t up_w, dn_w;
  always_comb begin
    dn_ok = rec_can;
    for (int p = 0; p < NPORT; p++) if (child_en[p] && !can_load[p]) dn_ok = 1'b0;
    up_ok    = is_root ? dn_ok : can_load[parent];
    fire_red = red_all && up_ok;
    fire_bc  = !red_all && bc_any && up_ok;
    fire_dn  = !is_root && in[parent].vld && dn_ok;

    if (fire_red)    up_w = '{vld: 1'b1, op: inj.op, data: acc[NPORT]};
    else if (bc_loc) up_w = inj;
    else             up_w = in[bc_port];
    up_w.vld = fire_red || fire_bc;
    dn_w     = is_root ? up_w : in[parent];
    dn_w.vld = is_root ? up_w.vld : fire_dn;

    inj_rdy = fire_red || (fire_bc && bc_loc);
    for (int p = 0; p < NPORT; p++) begin
      in_rdy[p] = 1'b0;
      if (child_en[p] && fire_red) in_rdy[p] = 1'b1;
      if (fire_bc && !bc_loc && bc_port == 2'(p)) in_rdy[p] = 1'b1;
      if (!is_root && parent == 2'(p) && fire_dn) in_rdy[p] = 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out <= '0; rec <= '0; n_reduce <= '0; n_bcast <= '0;
    end else begin
      if (fire_red) n_reduce <= n_reduce + 1;
      if (fire_bc)  n_bcast  <= n_bcast + 1;
      for (int p = 0; p < NPORT; p++) begin
        if (out_rdy[p]) out[p].vld <= 1'b0;
        if (!is_root && parent == 2'(p) && up_w.vld) out[p] <= up_w;
        if (child_en[p] && dn_w.vld) out[p] <= dn_w;
      end
      if (rec_rdy) rec.vld <= 1'b0;
      if (dn_w.vld) rec <= dn_w;
    end
  end
endmodule
