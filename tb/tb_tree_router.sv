// tb_tree_router: seven tree routers wired as a three-level binary tree (node
// 0 the root, node i's port 0 on port 1+(i-1)%2 of node (i-1)/2). Every node
// contributes a stream of random words to reductions of every kind; every
// node must receive, in order, the combination of all seven contributions,
// computed here independently. Broadcasts from random single nodes must reach
// all seven nodes unchanged. Local reception is stalled at random.
module tb_tree_router;
  import bgl_pkg::*;
  localparam int N = 7;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  tree_flit_t [N-1:0][2:0] t_in, t_out;
  logic [N-1:0][2:0] t_in_rdy, t_out_rdy;
  tree_flit_t [N-1:0] inj, rec;
  logic [N-1:0] inj_rdy, rec_rdy;
  logic [N-1:0][1:0] parent;
  logic [N-1:0][2:0] child_en;
  logic [N-1:0][31:0] n_reduce, n_bcast;

  for (genvar i = 0; i < N; i++) begin : g_n
    assign parent[i]   = (i == 0) ? 2'd3 : 2'd0;
    assign child_en[i] = {(2*i+2 < N), (2*i+1 < N), 1'b0};
    tree_router u_r (.clk, .rst_n, .parent(parent[i]), .child_en(child_en[i]),
      .in(t_in[i]), .in_rdy(t_in_rdy[i]), .out(t_out[i]), .out_rdy(t_out_rdy[i]),
      .inj(inj[i]), .inj_rdy(inj_rdy[i]), .rec(rec[i]), .rec_rdy(rec_rdy[i]),
      .n_reduce(n_reduce[i]), .n_bcast(n_bcast[i]));
    if (i == 0) begin : g_root
      assign t_in[0][0] = '0;
      assign t_out_rdy[0][0] = 1'b1;
    end else begin : g_link
      localparam int P = (i - 1) / 2, Q = 1 + (i - 1) % 2;
      assign t_in[i][0] = t_out[P][Q];
      assign t_out_rdy[P][Q] = t_in_rdy[i][0];
      assign t_in[P][Q] = t_out[i][0];
      assign t_out_rdy[i][0] = t_in_rdy[P][Q];
    end
    for (genvar q = 1; q < 3; q++) begin : g_leaf
      if (2 * i + q >= N) begin : g_none
        assign t_in[i][q] = '0;
        assign t_out_rdy[i][q] = 1'b1;
      end
    end
  end

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // stimulus: a list of messages; each is either a reduction (all nodes
  // contribute) or a broadcast from one node
  localparam int M = 300;
  tree_op_e m_op [M];
  logic [31:0] m_val [M][N];
  int m_src [M];
  logic [31:0] m_res [M];
  int sent [N], rcvd [N];
  int n_red_msgs = 0, n_bc_msgs = 0;

  initial begin
    for (int m = 0; m < M; m++) begin
      m_op[m] = tree_op_e'($urandom_range(0, 5));
      m_src[m] = $urandom_range(0, N - 1);
      for (int i = 0; i < N; i++) m_val[m][i] = $urandom;
      if (m_op[m] == TOP_BCAST) begin m_res[m] = m_val[m][m_src[m]]; n_bc_msgs++; end
      else begin
        longint acc;
        n_red_msgs++;
        acc = longint'($signed(m_val[m][0]));
        m_res[m] = m_val[m][0];
        for (int i = 1; i < N; i++)
          case (m_op[m])
            TOP_ADD: m_res[m] = m_res[m] + m_val[m][i];
            TOP_MAX: if ($signed(m_val[m][i]) > $signed(m_res[m])) m_res[m] = m_val[m][i];
            TOP_AND: m_res[m] &= m_val[m][i];
            TOP_OR:  m_res[m] |= m_val[m][i];
            default: m_res[m] ^= m_val[m][i];
          endcase
      end
    end
  end

  // each node walks the message list; for a broadcast only the source sends
  // (a node may only run ahead to the next message once it has received the
  // current one, so broadcasts and reductions stay in order)
  always_comb
    for (int i = 0; i < N; i++) begin
      inj[i] = '0;
      if (sent[i] < M && sent[i] == rcvd[i] &&
          (m_op[sent[i]] != TOP_BCAST || m_src[sent[i]] == i))
        inj[i] = '{vld: 1'b1, op: m_op[sent[i]], data: m_val[sent[i]][i]};
    end

  always @(posedge clk) begin
    if (rst_n)
      for (int i = 0; i < N; i++) begin
        rec_rdy[i] <= 1'($urandom_range(0, 3) != 0);
        if (inj[i].vld && inj_rdy[i]) sent[i] <= sent[i] + 1;
        if (sent[i] < M && sent[i] == rcvd[i] && m_op[sent[i]] == TOP_BCAST && m_src[sent[i]] != i)
          sent[i] <= sent[i] + 1;  // not this node's turn to send
        if (rec[i].vld && rec_rdy[i]) begin
          check(rcvd[i] < M && rec[i].data == m_res[rcvd[i]] && rec[i].op == m_op[rcvd[i]],
                $sformatf("node %0d msg %0d got %h exp %h", i, rcvd[i], rec[i].data, m_res[rcvd[i]]));
          rcvd[i] <= rcvd[i] + 1;
        end
      end
  end

  initial begin
    int done;
    foreach (sent[i]) begin sent[i] = 0; rcvd[i] = 0; end
    rec_rdy = '1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    do begin
      @(posedge clk);
      done = 1;
      for (int i = 0; i < N; i++) if (rcvd[i] < M) done = 0;
    end while (!done);
    for (int i = 0; i < N; i++) check(rcvd[i] == M, "all messages at every node");
    check(int'(n_reduce[0]) == n_red_msgs, "root combined every reduction once");
    check(int'(n_bcast[0]) == n_bc_msgs, "root passed every broadcast once");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
