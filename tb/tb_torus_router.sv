// tb_torus_router: nine torus routers form a 3x3x1 torus. Random packets
// (32..256 bytes, adaptive or deterministic, some with the deposit bit) are
// injected at random nodes for random destinations, and every reception FIFO
// is drained. Each packet carries its number and a payload derived from it,
// so the receiver can check every byte. Checks: every packet reaches its
// destination exactly once and intact; a deposit packet leaves one copy at
// each node of its x-then-y route; a packet addressed to its own node is
// discarded. One link corrupts some bytes, which must be caught and resent.
// The counters prove that adaptive and escape routing, token stalls, deposits,
// CRC errors and retransmissions all happened. Buffers are 512 bytes here.
module tb_torus_router;
  import bgl_pkg::*;
  localparam int NN = 9, NP = 400, VCB = 512;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  link_fwd_t [NN-1:0][5:0] l_in, l_out;
  link_bwd_t [NN-1:0][5:0] l_in_bwd, l_out_bwd;
  logic [NN-1:0][NINJ-1:0] inj_wr;
  logic [NN-1:0][NINJ-1:0][7:0] inj_data;
  logic [NN-1:0][NINJ-1:0][15:0] inj_free;
  logic [NN-1:0][NREC-1:0] rec_rd;
  logic [NN-1:0][NREC-1:0][7:0] rec_data;
  logic [NN-1:0][NREC-1:0][15:0] rec_count;
  logic [NN-1:0][7:0][31:0] cnt;
  logic [7:0] flip_mask = 0;

  function automatic int nid(int x, int y); return ((y + 3) % 3) * 3 + ((x + 3) % 3); endfunction

  for (genvar i = 0; i < NN; i++) begin : g_n
    localparam int X = i % 3, Y = i / 3;
    logic [2:0][7:0] my;
    assign my = {8'd0, 8'(Y), 8'(X)};
    torus_router #(.VC_BYTES(VCB), .INJ_BYTES(1024), .REC_BYTES(1024)) u_r (
      .clk, .rst_n, .dims({8'd1, 8'd3, 8'd3}), .my,
      .link_in(l_in[i]), .link_in_bwd(l_in_bwd[i]), .link_out(l_out[i]), .link_out_bwd(l_out_bwd[i]),
      .inj_wr(inj_wr[i]), .inj_data(inj_data[i]), .inj_free(inj_free[i]),
      .rec_rd(rec_rd[i]), .rec_data(rec_data[i]), .rec_count(rec_count[i]),
      .n_adaptive(cnt[i][0]), .n_escape(cnt[i][1]), .n_deposit(cnt[i][2]), .n_delivered(cnt[i][3]),
      .n_discard(cnt[i][4]), .n_crc_err(cnt[i][5]), .n_retry(cnt[i][6]), .n_tok_stall(cnt[i][7]));
    // +x of node i feeds -x of its +x neighbour, and so on
    localparam int PX = (Y * 3) + (X + 1) % 3, MX = (Y * 3) + (X + 2) % 3;
    localparam int PY = ((Y + 1) % 3) * 3 + X, MY = ((Y + 2) % 3) * 3 + X;
    if (i == 0) begin : g_bad
      assign l_in[PX][1] = '{vld: l_out[i][0].vld, data: l_out[i][0].data ^ flip_mask};
    end else begin : g_good
      assign l_in[PX][1] = l_out[i][0];
    end
    assign l_out_bwd[i][0] = l_in_bwd[PX][1];
    assign l_in[MX][0] = l_out[i][1];
    assign l_out_bwd[i][1] = l_in_bwd[MX][0];
    assign l_in[PY][3] = l_out[i][2];
    assign l_out_bwd[i][2] = l_in_bwd[PY][3];
    assign l_in[MY][2] = l_out[i][3];
    assign l_out_bwd[i][3] = l_in_bwd[MY][2];
    assign l_in[i][4] = '0; assign l_in[i][5] = '0;
    assign l_out_bwd[i][4] = '0; assign l_out_bwd[i][5] = '0;
  end

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // packet table
  int p_src [NP], p_dst [NP], p_len [NP];
  bit p_ad [NP], p_dep [NP];
  int got_at [NP][NN];     // copies received per node
  int n_self = 0;

  function automatic logic [7:0] pbyte(int id, int k, int len, bit ad, bit dep, int dst);
    case (k)
      0: return {3'(len / 32 - 1), ad, dep, 3'b000};
      1: return 8'(dst % 3);
      2: return 8'(dst / 3);
      3: return 8'd0;
      4: return 8'(id);
      5: return 8'(id >> 8);
      default: return 8'(id * 31 + k * 7);
    endcase
  endfunction

  // injection: one process per node
  for (genvar i = 0; i < NN; i++) begin : g_inj
    initial begin
      inj_wr[i] = '0; inj_data[i] = '0;
      wait (rst_n);
      for (int id = 0; id < NP; id++) begin
        if (p_src[id] != i) continue;
        begin
          int f;
          f = $urandom_range(0, NINJ - 1);
          while (int'(inj_free[i][f]) < p_len[id]) @(negedge clk);
          for (int k = 0; k < p_len[id]; k++) begin
            @(negedge clk);
            inj_wr[i][f] = 1;
            inj_data[i][f] = pbyte(id, k, p_len[id], p_ad[id], p_dep[id], p_dst[id]);
          end
          @(negedge clk);
          inj_wr[i][f] = 0;
          repeat ($urandom_range(0, 60)) @(negedge clk);
        end
      end
    end
  end

  // reception: parse every reception FIFO byte by byte
  int r_pos [NN][NREC], r_len [NN][NREC], r_id [NN][NREC];
  logic [7:0] r_buf [NN][NREC][256];
  always @(negedge clk) begin
    for (int i = 0; i < NN; i++)
      for (int r = 0; r < NREC; r++) begin
        rec_rd[i][r] = 1'b0;
        if (rst_n && rec_count[i][r] != 0) begin
          int k;
          k = r_pos[i][r];
          r_buf[i][r][k] = rec_data[i][r];
          rec_rd[i][r] = 1'b1;
          if (k == 0) r_len[i][r] = (int'(rec_data[i][r][7:5]) + 1) * 32;
          if (k + 1 == r_len[i][r]) begin
            int id; bit ok;
            id = int'({r_buf[i][r][5], r_buf[i][r][4]});
            ok = (id < NP);
            if (ok) for (int b = 0; b < r_len[i][r]; b++)
              if (b != 0 && r_buf[i][r][b] != pbyte(id, b, p_len[id], p_ad[id], p_dep[id], p_dst[id])) ok = 0;
            check(ok && r_len[i][r] == p_len[id], $sformatf("packet %0d intact at node %0d", id, i));
            if (id < NP) got_at[id][i]++;
            r_pos[i][r] = 0;
          end else r_pos[i][r] = k + 1;
        end
      end
  end

  // link errors on node 0's +x link
  int n_flips = 0;
  always @(negedge clk) begin
    flip_mask = '0;
    if (rst_n && l_out[0][0].vld && $urandom_range(0, 700) == 0) begin flip_mask = 8'h10; n_flips++; end
  end

  initial begin
    int tot [8];
    for (int id = 0; id < NP; id++) begin
      p_src[id] = $urandom_range(0, NN - 1);
      p_dst[id] = $urandom_range(0, NN - 1);
      p_len[id] = 32 * $urandom_range(1, 8);
      p_ad[id]  = 1'($urandom);
      p_dep[id] = ($urandom_range(0, 9) == 0);
      if (p_dep[id]) p_ad[id] = 0;
      if (p_src[id] == p_dst[id]) n_self++;
      foreach (got_at[id][j]) got_at[id][j] = 0;
    end
    foreach (r_pos[i, r]) begin r_pos[i][r] = 0; r_len[i][r] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    // wait until traffic has settled
    repeat (20000) @(posedge clk);
    begin
      int idle;
      idle = 0;
      while (idle < 2000) begin
        @(posedge clk);
        idle++;
        for (int i = 0; i < NN; i++) for (int l = 0; l < 6; l++) if (l_out[i][l].vld) idle = 0;
      end
    end
    // expected copies
    for (int id = 0; id < NP; id++) begin
      int x, y, dx, dy;
      int exp [NN];
      foreach (exp[j]) exp[j] = 0;
      if (p_src[id] != p_dst[id]) begin
        exp[p_dst[id]] = 1;
        if (p_dep[id]) begin
          x = p_src[id] % 3; y = p_src[id] / 3;
          dx = ((p_dst[id] % 3) - x + 3) % 3; dy = ((p_dst[id] / 3) - y + 3) % 3;
          // x first, then y: the copy is left at every node after the source
          while (dx != 0) begin x = (dx == 1) ? x + 1 : x - 1; dx = ((p_dst[id] % 3) - ((x + 3) % 3) + 3) % 3; exp[nid(x, y)] = 1; end
          x = (x + 3) % 3;
          while (dy != 0) begin y = (dy == 1) ? y + 1 : y - 1; dy = ((p_dst[id] / 3) - ((y + 3) % 3) + 3) % 3; exp[nid(x, y)] = 1; end
        end
      end
      for (int j = 0; j < NN; j++)
        check(got_at[id][j] == exp[j], $sformatf("packet %0d (%0d->%0d dep %0d) copies at node %0d: %0d vs %0d",
              id, p_src[id], p_dst[id], p_dep[id], j, got_at[id][j], exp[j]));
    end
    foreach (tot[k]) tot[k] = 0;
    for (int i = 0; i < NN; i++) for (int k = 0; k < 8; k++) tot[k] += int'(cnt[i][k]);
    $display("adaptive %0d escape %0d deposit %0d delivered %0d discard %0d crc_err %0d retry %0d tok_stall %0d flips %0d",
             tot[0], tot[1], tot[2], tot[3], tot[4], tot[5], tot[6], tot[7], n_flips);
    check(tot[0] > 0 && tot[1] > 0, "adaptive and escape routing used");
    check(tot[2] > 0, "deposits happened");
    check(tot[4] == n_self && n_self > 0, "self-addressed packets discarded");
    // two flips can hit the same packet, which then fails its CRC once
    check(tot[5] > 0 && tot[5] <= n_flips && tot[6] == tot[5], "corrupted packets caught and resent");
    check(tot[6] == tot[5], "one retransmission per error");
    check(tot[7] > 0, "token stalls happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (400000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
