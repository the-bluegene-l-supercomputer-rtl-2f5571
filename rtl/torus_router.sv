// torus_router: the torus logic of one node.
//
// Six input links (+x -x +y -y +z -z) each feed two virtual-channel buffers,
// VC0 (dynamic, adaptive) and VC1 (escape, deterministic). Those 12 buffers
// and the 7 injection FIFOs written by the processors are the 19 inputs of a
// byte-wide 19x6 crossbar whose 6 outputs drive the output links. Each input
// VC also has its own reception FIFO (12 in all) that the processors read.
//
// A packet moves as follows. The link receiver writes it into the VC buffer
// named in its header and commits it once its CRC is good (a bad one is
// deleted and resent by the neighbour). When a whole packet sits at the head
// of an input, torus_route picks its output and VC from the destination in
// the header and from the local traffic, seen as the free tokens per output.
// A token stands for 32 bytes of room in the neighbour's VC buffer; an output
// may only be granted to a packet when the tokens cover the whole packet
// (virtual cut-through), and they are spent at the grant and come back from
// the neighbour as it forwards the bytes. Each output grants round robin among
// the inputs asking for it and is then held for the whole packet, one byte per
// clock, into its link sender, which appends the CRC and keeps a copy for
// retransmission. A packet that has arrived goes into the input's reception
// FIFO. A packet with the deposit bit also leaves a copy in the reception FIFO
// of every node it passes through (multicast to the nodes along its route).
// An injected packet addressed to its own node is discarded and counted.
//
// Latency through a node, head of a whole packet to first byte on the link:
// grant in the cycle the route is ready, first byte one cycle later, on the
// link one more cycle later. The 19x6 byte-wide crossbar, the two VC paths
// per input, the 7 injection inputs, token flow control, CRC retry, minimal
// adaptive/deterministic routing and multicast are the paper's; buffer sizes,
// the sideband reverse channel, the deposit form of multicast and
// store-and-forward inside the input buffers are this design's choices.
module torus_router
  import bgl_pkg::*;
#(
  parameter int VC_BYTES  = 1024,
  parameter int INJ_BYTES = 1024,
  parameter int REC_BYTES = 1024
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic [2:0][7:0]         dims,   // torus size of the partition (x,y,z)
  input  logic [2:0][7:0]         my,     // this node's coordinates
  // links
  input  link_fwd_t [NLINK-1:0]   link_in,
  output link_bwd_t [NLINK-1:0]   link_in_bwd,
  output link_fwd_t [NLINK-1:0]   link_out,
  input  link_bwd_t [NLINK-1:0]   link_out_bwd,
  // injection FIFOs
  input  logic [NINJ-1:0]         inj_wr,
  input  logic [NINJ-1:0][7:0]    inj_data,
  output logic [NINJ-1:0][15:0]   inj_free,
  // reception FIFOs
  input  logic [NREC-1:0]         rec_rd,
  output logic [NREC-1:0][7:0]    rec_data,
  output logic [NREC-1:0][15:0]   rec_count,
  // event counters
  output logic [31:0]             n_adaptive,   // grants on VC0
  output logic [31:0]             n_escape,     // grants on VC1
  output logic [31:0]             n_deposit,    // copies left by passing multicast packets
  output logic [31:0]             n_delivered,  // packets into reception FIFOs
  output logic [31:0]             n_discard,
  output logic [31:0]             n_crc_err,
  output logic [31:0]             n_retry,
  output logic [31:0]             n_tok_stall   // cycles a whole packet waited for tokens/output
);
  localparam int NS   = XBAR_IN;
  localparam int TOK0 = VC_BYTES / CHUNK;
  localparam int TOKW = $clog2(TOK0 + 1) + 1;

  // ---------------- link receivers and input VC buffers -------------------
  logic [NLINK-1:0][NVC-1:0] rx_wr, rx_commit, rx_drop;
  logic [NLINK-1:0][7:0]     rx_wdata;
  logic [NLINK-1:0]          rx_ack, rx_nak;
  logic [NLINK-1:0][15:0]    rx_err;

  logic [NS-1:0][3:0][7:0]   s_peek;
  logic [NS-1:0][15:0]       s_count;
  logic [NS-1:0]             s_rd;

  for (genvar l = 0; l < NLINK; l++) begin : g_link
    torus_link_rx u_rx (
      .clk, .rst_n, .in(link_in[l]), .wr(rx_wr[l]), .wdata(rx_wdata[l]),
      .commit(rx_commit[l]), .drop(rx_drop[l]), .ack(rx_ack[l]), .nak(rx_nak[l]),
      .crc_err(rx_err[l]));
    for (genvar v = 0; v < NVC; v++) begin : g_vc
      logic [$clog2(VC_BYTES+1)-1:0] cnt, fr;
      logic [4:0] popc;
      pkt_fifo #(.DEPTH(VC_BYTES)) u_vcbuf (
        .clk, .rst_n, .wr(rx_wr[l][v]), .wdata(rx_wdata[l]),
        .commit(rx_commit[l][v]), .drop(rx_drop[l][v]),
        .rd(s_rd[l*NVC+v]), .peek(s_peek[l*NVC+v]), .count(cnt), .free(fr));
      assign s_count[l*NVC+v] = 16'(cnt);
      // one token back upstream for every 32 bytes that leave this buffer
      always_ff @(posedge clk)
        if (!rst_n) popc <= '0;
        else if (s_rd[l*NVC+v]) popc <= popc + 1'b1;
      always_ff @(posedge clk)
        if (!rst_n) link_in_bwd[l].tok[v] <= 1'b0;
        else        link_in_bwd[l].tok[v] <= s_rd[l*NVC+v] && (popc == 5'd31);
      logic unused_fr;
      assign unused_fr = ^fr;
    end
    assign link_in_bwd[l].ack = rx_ack[l];
    assign link_in_bwd[l].nak = rx_nak[l];
  end

  // ---------------- injection FIFOs --------------------------------------
  for (genvar i = 0; i < NINJ; i++) begin : g_inj
    logic [$clog2(INJ_BYTES+1)-1:0] cnt, fr;
    pkt_fifo #(.DEPTH(INJ_BYTES)) u_inj (
      .clk, .rst_n, .wr(inj_wr[i]), .wdata(inj_data[i]), .commit(1'b1), .drop(1'b0),
      .rd(s_rd[NLINK*NVC+i]), .peek(s_peek[NLINK*NVC+i]), .count(cnt), .free(fr));
    assign s_count[NLINK*NVC+i] = 16'(cnt);
    assign inj_free[i] = 16'(fr);
  end

  // ---------------- reception FIFOs ---------------------------------------
  logic [NREC-1:0]       rec_wr;
  logic [NREC-1:0][7:0]  rec_wdata;
  logic [NREC-1:0][15:0] rec_free;
  for (genvar r = 0; r < NREC; r++) begin : g_rec
    logic [$clog2(REC_BYTES+1)-1:0] cnt, fr;
    logic [3:0][7:0] pk;
    pkt_fifo #(.DEPTH(REC_BYTES)) u_rec (
      .clk, .rst_n, .wr(rec_wr[r]), .wdata(rec_wdata[r]), .commit(1'b1), .drop(1'b0),
      .rd(rec_rd[r]), .peek(pk), .count(cnt), .free(fr));
    assign rec_data[r]  = pk[0];
    assign rec_count[r] = 16'(cnt);
    assign rec_free[r]  = 16'(fr);
  end

  // ---------------- output side: senders and tokens ----------------------
  logic [NLINK-1:0]           tx_ready, tx_vld, tx_retry;
  logic [NLINK-1:0][7:0]      tx_data;
  logic [NLINK-1:0]           out_busy;
  logic [NLINK-1:0][4:0]      out_owner;
  logic [NLINK-1:0][TOKW-1:0] tok0, tok1;

  for (genvar o = 0; o < NLINK; o++) begin : g_out
    torus_link_tx u_tx (
      .clk, .rst_n, .in_vld(tx_vld[o]), .in_data(tx_data[o]), .ready(tx_ready[o]),
      .out(link_out[o]), .ack(link_out_bwd[o].ack), .nak(link_out_bwd[o].nak),
      .retry(tx_retry[o]));
  end

  // ---------------- per-source routing -----------------------------------
  typedef enum logic [1:0] {T_LINK, T_LOCAL, T_DISCARD} tgt_e;

  logic [NS-1:0]       s_busy, s_dep;
  tgt_e [NS-1:0]       s_tgt;
  logic [NS-1:0][8:0]  s_left;
  logic [NS-1:0][2:0]  s_dir;
  logic [NS-1:0]       s_vc;
  logic [NS-1:0]       s_first;

  logic [NS-1:0]       r_go, r_local, r_vc, r_want;
  logic [NS-1:0][2:0]  r_dir;
  logic [NS-1:0][8:0]  r_len;
  logic [NLINK-1:0]    out_rdy;

  assign out_rdy = ~out_busy & tx_ready;

  for (genvar s = 0; s < NS; s++) begin : g_s
    logic [5:0] prod;
    torus_route #(.TOKW(TOKW)) u_route (
      .dims, .my, .dst(s_peek[s][3:1]), .adaptive(s_peek[s][0][4]),
      .src_dim((s < NREC) ? 2'(s / (2 * NVC)) : 2'd3),
      .need(4'(hdr_chunks(s_peek[s][0]))), .out_rdy, .tok0, .tok1,
      .productive(prod), .local_dst(r_local[s]), .dir(r_dir[s]), .vc(r_vc[s]), .go(r_go[s]));
    assign r_len[s] = 9'(hdr_bytes(s_peek[s][0]));
    // a whole packet is waiting at this input and nothing is being sent from it
    assign r_want[s] = !s_busy[s] && (s_count[s] >= 16'(r_len[s]));
    logic unused_prod;
    assign unused_prod = ^prod;
  end

  // requests: a link packet going local (or deposit) needs room in its
  // reception FIFO for the whole packet
  logic [NS-1:0] s_local_ok, s_dep_ok;
  always_comb
    for (int s = 0; s < NS; s++) begin
      if (s < NREC) begin
        s_local_ok[s] = rec_free[s] >= 16'(r_len[s]);
        s_dep_ok[s]   = !s_peek[s][0][3] || s_local_ok[s];
      end else begin
        s_local_ok[s] = 1'b1;
        s_dep_ok[s]   = 1'b1;
      end
    end

  // round-robin output arbitration
  logic [NLINK-1:0][4:0] rr;
  logic [NLINK-1:0]      g_vld;
  logic [NLINK-1:0][4:0] g_src;
  always_comb
    for (int o = 0; o < NLINK; o++) begin
      g_vld[o] = 1'b0;
      g_src[o] = '0;
      for (int k = 0; k < NS; k++) begin
        int s;
        s = (int'(rr[o]) + k) % NS;
        if (!g_vld[o] && r_want[s] && r_go[s] && !r_local[s] &&
            int'(r_dir[s]) == o && s_dep_ok[s]) begin
          g_vld[o] = 1'b1;
          g_src[o] = 5'(s);
        end
      end
    end

  // crossbar: each output takes the byte of its owner
  always_comb
    for (int o = 0; o < NLINK; o++) begin
      tx_vld[o]  = out_busy[o];
      tx_data[o] = s_peek[out_owner[o]][0];
      if (s_first[out_owner[o]]) tx_data[o][2] = s_vc[out_owner[o]];
    end

  always_comb begin
    s_rd      = '0;
    rec_wr    = '0;
    for (int r = 0; r < NREC; r++) rec_wdata[r] = s_peek[r][0];
    for (int s = 0; s < NS; s++)
      if (s_busy[s]) begin
        s_rd[s] = 1'b1;
        if (s < NREC && (s_tgt[s] == T_LOCAL || s_dep[s])) rec_wr[s] = 1'b1;
      end
  end

  // counters of token stalls: a whole packet waits but cannot go
  logic stall_now;
  always_comb begin
    stall_now = 1'b0;
    for (int s = 0; s < NS; s++)
      if (r_want[s] && !r_local[s] && !r_go[s]) stall_now = 1'b1;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      s_busy <= '0; s_dep <= '0; s_left <= '0; s_dir <= '0; s_vc <= '0; s_first <= '0;
      for (int s = 0; s < NS; s++) s_tgt[s] <= T_LINK;
      out_busy <= '0; out_owner <= '0; rr <= '0;
      for (int o = 0; o < NLINK; o++) begin
        tok0[o] <= TOKW'(TOK0); tok1[o] <= TOKW'(TOK0);
      end
      n_adaptive <= '0; n_escape <= '0; n_deposit <= '0; n_delivered <= '0;
      n_discard <= '0; n_retry <= '0; n_tok_stall <= '0;
    end else begin
      if (stall_now) n_tok_stall <= n_tok_stall + 1;
      for (int o = 0; o < NLINK; o++) if (tx_retry[o]) n_retry <= n_retry + 1;

      // streaming sources
      for (int s = 0; s < NS; s++)
        if (s_busy[s]) begin
          s_first[s] <= 1'b0;
          s_left[s]  <= s_left[s] - 1'b1;
          if (s_left[s] == 9'd1) begin
            s_busy[s] <= 1'b0;
            if (s_tgt[s] == T_LINK) out_busy[s_dir[s]] <= 1'b0;
          end
        end

      // local delivery and discard need no output
      for (int s = 0; s < NS; s++)
        if (r_want[s] && r_local[s] && s_local_ok[s]) begin
          s_busy[s]  <= 1'b1;
          s_left[s]  <= r_len[s];
          s_dep[s]   <= 1'b0;
          s_first[s] <= 1'b1;
          s_tgt[s]   <= (s < NREC) ? T_LOCAL : T_DISCARD;
          if (s < NREC) n_delivered <= n_delivered + 1;
          else          n_discard   <= n_discard + 1;
        end

      // output grants
      for (int o = 0; o < NLINK; o++)
        if (g_vld[o]) begin
          int s;
          s = int'(g_src[o]);
          out_busy[o]  <= 1'b1;
          out_owner[o] <= g_src[o];
          rr[o]        <= 5'((s + 1) % NS);
          s_busy[s]    <= 1'b1;
          s_left[s]    <= r_len[s];
          s_dir[s]     <= 3'(o);
          s_vc[s]      <= r_vc[s];
          s_first[s]   <= 1'b1;
          s_tgt[s]     <= T_LINK;
          s_dep[s]     <= (s < NREC) && s_peek[s][0][3];
          if (s < NREC && s_peek[s][0][3]) n_deposit <= n_deposit + 1;
          if (r_vc[s]) n_escape <= n_escape + 1;
          else         n_adaptive <= n_adaptive + 1;
        end

      // tokens: spent at grant, returned by the neighbour
      for (int o = 0; o < NLINK; o++) begin
        logic [TOKW-1:0] spend0, spend1;
        spend0 = '0; spend1 = '0;
        if (g_vld[o]) begin
          if (r_vc[g_src[o]]) spend1 = TOKW'(hdr_chunks(s_peek[g_src[o]][0]));
          else                spend0 = TOKW'(hdr_chunks(s_peek[g_src[o]][0]));
        end
        tok0[o] <= tok0[o] - spend0 + TOKW'(link_out_bwd[o].tok[0]);
        tok1[o] <= tok1[o] - spend1 + TOKW'(link_out_bwd[o].tok[1]);
      end
    end
  end

  always_comb begin
    n_crc_err = '0;
    for (int l = 0; l < NLINK; l++) n_crc_err = n_crc_err + 32'(rx_err[l]);
  end

  // A source is never granted two outputs in one cycle: it asks for one only.
  always_ff @(posedge clk)
    if (rst_n)
      for (int a = 0; a < NLINK; a++)
        for (int b = a + 1; b < NLINK; b++)
          assert (!(g_vld[a] && g_vld[b] && g_src[a] == g_src[b]))
            else $error("source granted two outputs");

endmodule
