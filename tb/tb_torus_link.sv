// tb_torus_link: a link sender and receiver joined by a channel that flips a
// bit in some packets. Random packets (32..256 bytes, random VC) are sent;
// the test checks that every packet arrives exactly once, unchanged, in order,
// in the buffer of its VC; that every corrupted transmission was caught by
// the CRC, deleted and resent; and that a clean packet takes its length plus
// two CRC bytes on the link.
module tb_torus_link;
  import bgl_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_vld = 0; logic [7:0] in_data = 0;
  logic ready, retry, ack, nak;
  link_fwd_t tx_out, ch;
  logic [1:0] wr, commit, drop, rd;
  logic [7:0] wdata;
  logic [15:0] crc_err;
  logic [1:0][3:0][7:0] peek;
  logic [1:0][9:0] count, free;
  logic corrupt_next = 0;
  int   n_corrupt = 0, n_retry = 0, link_bytes = 0;

  torus_link_tx u_tx (.clk, .rst_n, .in_vld, .in_data, .ready, .out(tx_out), .ack, .nak, .retry);
  torus_link_rx u_rx (.clk, .rst_n, .in(ch), .wr, .wdata, .commit, .drop, .ack, .nak, .crc_err);
  for (genvar v = 0; v < 2; v++) begin : g_b
    pkt_fifo #(.DEPTH(512)) u_b (.clk, .rst_n, .wr(wr[v]), .wdata, .commit(commit[v]), .drop(drop[v]),
      .rd(rd[v]), .peek(peek[v]), .count(count[v]), .free(free[v]));
  end

  // channel: flips bit 3 of one byte in a packet marked for corruption
  int pos_in_pkt = 0;
  always_comb begin
    ch = tx_out;
    if (tx_out.vld && corrupt_next && pos_in_pkt == 17) ch.data[3] = ~ch.data[3];
  end
  always @(posedge clk) if (rst_n) begin
    if (tx_out.vld) begin
      link_bytes <= link_bytes + 1;
      if (corrupt_next && pos_in_pkt == 17) begin corrupt_next <= 0; n_corrupt <= n_corrupt + 1; end
      pos_in_pkt <= pos_in_pkt + 1;
    end
    if (ack || nak) pos_in_pkt <= 0;
    if (retry) n_retry <= n_retry + 1;
  end

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  logic [7:0] exp_q[2][$];

  initial begin
    rd = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int p = 0; p < 60; p++) begin
      int len, vc, t0, lb0;
      len = 32 * $urandom_range(1, 8);
      vc  = $urandom_range(0, 1);
      wait (ready);
      @(negedge clk);
      corrupt_next = (p % 3 == 1);
      t0 = link_bytes;
      lb0 = n_corrupt;
      for (int i = 0; i < len; i++) begin
        logic [7:0] b;
        b = (i == 0) ? {3'(len / 32 - 1), 2'b00, 1'(vc), 2'b00} : 8'($urandom);
        in_vld = 1; in_data = b;
        exp_q[vc].push_back(b);
        @(negedge clk);
      end
      in_vld = 0;
      wait (ack);
      @(negedge clk);
      if (n_corrupt == lb0) check(link_bytes - t0 == len + 2, "link bytes = len + CRC");
      else                  check(link_bytes - t0 == 2 * (len + 2), "one resend after error");
      // drain both buffers and compare
      repeat (2) @(negedge clk);
      for (int v = 0; v < 2; v++) begin
        check(int'(count[v]) == exp_q[v].size(), $sformatf("vc%0d count %0d vs %0d", v, count[v], exp_q[v].size()));
        while (count[v] != 0) begin
          rd[v] = 1;
          check(peek[v][0] == exp_q[v][0], "data");
          void'(exp_q[v].pop_front());
          @(negedge clk);
          rd[v] = 0;
        end
      end
    end
    check(n_corrupt == 20, "corruptions injected");
    check(int'(crc_err) == n_corrupt, "CRC caught every corruption");
    check(n_retry == n_corrupt, "one retry per corruption");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
