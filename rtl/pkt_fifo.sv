// pkt_fifo: byte FIFO with tentative writes, used for the torus input
// virtual-channel buffers, the injection FIFOs and the reception FIFOs.
//
// Bytes written with 'wr' are held behind a tentative write pointer and are
// invisible to the reader until 'commit' (packet received with a good CRC)
// moves the committed pointer up to them; 'drop' rolls the tentative pointer
// back, deleting a bad packet. commit and drop act on the bytes written before
// the current cycle's write. The reader sees 'count' committed bytes, and the
// next four of them on 'peek' (the packet header); 'rd' pops one byte.
// 'free' counts space not taken by committed or tentative bytes. Writes into a
// full FIFO are ignored (the token flow control keeps that from happening).
// The rollback mechanism is this design's way of deleting a bad packet.
module pkt_fifo #(
  parameter int DEPTH = 1024
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       wr,
  input  logic [7:0]                 wdata,
  input  logic                       commit,
  input  logic                       drop,
  input  logic                       rd,
  output logic [3:0][7:0]            peek,
  output logic [$clog2(DEPTH+1)-1:0] count,
  output logic [$clog2(DEPTH+1)-1:0] free
);
  localparam int AW = $clog2(DEPTH);
  localparam int CW = $clog2(DEPTH+1);

  logic [7:0]  mem [DEPTH];
  logic [AW:0] rp, wp_c, wp_t;   // read, committed write, tentative write

  wire [AW:0] used_t = wp_t - rp;
  wire        do_wr  = wr && (used_t < (AW+1)'(DEPTH));
  wire        do_rd  = rd && (count != '0);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      rp <= '0; wp_c <= '0; wp_t <= '0;
    end else begin
      if (drop) wp_t <= wp_c;
      else if (do_wr) wp_t <= wp_t + 1'b1;
      if (commit) wp_c <= wp_t;
      if (do_rd) rp <= rp + 1'b1;
    end
  end

  always_ff @(posedge clk)
    if (do_wr && !drop) mem[wp_t[AW-1:0]] <= wdata;

  assign count = CW'(wp_c - rp);
  assign free  = CW'((AW+1)'(DEPTH) - used_t);
  always_comb
    for (int k = 0; k < 4; k++) peek[k] = mem[AW'(rp[AW-1:0] + AW'(k))];

endmodule
