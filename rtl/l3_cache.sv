// l3_cache: the shared L3 cache of the node, 4 MB of eDRAM behind the two L2
// buffers, kept as two independent banks (l3_bank) selected by the lowest
// set-index bit (address bit 5), so the two processors can be served at the
// same time when they touch different banks.
//
// Each L2 port has at most one request outstanding; a request goes to its
// bank when that bank is idle (if both ports want the same bank, they take
// turns). Responses carry the port number back. Both banks share the
// memory-controller port, which they take in turn, one transaction at a time.
// Sizes: BYTES/LINE_BYTES lines, WAYS ways, two banks. The 4 MB, 8 ways, two
// banks, ECC and sharing by both processors (coherent because there is one
// copy) are the paper's; the rest is this design's choice.
module l3_cache
  import bgl_pkg::*;
#(
  parameter int BYTES   = 4 * 1024 * 1024,
  parameter int WAYS    = 8,
  parameter int HIT_LAT = 20
) (
  input  logic                         clk,
  input  logic                         rst_n,
  output logic                         init_done,
  input  logic [1:0]                   req_vld,
  output logic [1:0]                   req_rdy,
  input  logic [1:0]                   req_we,
  input  logic [1:0][31:0]             req_addr,
  input  logic [1:0][CPU_BITS-1:0]     req_wdata,
  output logic [1:0]                   resp_vld,
  output logic [1:0][LINE_BITS-1:0]   resp_data,
  output logic                         mem_vld,
  input  logic                         mem_rdy,
  output logic                         mem_we,
  output logic [31:0]                  mem_addr,
  output logic [LINE_BITS-1:0]         mem_wdata,
  input  logic                         mem_resp_vld,
  input  logic [LINE_BITS-1:0]         mem_resp_data,
  output logic [31:0]                  n_hit,
  output logic [31:0]                  n_miss,
  output logic [31:0]                  n_sec,
  output logic [31:0]                  n_ded
);
  localparam int SETS_B = BYTES / LINE_BYTES / WAYS / 2;

  logic [1:0] b_init, b_rdy, b_vld, b_src, b_rsp, b_rsp_src;
  logic [1:0][LINE_BITS-1:0] b_rsp_data;
  logic [1:0] bm_vld, bm_we, bm_rdy, bm_rsp;
  logic [1:0][31:0] bm_addr;
  logic [1:0][LINE_BITS-1:0] bm_wdata;
  logic [1:0][31:0] bh, bmi, bs, bd;
  logic [1:0] turn;     // per bank: which port goes first on a tie
  logic       mturn, mown, mbusy;

  // port -> bank steering
  always_comb begin
    b_vld = '0; b_src = '0; req_rdy = '0;
    for (int b = 0; b < 2; b++) begin
      logic w0, w1;
      w0 = req_vld[0] && req_addr[0][5] == 1'(b);
      w1 = req_vld[1] && req_addr[1][5] == 1'(b);
      if (w0 && (!w1 || !turn[b])) begin
        b_vld[b] = 1'b1; b_src[b] = 1'b0; req_rdy[0] |= b_rdy[b];
      end else if (w1) begin
        b_vld[b] = 1'b1; b_src[b] = 1'b1; req_rdy[1] |= b_rdy[b];
      end
    end
  end

  for (genvar b = 0; b < 2; b++) begin : g_bank
    l3_bank #(.SETS(SETS_B), .WAYS(WAYS), .BANK(b), .HIT_LAT(HIT_LAT)) u_bank (
      .clk, .rst_n, .init_done(b_init[b]),
      .req_vld(b_vld[b]), .req_rdy(b_rdy[b]), .req_src(b_src[b]),
      .req_we(req_we[b_src[b]]), .req_addr(req_addr[b_src[b]]), .req_wdata(req_wdata[b_src[b]]),
      .resp_vld(b_rsp[b]), .resp_src(b_rsp_src[b]), .resp_data(b_rsp_data[b]),
      .mem_vld(bm_vld[b]), .mem_rdy(bm_rdy[b]), .mem_we(bm_we[b]), .mem_addr(bm_addr[b]),
      .mem_wdata(bm_wdata[b]), .mem_resp_vld(bm_rsp[b]), .mem_resp_data(mem_resp_data),
      .n_hit(bh[b]), .n_miss(bmi[b]), .n_sec(bs[b]), .n_ded(bd[b]));
  end

  assign init_done = &b_init;

  always_comb begin
    resp_vld = '0;
    resp_data = '0;
    for (int b = 0; b < 2; b++)
      if (b_rsp[b]) begin
        resp_vld[b_rsp_src[b]]  = 1'b1;
        resp_data[b_rsp_src[b]] = b_rsp_data[b];
      end
  end

  // memory port shared by the banks: one transaction at a time
  logic msel;
  always_comb begin
    msel = mbusy ? mown : ((bm_vld[0] && bm_vld[1]) ? mturn : bm_vld[1]);
    mem_vld   = !mbusy && bm_vld[msel];
    mem_we    = bm_we[msel];
    mem_addr  = bm_addr[msel];
    mem_wdata = bm_wdata[msel];
    bm_rdy    = '0;
    bm_rdy[msel] = !mbusy && mem_rdy;
    bm_rsp    = '0;
    bm_rsp[mown] = mbusy && mem_resp_vld;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      turn <= '0; mturn <= 1'b0; mown <= 1'b0; mbusy <= 1'b0;
    end else begin
      for (int b = 0; b < 2; b++)
        if (b_vld[b] && b_rdy[b]) turn[b] <= !b_src[b];
      if (mem_vld && mem_rdy) begin
        mbusy <= 1'b1; mown <= msel; mturn <= !msel;
      end else if (mbusy && mem_resp_vld) mbusy <= 1'b0;
    end
  end

  assign n_hit  = bh[0] + bh[1];
  assign n_miss = bmi[0] + bmi[1];
  assign n_sec  = bs[0] + bs[1];
  assign n_ded  = bd[0] + bd[1];

  // a response never goes to a port that has two requests in flight
  always_ff @(posedge clk)
    if (rst_n) assert (!(b_rsp[0] && b_rsp[1] && b_rsp_src[0] == b_rsp_src[1]))
      else $error("two L3 responses for one port");
endmodule
