// l3_bank: one of the two banks of the shared L3 cache.
//
// A bank holds the lines whose set index is even (bank 0) or odd (bank 1).
// It is 8-way set associative: each set has eight tags with valid and dirty
// bits, and the eDRAM array holds each 32-byte line as four 72-bit SEC-DED
// codewords. A bank serves one request at a time:
//   lookup (1 clock) -> hit: the array access takes HIT_LAT clocks, then a
//   read returns the corrected line, a 128-bit write merges into the line and
//   re-encodes it; miss: the victim way (round robin) is written back to
//   memory if dirty, the line is read from memory and filled, and the
//   request continues as a hit.
// After reset the bank clears its valid bits one set per clock (init_done
// goes high when it is finished). n_sec/n_ded count corrected and
// uncorrectable ECC errors found in the array. The 8 ways, two banks and ECC
// are the paper's; the line size, write-back policy, round-robin replacement
// and latency split are this design's choices.
module l3_bank
  import bgl_pkg::*;
#(
  parameter int SETS    = 8192,   // sets in this bank
  parameter int WAYS    = 8,
  parameter int BANK    = 0,
  parameter int HIT_LAT = 20
) (
  input  logic                  clk,
  input  logic                  rst_n,
  output logic                  init_done,
  input  logic                  req_vld,
  output logic                  req_rdy,
  input  logic                  req_src,
  input  logic                  req_we,
  input  logic [31:0]           req_addr,
  input  logic [CPU_BITS-1:0]   req_wdata,
  output logic                  resp_vld,
  output logic                  resp_src,
  output logic [LINE_BITS-1:0]  resp_data,
  output logic                  mem_vld,
  input  logic                  mem_rdy,
  output logic                  mem_we,
  output logic [31:0]           mem_addr,
  output logic [LINE_BITS-1:0]  mem_wdata,
  input  logic                  mem_resp_vld,
  input  logic [LINE_BITS-1:0]  mem_resp_data,
  output logic [31:0]           n_hit,
  output logic [31:0]           n_miss,
  output logic [31:0]           n_sec,
  output logic [31:0]           n_ded
);
  localparam int SW   = $clog2(SETS);
  localparam int WW   = $clog2(WAYS);
  localparam int OFF  = $clog2(LINE_BYTES) + 1;   // line offset + bank bit
  localparam int TAGW = 32 - OFF - SW;
  localparam int CWB  = 72 * (LINE_BITS / 64);

  logic [TAGW-1:0]  tagm  [SETS][WAYS];
  logic [WAYS-1:0]  valid [SETS];
  logic [WAYS-1:0]  dirty [SETS];
  logic [CWB-1:0]   dmem  [SETS*WAYS];

  typedef enum logic [2:0] {B_INIT, B_IDLE, B_LOOK, B_WB, B_WB_WAIT, B_FILL, B_FILL_WAIT, B_HIT} state_e;
  state_e st;
  logic [SW-1:0]       iset;
  logic                c_src, c_we;
  logic [31:0]         c_addr;
  logic [CPU_BITS-1:0] c_wdata;
  logic [WW-1:0]       c_way, rr;
  logic [7:0]          lat;

  wire [SW-1:0]   c_set = c_addr[OFF +: SW];
  wire [TAGW-1:0] c_tag = c_addr[31 -: TAGW];

  // tag compare
  logic          hit;
  logic [WW-1:0] hway;
  always_comb begin
    hit = 1'b0; hway = '0;
    for (int w = 0; w < WAYS; w++)
      if (valid[c_set][w] && tagm[c_set][w] == c_tag) begin hit = 1'b1; hway = WW'(w); end
  end

  // ECC on the line of the current way
  logic [CWB-1:0]       rd_cw, wr_cw;
  logic [LINE_BITS-1:0] rd_line, wr_line;
  logic [3:0]           sec4, ded4;
  assign rd_cw = dmem[{c_set, c_way}];
  for (genvar k = 0; k < LINE_BITS / 64; k++) begin : g_ecc
    secded_dec u_dec (.c(rd_cw[72*k +: 72]), .d(rd_line[64*k +: 64]), .sec(sec4[k]), .ded(ded4[k]));
    secded_enc u_enc (.d(wr_line[64*k +: 64]), .c(wr_cw[72*k +: 72]));
  end
  always_comb begin
    wr_line = rd_line;
    if (st == B_FILL_WAIT) wr_line = mem_resp_data;
    else if (c_addr[4]) wr_line[LINE_BITS-1 -: CPU_BITS] = c_wdata;
    else                wr_line[CPU_BITS-1:0]            = c_wdata;
  end

  assign init_done = (st != B_INIT);
  assign req_rdy   = (st == B_IDLE);

  always_comb begin
    mem_vld   = (st == B_WB) || (st == B_FILL);
    mem_we    = (st == B_WB);
    mem_addr  = (st == B_WB)
              ? {tagm[c_set][c_way], c_set, 1'(BANK), {$clog2(LINE_BYTES){1'b0}}}
              : {c_addr[31:$clog2(LINE_BYTES)], {$clog2(LINE_BYTES){1'b0}}};
    mem_wdata = rd_line;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      st <= B_INIT; iset <= '0; rr <= '0; lat <= '0; c_way <= '0;
      c_src <= 1'b0; c_we <= 1'b0; c_addr <= '0; c_wdata <= '0;
      resp_vld <= 1'b0; resp_src <= 1'b0; resp_data <= '0;
      n_hit <= '0; n_miss <= '0; n_sec <= '0; n_ded <= '0;
    end else begin
      resp_vld <= 1'b0;
      unique case (st)
        B_INIT: begin
          valid[iset] <= '0; dirty[iset] <= '0;
          iset <= iset + 1'b1;
          if (iset == SW'(SETS - 1)) st <= B_IDLE;
        end
        B_IDLE: if (req_vld) begin
          c_src <= req_src; c_we <= req_we; c_addr <= req_addr; c_wdata <= req_wdata;
          st <= B_LOOK;
        end
        B_LOOK: if (hit) begin
          c_way <= hway; lat <= 8'(HIT_LAT); st <= B_HIT; n_hit <= n_hit + 1;
        end else begin
          c_way <= rr; rr <= rr + 1'b1; n_miss <= n_miss + 1;
          st <= (valid[c_set][rr] && dirty[c_set][rr]) ? B_WB : B_FILL;
        end
        B_WB:        if (mem_rdy) st <= B_WB_WAIT;
        B_WB_WAIT:   if (mem_resp_vld) st <= B_FILL;
        B_FILL:      if (mem_rdy) st <= B_FILL_WAIT;
        B_FILL_WAIT: if (mem_resp_vld) begin
          dmem[{c_set, c_way}] <= wr_cw;
          tagm[c_set][c_way]   <= c_tag;
          valid[c_set][c_way]  <= 1'b1;
          dirty[c_set][c_way]  <= 1'b0;
          lat <= 8'(HIT_LAT);
          st  <= B_HIT;
        end
        B_HIT: begin
          if (lat > 1) lat <= lat - 1'b1;
          else begin
            resp_vld <= 1'b1;
            resp_src <= c_src;
            resp_data <= rd_line;
            if (|sec4) n_sec <= n_sec + 1;
            if (|ded4) n_ded <= n_ded + 1;
            if (c_we) begin
              dmem[{c_set, c_way}] <= wr_cw;
              dirty[c_set][c_way]  <= 1'b1;
            end
            st <= B_IDLE;
          end
        end
        default: st <= B_IDLE;
      endcase
    end
  end
endmodule
