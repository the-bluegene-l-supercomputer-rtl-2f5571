// l2_prefetch: the small L2 of one processor, a fully-associative buffer of
// recently fetched and prefetched lines between the processor and the shared
// L3.
//
// It holds BYTES/LINE_BYTES lines (64 lines of 32 bytes for 2 KB), each with
// its full line address as tag. A processor read that hits returns its 128
// bits HIT_LAT clocks after it is accepted. A read that misses fetches the
// line from L3, stores it and returns it. After every read the prefetch engine
// asks L3 for the next sequential line if it is not already held, so a
// processor streaming through memory finds its next line waiting. A write is
// sent through to L3 and also updates a held copy of the line. Lines are
// replaced round robin. One L3 request is outstanding at a time; a demand
// request waits for a prefetch in flight. req_rdy is high when a new request
// can be accepted. The 2 KB size, full associativity, prefetching and the 6
// to 10 cycle hit latency are the paper's; the line size, write-through
// policy, next-line prefetch rule and replacement are this design's choices.
module l2_prefetch
  import bgl_pkg::*;
#(
  parameter int BYTES   = 2048,
  parameter int HIT_LAT = 6
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // processor side
  input  logic                  req_vld,
  output logic                  req_rdy,
  input  logic                  req_we,
  input  logic [31:0]           req_addr,
  input  logic [CPU_BITS-1:0]   req_wdata,
  output logic                  resp_vld,
  output logic [CPU_BITS-1:0]   resp_rdata,
  // L3 side
  output logic                  l3_vld,
  input  logic                  l3_rdy,
  output logic                  l3_we,
  output logic [31:0]           l3_addr,
  output logic [CPU_BITS-1:0]   l3_wdata,
  input  logic                  l3_resp_vld,
  input  logic [LINE_BITS-1:0]  l3_resp_data,
  // statistics
  output logic [31:0]           n_hit,
  output logic [31:0]           n_miss,
  output logic [31:0]           n_prefetch
);
  localparam int N  = BYTES / LINE_BYTES;
  localparam int TAW = 32 - $clog2(LINE_BYTES);

  logic [N-1:0]                 v;
  logic [TAW-1:0]               tag  [N];
  logic [LINE_BITS-1:0]         data [N];
  logic [$clog2(N)-1:0]         repl;

  typedef enum logic [2:0] {L_IDLE, L_HIT, L_MISS_REQ, L_MISS_WAIT, L_WR_REQ, L_WR_WAIT} state_e;
  state_e          st;
  logic [31:0]     cur_addr;
  logic [CPU_BITS-1:0] cur_wdata;
  logic [7:0]      lat;

  // prefetch engine
  logic            pf_pend, pf_busy;
  logic [TAW-1:0]  pf_tag;

  // lookup of a line tag
  function automatic logic [$clog2(N):0] find(input logic [TAW-1:0] t);
    find = '1;
    for (int i = 0; i < N; i++)
      if (v[i] && tag[i] == t) find = ($clog2(N)+1)'(i);
  endfunction

  wire [TAW-1:0]          cur_tag = cur_addr[31 -: TAW];
  wire [$clog2(N):0]      cur_hit = find(cur_tag);
  wire [$clog2(N):0]      in_hit  = find(req_addr[31 -: TAW]);
  wire [$clog2(N):0]      pf_hit  = find(pf_tag);
  wire                    l3_free = !pf_busy;

  assign req_rdy = (st == L_IDLE);

  always_comb begin
    l3_vld   = 1'b0;
    l3_we    = 1'b0;
    l3_addr  = {cur_tag, {$clog2(LINE_BYTES){1'b0}}};
    l3_wdata = cur_wdata;
    if (st == L_MISS_REQ && l3_free) l3_vld = 1'b1;
    else if (st == L_WR_REQ && l3_free) begin
      l3_vld = 1'b1; l3_we = 1'b1; l3_addr = cur_addr;
    end else if (pf_pend && !pf_busy && (st == L_IDLE || st == L_HIT)) begin
      l3_vld  = 1'b1;
      l3_addr = {pf_tag, {$clog2(LINE_BYTES){1'b0}}};
    end
  end

  function automatic logic [CPU_BITS-1:0] half(input logic [LINE_BITS-1:0] l, input logic hi);
    return hi ? l[LINE_BITS-1 -: CPU_BITS] : l[CPU_BITS-1:0];
  endfunction

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      v <= '0; repl <= '0; st <= L_IDLE; lat <= '0; resp_vld <= 1'b0; resp_rdata <= '0;
      cur_addr <= '0; cur_wdata <= '0;
      pf_pend <= 1'b0; pf_busy <= 1'b0; pf_tag <= '0;
      n_hit <= '0; n_miss <= '0; n_prefetch <= '0;
    end else begin
      resp_vld <= 1'b0;

      // prefetch request accepted / returned
      if (l3_vld && l3_rdy && !l3_we && st != L_MISS_REQ && st != L_WR_REQ) begin
        pf_busy <= 1'b1; pf_pend <= 1'b0; n_prefetch <= n_prefetch + 1;
      end
      if (pf_busy && l3_resp_vld) begin
        pf_busy <= 1'b0;
        if (pf_hit[$clog2(N)]) begin
          v[repl] <= 1'b1; tag[repl] <= pf_tag; data[repl] <= l3_resp_data;
          repl <= repl + 1'b1;
        end
      end

      unique case (st)
        L_IDLE: if (req_vld) begin
          cur_addr <= req_addr; cur_wdata <= req_wdata;
          if (req_we) st <= L_WR_REQ;
          else if (!in_hit[$clog2(N)]) begin
            st <= L_HIT; lat <= 8'(HIT_LAT - 1); n_hit <= n_hit + 1;
          end else if (pf_busy && pf_tag == req_addr[31 -: TAW]) begin
            st <= L_HIT; lat <= 8'(HIT_LAT - 1); n_hit <= n_hit + 1;  // arriving
          end else begin
            st <= L_MISS_REQ; n_miss <= n_miss + 1;
          end
        end
        L_HIT: begin
          if (lat > 1) lat <= lat - 1'b1;
          else if (!cur_hit[$clog2(N)]) begin
            resp_vld   <= 1'b1;
            resp_rdata <= half(data[cur_hit[$clog2(N)-1:0]], cur_addr[4]);
            st         <= L_IDLE;
            if (find(cur_tag + 1'b1) == '1 && !pf_busy) begin
              pf_pend <= 1'b1; pf_tag <= cur_tag + 1'b1;
            end
          end else if (!(pf_busy && pf_tag == cur_tag)) begin
            st <= L_MISS_REQ;   // the line was replaced while waiting
          end
        end
        L_MISS_REQ: if (l3_free && l3_rdy) st <= L_MISS_WAIT;
        L_MISS_WAIT: if (l3_resp_vld) begin
          v[repl] <= 1'b1; tag[repl] <= cur_tag; data[repl] <= l3_resp_data;
          repl <= repl + 1'b1;
          resp_vld   <= 1'b1;
          resp_rdata <= half(l3_resp_data, cur_addr[4]);
          st <= L_IDLE;
          if (find(cur_tag + 1'b1) == '1 && !pf_busy) begin
            pf_pend <= 1'b1; pf_tag <= cur_tag + 1'b1;
          end
        end
        L_WR_REQ: if (l3_free && l3_rdy) begin
          st <= L_WR_WAIT;
          if (!cur_hit[$clog2(N)]) begin
            if (cur_addr[4]) data[cur_hit[$clog2(N)-1:0]][LINE_BITS-1 -: CPU_BITS] <= cur_wdata;
            else             data[cur_hit[$clog2(N)-1:0]][CPU_BITS-1:0]            <= cur_wdata;
          end
        end
        L_WR_WAIT: if (l3_resp_vld) begin
          resp_vld <= 1'b1; resp_rdata <= '0; st <= L_IDLE;
        end
        default: st <= L_IDLE;
      endcase
    end
  end
endmodule
