// tb_l2_prefetch: one L2 buffer in front of a simple L3 model (fixed latency,
// one request at a time). Streams through memory sequentially and checks that
// after the first miss the following lines were prefetched and hit, with the
// 6-clock hit latency; then mixes random reads and writes over a small
// region and compares every read with a memory model.
module tb_l2_prefetch;
  import bgl_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  localparam int L3LAT = 20;

  logic req_vld = 0, req_rdy, req_we = 0, resp_vld;
  logic [31:0] req_addr = 0;
  logic [127:0] req_wdata = 0, resp_rdata;
  logic l3_vld, l3_rdy, l3_we, l3_resp_vld;
  logic [31:0] l3_addr;
  logic [127:0] l3_wdata;
  logic [255:0] l3_resp_data;
  logic [31:0] n_hit, n_miss, n_prefetch;

  l2_prefetch #(.BYTES(2048), .HIT_LAT(6)) dut (.*);

  // L3 model: memory of 128-bit halves, keyed by address / 16
  logic [127:0] mem [logic [27:0]];
  function automatic logic [127:0] rdh(logic [27:0] a);
    return mem.exists(a) ? mem[a] : {4{4'h0, a}};
  endfunction
  int busy = 0, cnt = 0; logic pend_we; logic [31:0] pend_a;
  assign l3_rdy = (busy == 0);
  always @(posedge clk) begin
    l3_resp_vld <= 0;
    if (busy == 0 && l3_vld) begin
      busy = 1; cnt = L3LAT; pend_we = l3_we; pend_a = l3_addr;
      if (l3_we) mem[l3_addr[31:4]] = l3_wdata;
    end else if (busy) begin
      cnt--;
      if (cnt == 0) begin
        busy = 0;
        l3_resp_vld  <= 1;
        l3_resp_data <= {rdh({pend_a[31:5], 1'b1}), rdh({pend_a[31:5], 1'b0})};
      end
    end
  end

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic access(input logic we, input logic [31:0] a, input logic [127:0] d,
                        output logic [127:0] r, output int cyc);
    @(negedge clk);
    while (!req_rdy) @(negedge clk);
    req_vld = 1; req_we = we; req_addr = a; req_wdata = d;
    @(negedge clk);
    req_vld = 0;
    cyc = 1;
    while (!resp_vld) begin @(negedge clk); cyc++; end
    r = resp_rdata;
  endtask

  initial begin
    logic [127:0] r;
    int cyc, h0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // sequential stream: 16-byte accesses through 24 lines
    for (int i = 0; i < 48; i++) begin
      logic [31:0] a;
      a = 32'h0001_0000 + 32'(i * 16);
      h0 = int'(n_hit);
      access(0, a, '0, r, cyc);
      check(r == rdh(a[31:4]), "stream data");
      if (i >= 4 && int'(n_hit) != h0) check(cyc == 6, $sformatf("hit latency %0d", cyc));
      repeat (30) @(negedge clk);   // the processor computes on the data
    end
    check(n_miss == 1, $sformatf("one demand miss on a stream, saw %0d", n_miss));
    check(n_prefetch >= 23, "prefetches issued");
    // random reads and writes in a small region
    for (int t = 0; t < 400; t++) begin
      logic [31:0] a; logic we; logic [127:0] d;
      a = 32'h0002_0000 + 32'($urandom_range(0, 127) * 16);
      we = ($urandom_range(0, 3) == 0);
      d = {$urandom, $urandom, $urandom, $urandom};
      access(we, a, d, r, cyc);
      if (we) mem[a[31:4]] = d;
      else check(r == rdh(a[31:4]), $sformatf("random read %h", a));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (200000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
