// ddr_model: behavioural model of the external DDR-SDRAM as seen on the
// 144-bit data bus of ddr_ctrl (not synthesizable logic). It stores beats by
// line address in an associative array, unwritten lines read as zero. A read
// command returns the line's two beats LAT and LAT+1 clocks later. Setting
// flip1/flip2 flips one/two bits of the next read beat pair to test ECC.
module ddr_model #(
  parameter int LAT = 40
) (
  input  logic         clk,
  input  logic         cmd_vld,
  input  logic         cmd_we,
  input  logic [31:0]  cmd_addr,
  input  logic         dq_out_vld,
  input  logic [143:0] dq_out,
  output logic         dq_in_vld,
  output logic [143:0] dq_in,
  input  logic         flip1,
  input  logic         flip2,
  output int           n_reads,
  output int           n_writes
);
  logic [287:0] mem [logic [31:0]];
  logic [31:0]  waddr;
  int           wbeat;
  int           rcount;
  logic [31:0]  raddr;
  logic         rpend;

  initial begin
    dq_in_vld = 0; dq_in = '0; wbeat = -1; rpend = 0; n_reads = 0; n_writes = 0; rcount = 0;
  end

  always @(posedge clk) begin
    dq_in_vld <= 1'b0;
    if (cmd_vld && cmd_we) begin waddr <= cmd_addr; wbeat <= 0; n_writes <= n_writes + 1; end
    if (cmd_vld && !cmd_we) begin raddr <= cmd_addr; rpend <= 1; rcount <= 0; n_reads <= n_reads + 1; end
    if (dq_out_vld) begin
      logic [287:0] l;
      l = mem.exists(waddr) ? mem[waddr] : '0;
      if (wbeat == 0) l[143:0] = dq_out; else l[287:144] = dq_out;
      mem[waddr] = l;
      wbeat <= wbeat + 1;
    end
    if (rpend) begin
      rcount <= rcount + 1;
      if (rcount == LAT - 1 || rcount == LAT) begin
        logic [287:0] l;
        logic [143:0] b;
        l = mem.exists(raddr) ? mem[raddr] : '0;
        b = (rcount == LAT - 1) ? l[143:0] : l[287:144];
        if (rcount == LAT - 1 && flip1) b[37] = ~b[37];
        if (rcount == LAT - 1 && flip2) begin b[5] = ~b[5]; b[6] = ~b[6]; end
        dq_in_vld <= 1'b1;
        dq_in <= b;
        if (rcount == LAT) rpend <= 0;
      end
    end
  end
endmodule
