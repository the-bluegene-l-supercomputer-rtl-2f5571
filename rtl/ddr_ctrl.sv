// ddr_ctrl: the node's controller for its external DDR-SDRAM, reduced to its
// data path: ECC and the 144-bit memory bus.
//
// A 32-byte line from the L3 is sent as two 144-bit beats, each made of two
// (72,64) SEC-DED codewords (words 0,1 in the first beat, 2,3 in the second).
// Reads collect the two beats coming back, correct single-bit errors and
// report uncorrectable ones (n_sec / n_ded count them). Timing: one command
// clock, then for a write the two beats on the next two clocks and the
// acknowledge after them; for a read the line is returned one clock after the
// second beat arrives. One transaction at a time: mem_rdy is high when idle.
// The 144-bit width and ECC follow the paper; the DRAM command protocol
// (activate, precharge, refresh, DDR timing) is not described there and is
// not built: the pins carry a command strobe with the line address instead.
module ddr_ctrl
  import bgl_pkg::*;
(
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  mem_vld,
  output logic                  mem_rdy,
  input  logic                  mem_we,
  input  logic [31:0]           mem_addr,
  input  logic [LINE_BITS-1:0]  mem_wdata,
  output logic                  mem_resp_vld,
  output logic [LINE_BITS-1:0]  mem_resp_data,
  // memory pins
  output logic                  ddr_cmd_vld,
  output logic                  ddr_cmd_we,
  output logic [31:0]           ddr_cmd_addr,
  output logic                  ddr_dq_out_vld,
  output logic [143:0]          ddr_dq_out,
  input  logic                  ddr_dq_in_vld,
  input  logic [143:0]          ddr_dq_in,
  output logic [31:0]           n_sec,
  output logic [31:0]           n_ded
);
  typedef enum logic [2:0] {D_IDLE, D_W0, D_W1, D_R0, D_R1, D_RESP, D_RDONE} state_e;
  state_e st;
  logic [LINE_BITS-1:0] wline;
  logic [287:0]         wcw, rcw;
  logic [LINE_BITS-1:0] rline;
  logic [3:0]           sec4, ded4;

  for (genvar k = 0; k < 4; k++) begin : g_ecc
    secded_enc u_enc (.d(wline[64*k +: 64]), .c(wcw[72*k +: 72]));
    secded_dec u_dec (.c(rcw[72*k +: 72]), .d(rline[64*k +: 64]), .sec(sec4[k]), .ded(ded4[k]));
  end

  assign mem_rdy = (st == D_IDLE);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      st <= D_IDLE; wline <= '0; rcw <= '0;
      ddr_cmd_vld <= 1'b0; ddr_cmd_we <= 1'b0; ddr_cmd_addr <= '0;
      ddr_dq_out_vld <= 1'b0; ddr_dq_out <= '0;
      mem_resp_vld <= 1'b0; mem_resp_data <= '0; n_sec <= '0; n_ded <= '0;
    end else begin
      ddr_cmd_vld    <= 1'b0;
      ddr_dq_out_vld <= 1'b0;
      mem_resp_vld   <= 1'b0;
      unique case (st)
        D_IDLE: if (mem_vld) begin
          ddr_cmd_vld <= 1'b1; ddr_cmd_we <= mem_we; ddr_cmd_addr <= mem_addr;
          wline <= mem_wdata;
          st <= mem_we ? D_W0 : D_R0;
        end
        D_W0: begin ddr_dq_out_vld <= 1'b1; ddr_dq_out <= wcw[143:0];   st <= D_W1; end
        D_W1: begin ddr_dq_out_vld <= 1'b1; ddr_dq_out <= wcw[287:144]; st <= D_RESP; end
        D_RESP: begin mem_resp_vld <= 1'b1; mem_resp_data <= '0; st <= D_IDLE; end
        D_R0: if (ddr_dq_in_vld) begin rcw[143:0] <= ddr_dq_in; st <= D_R1; end
        D_R1: if (ddr_dq_in_vld) begin rcw[287:144] <= ddr_dq_in; st <= D_RDONE; end
        D_RDONE: begin
          mem_resp_vld <= 1'b1; mem_resp_data <= rline;
          if (|sec4) n_sec <= n_sec + 1;
          if (|ded4) n_ded <= n_ded + 1;
          st <= D_IDLE;
        end
        default: st <= D_IDLE;
      endcase
    end
  end
endmodule
