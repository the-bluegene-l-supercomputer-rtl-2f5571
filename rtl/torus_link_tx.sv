// torus_link_tx: sending end of one torus link, with CRC and retransmission.
//
// A packet arrives from the crossbar one byte per clock (in_vld). Each byte is
// sent on the link one clock later and also kept in a 256-byte replay buffer;
// after the last byte (the length comes from header byte 0) the 16-bit CRC is
// sent, high byte first. The sender then waits for the receiver's verdict on
// the reverse channel: 'ack' frees it for the next packet (ready = 1 again),
// 'nak' (CRC error seen at the far end, which deleted the packet) makes it send
// the kept copy again, CRC included. The paper specifies CRC protection and
// automatic retransmission over the same link; the stop-and-wait protocol
// (one packet outstanding per link) is this design's choice.
module torus_link_tx
  import bgl_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       in_vld,
  input  logic [7:0] in_data,
  output logic       ready,
  output link_fwd_t  out,
  input  logic       ack,
  input  logic       nak,
  output logic       retry      // pulses when a retransmission starts
);
  typedef enum logic [2:0] {S_IDLE, S_SEND, S_REPLAY, S_CRC1, S_CRC2, S_WAIT} state_e;
  state_e      st;
  logic [7:0]  rbuf [MAXPKT];
  logic [8:0]  cnt, len;
  logic [15:0] crc, crc_nx;
  logic [7:0]  cur;

  assign cur = (st == S_REPLAY) ? rbuf[cnt[7:0]] : in_data;
  crc16 u_crc (.crc_in(crc), .data(cur), .crc_out(crc_nx));

  assign ready = (st == S_IDLE);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      st <= S_IDLE; cnt <= '0; len <= '0; crc <= 16'hFFFF; out <= '0; retry <= 1'b0;
    end else begin
      out   <= '0;
      retry <= 1'b0;
      unique case (st)
        S_IDLE: if (in_vld) begin
          out <= '{vld: 1'b1, data: in_data};
          rbuf[0] <= in_data;
          len <= 9'(hdr_bytes(in_data));
          cnt <= 9'd1;
          crc <= crc_nx;
          st  <= (hdr_bytes(in_data) == 1) ? S_CRC1 : S_SEND;
        end
        S_SEND: if (in_vld) begin
          out <= '{vld: 1'b1, data: in_data};
          rbuf[cnt[7:0]] <= in_data;
          crc <= crc_nx;
          cnt <= cnt + 1'b1;
          if (cnt + 1'b1 == len) st <= S_CRC1;
        end
        S_REPLAY: begin
          out <= '{vld: 1'b1, data: cur};
          crc <= crc_nx;
          cnt <= cnt + 1'b1;
          if (cnt + 1'b1 == len) st <= S_CRC1;
        end
        S_CRC1: begin out <= '{vld: 1'b1, data: crc[15:8]}; st <= S_CRC2; end
        S_CRC2: begin out <= '{vld: 1'b1, data: crc[7:0]};  st <= S_WAIT; end
        S_WAIT: begin
          if (ack) st <= S_IDLE;
          else if (nak) begin
            st <= S_REPLAY; cnt <= '0; retry <= 1'b1;
          end
          crc <= 16'hFFFF;
        end
        default: st <= S_IDLE;
      endcase
    end
  end
endmodule
