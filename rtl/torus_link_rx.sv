// torus_link_rx: receiving end of one torus link.
//
// Bytes arriving on the link are written straight into the input buffer of
// the virtual channel named in header byte 0 (bit 2) as tentative bytes, while
// the CRC is accumulated. The two bytes after the packet are the sender's CRC:
// if they match, the packet is committed to the buffer and 'ack' pulses; if
// not, the packet is dropped from the buffer and 'nak' pulses so the sender
// retransmits it. 'crc_err' counts bad packets. Deleting a bad packet and
// retransmitting over the same link follow the paper; the rest of the
// protocol is this design's choice.
module torus_link_rx
  import bgl_pkg::*;
(
  input  logic            clk,
  input  logic            rst_n,
  input  link_fwd_t       in,
  output logic [NVC-1:0]  wr,
  output logic [7:0]      wdata,
  output logic [NVC-1:0]  commit,
  output logic [NVC-1:0]  drop,
  output logic            ack,
  output logic            nak,
  output logic [15:0]     crc_err
);
  typedef enum logic [1:0] {R_IDLE, R_DATA, R_CRC1, R_CRC2} state_e;
  state_e      st;
  logic [8:0]  cnt, len;
  logic        vc;
  logic [15:0] crc, crc_nx;
  logic [7:0]  crc_hi;

  crc16 u_crc (.crc_in(crc), .data(in.data), .crc_out(crc_nx));

  always_comb begin
    wr    = '0;
    wdata = in.data;
    if (in.vld && st == R_IDLE) wr[in.data[2]] = 1'b1;
    if (in.vld && st == R_DATA) wr[vc] = 1'b1;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      st <= R_IDLE; cnt <= '0; len <= '0; vc <= 1'b0; crc <= 16'hFFFF; crc_hi <= '0;
      commit <= '0; drop <= '0; ack <= 1'b0; nak <= 1'b0; crc_err <= '0;
    end else begin
      commit <= '0; drop <= '0; ack <= 1'b0; nak <= 1'b0;
      if (in.vld) unique case (st)
        R_IDLE: begin
          vc  <= in.data[2];
          len <= 9'(hdr_bytes(in.data));
          cnt <= 9'd1;
          crc <= crc_nx;
          st  <= (hdr_bytes(in.data) == 1) ? R_CRC1 : R_DATA;
        end
        R_DATA: begin
          crc <= crc_nx;
          cnt <= cnt + 1'b1;
          if (cnt + 1'b1 == len) st <= R_CRC1;
        end
        R_CRC1: begin crc_hi <= in.data; st <= R_CRC2; end
        R_CRC2: begin
          if ({crc_hi, in.data} == crc) begin
            commit[vc] <= 1'b1; ack <= 1'b1;
          end else begin
            drop[vc] <= 1'b1; nak <= 1'b1; crc_err <= crc_err + 1'b1;
          end
          crc <= 16'hFFFF;
          st  <= R_IDLE;
        end
        default: st <= R_IDLE;
      endcase
    end
  end
endmodule
