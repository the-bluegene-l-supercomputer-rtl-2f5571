// crc16: one-byte step of the CRC that protects every torus link packet.
// Combinational: crc_out is the CRC after shifting 'data' (MSB first) into
// crc_in. The polynomial, CRC-16-CCITT x^16+x^12+x^5+1, and the start value
// 16'hFFFF used by the link sender and receiver are this design's choice; the
// paper states only that all link packets are CRC protected.
module crc16 (
  input  logic [15:0] crc_in,
  input  logic [7:0]  data,
  output logic [15:0] crc_out
);
  always_comb begin
    logic [15:0] c;
    c = crc_in;
    for (int i = 7; i >= 0; i--) begin
      if (c[15] ^ data[i]) c = {c[14:0], 1'b0} ^ 16'h1021;
      else                 c = {c[14:0], 1'b0};
    end
    crc_out = c;
  end
endmodule
