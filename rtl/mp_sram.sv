// mp_sram: small fast two-port SRAM shared by the node's two processors for
// passing data between them. Each port can read or write one word per clock;
// read data appears one clock after the request and is the value before any
// write in that clock. If both ports write the same word in one clock, port 0's
// data is kept. The paper gives only the function; the 16 KB size
// (1024 x 128-bit words) and the collision rule are this design's choices.
module mp_sram #(
  parameter int WORDS = 1024,
  parameter int W     = 128
) (
  input  logic                                clk,
  input  logic [1:0]                          en,
  input  logic [1:0]                          we,
  input  logic [1:0][$clog2(WORDS)-1:0]       addr,
  input  logic [1:0][W-1:0]                   wdata,
  output logic [1:0][W-1:0]                   rdata
);
  logic [W-1:0] mem [WORDS];

  always_ff @(posedge clk) begin
    for (int p = 0; p < 2; p++)
      if (en[p]) rdata[p] <= mem[addr[p]];
    if (en[1] && we[1] && !(en[0] && we[0] && addr[0] == addr[1])) mem[addr[1]] <= wdata[1];
    if (en[0] && we[0]) mem[addr[0]] <= wdata[0];
  end
endmodule
