// secded_enc: (72,64) Hamming single-error-correcting, double-error-detecting
// encoder used for the L3 data array and the external DDR memory.
// Codeword bit 0 is the overall parity; bits 1..71 are Hamming positions:
// the powers of two (1,2,4,...,64) hold check bits, the other 64 positions
// hold the data bits in ascending order. Combinational. The paper states only
// that the L3 and external memory are ECC protected and the DDR bus is 144
// bits wide (two 72-bit codewords); the code itself is this design's choice.
module secded_enc (
  input  logic [63:0] d,
  output logic [71:0] c
);
  always_comb begin
    int k;
    logic [6:0] syn;
    c   = '0;
    k   = 0;
    for (int pos = 1; pos < 72; pos++)
      if ((pos & (pos - 1)) != 0) begin
        c[pos] = d[k];
        k++;
      end
    syn = '0;
    for (int pos = 1; pos < 72; pos++)
      if (c[pos]) syn ^= 7'(pos);
    for (int b = 0; b < 7; b++) c[1 << b] = syn[b];
    c[0] = ^c[71:1];
  end
endmodule
