// secded_dec: decoder of the (72,64) SEC-DED code of secded_enc.
// The syndrome is the XOR of the positions of all set bits 1..71; with the
// overall parity it tells: no error; a single error (corrected, 'sec' = 1;
// syndrome 0 means the parity bit itself); or a double error ('ded' = 1, data
// not trusted). Combinational.
module secded_dec (
  input  logic [71:0] c,
  output logic [63:0] d,
  output logic        sec,
  output logic        ded
);
  always_comb begin
    int k;
    logic [6:0] syn;
    logic       par;
    logic [71:0] cc;
    syn = '0;
    for (int pos = 1; pos < 72; pos++)
      if (c[pos]) syn ^= 7'(pos);
    par = ^c;
    cc  = c;
    sec = 1'b0;
    ded = 1'b0;
    if (par) begin
      sec = 1'b1;
      if (int'(syn) < 72) cc[syn] = ~cc[syn];
      else ded = 1'b1;
    end else if (syn != 0) begin
      ded = 1'b1;
    end
    d = '0;
    k = 0;
    for (int pos = 1; pos < 72; pos++)
      if ((pos & (pos - 1)) != 0) begin
        d[k] = cc[pos];
        k++;
      end
  end
endmodule
