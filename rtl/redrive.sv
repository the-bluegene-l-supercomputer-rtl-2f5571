// redrive: the link re-drive (cable driver) chip at the edge of a mid-plane.
//
// It sits where a torus dimension leaves the mid-plane for a cable. A
// host-set bit selects the route: with sel_include = 1 the signal coming from
// the -x cable is sent into the mid-plane's first node and the signal leaving
// the mid-plane's last node goes on to the +x cable, so the mid-plane is part
// of the larger torus loop. With sel_include = 0 the cable signal passes
// straight from -x to +x and the mid-plane's own end is looped back to its
// start, so its nodes form a torus of their own, a separate partition.
// Every path has one register (the re-timing of a re-drive). The route
// selection follows the paper; the electrical re-driving is not modelled and
// the register per path is this design's choice.
module redrive #(
  parameter int W = 9
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         sel_include,
  input  logic [W-1:0] cable_in,    // from the -x direction
  output logic [W-1:0] cable_out,   // to the +x direction
  input  logic [W-1:0] mid_in,      // leaving the mid-plane's last node
  output logic [W-1:0] mid_out      // into the mid-plane's first node
);
  always_ff @(posedge clk)
    if (!rst_n) begin
      cable_out <= '0; mid_out <= '0;
    end else if (sel_include) begin
      mid_out <= cable_in; cable_out <= mid_in;
    end else begin
      cable_out <= cable_in; mid_out <= mid_in;
    end
endmodule
