// torus_route: minimal-path route selection for one packet on the 3-d torus.
//
// From the node's own coordinates, the partition's torus size (a
// configuration value, 32x32x64 for the full machine, smaller for a
// partition) and the packet's destination it finds the
// productive directions, those whose hop shortens the distance around each
// ring (wrap-around included; at exactly half a ring the + direction is
// taken). If none is left the packet is for this node (dir = 6, local).
// Deterministic packets use the escape channel VC1 in x, then y, then z order.
// Adaptive packets take, among the productive directions whose output is free
// and whose dynamic channel VC0 downstream has tokens for the whole packet, the
// one with the most free tokens, i.e. the least loaded; if none qualifies they
// fall back to the deterministic choice on VC1. A packet that enters an
// escape ring (injected, or turning from another dimension) needs room for one
// more maximum-size packet besides its own there (bubble rule), so that a ring
// of escape buffers can never fill completely and deadlock. 'go' says the chosen output can
// take the packet now (virtual cut-through: room for all of it downstream).
// Purely combinational. Minimal adaptive and deterministic routing and the use
// of virtual channels are the paper's; the selection rule, the escape-channel
// scheme with its bubble rule and the tie rule are this design's choices.
module torus_route #(
  parameter int TOKW  = 8
) (
  input  logic [2:0][7:0]            dims,      // torus size of the partition, x,y,z
  input  logic [2:0][7:0]            my,        // x,y,z
  input  logic [2:0][7:0]            dst,
  input  logic                       adaptive,
  input  logic [1:0]                 src_dim,   // dimension the packet came in on, 3 = injected
  input  logic [3:0]                 need,      // packet size in 32-byte chunks
  input  logic [5:0]                 out_rdy,   // output link idle
  input  logic [5:0][TOKW-1:0]       tok0,      // free tokens, VC0, per output
  input  logic [5:0][TOKW-1:0]       tok1,      // free tokens, VC1, per output
  output logic [5:0]                 productive,
  output logic                       local_dst,
  output logic [2:0]                 dir,
  output logic                       vc,
  output logic                       go
);
  localparam int DIR_LOCAL_C = 6;
  localparam int MAXCH = 8;   // chunks in a maximum-size packet

  always_comb begin
    logic [7:0] d;
    logic [2:0] det_dir;
    logic       det_found;
    logic       ad_found;
    logic [2:0] ad_dir;
    logic [TOKW-1:0] best;

    productive = '0;
    det_found  = 1'b0;
    det_dir    = 3'd0;
    for (int k = 0; k < 3; k++) begin
      d = (dst[k] >= my[k]) ? dst[k] - my[k] : dst[k] + dims[k] - my[k];
      if (d != 0) begin
        if (d <= (dims[k] >> 1)) productive[2*k]   = 1'b1;
        else                  productive[2*k+1] = 1'b1;
      end
    end
    for (int j = 5; j >= 0; j--)
      if (productive[j]) begin det_found = 1'b1; det_dir = 3'(j); end

    ad_found = 1'b0;
    ad_dir   = 3'd0;
    best     = '0;
    for (int j = 0; j < 6; j++)
      if (productive[j] && out_rdy[j] && tok0[j] >= TOKW'(need) &&
          (!ad_found || tok0[j] > best)) begin
        ad_found = 1'b1; ad_dir = 3'(j); best = tok0[j];
      end

    local_dst = !det_found;
    if (!det_found) begin
      dir = 3'(DIR_LOCAL_C); vc = 1'b0; go = 1'b1;
    end else if (adaptive && ad_found) begin
      dir = ad_dir; vc = 1'b0; go = 1'b1;
    end else begin
      dir = det_dir; vc = 1'b1;
      // bubble rule: entering an escape ring needs room for one more
      // maximum-size packet besides its own
      go  = out_rdy[det_dir] &&
            tok1[det_dir] >= TOKW'(need) + ((src_dim != 2'(det_dir >> 1)) ? TOKW'(MAXCH) : '0);
    end
  end

endmodule
