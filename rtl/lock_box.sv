// lock_box: hardware locks shared by the node's two processors.
//
// NLOCK one-bit locks. A processor acquires lock idx with an acquire request:
// if the lock is free it becomes taken by that processor and 'got' is 1 on the
// next clock, otherwise 'got' is 0 and the lock is unchanged (test-and-set).
// A release request by the owner frees the lock; a release by the other
// processor is ignored and flagged in 'bad_release'. If both processors try
// to take the same free lock in the same clock, processor 0 gets it. The
// paper names the lock box as a means of processor-to-processor
// synchronisation; its semantics here are this design's choice.
module lock_box #(
  parameter int NLOCK = 64
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic [1:0]                     acq,
  input  logic [1:0]                     rel,
  input  logic [1:0][$clog2(NLOCK)-1:0]  idx,
  output logic [1:0]                     got,
  output logic [1:0]                     bad_release,
  output logic [NLOCK-1:0]               locked
);
  logic [NLOCK-1:0] owner;   // 0 or 1: which CPU holds the lock

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      locked <= '0; owner <= '0; got <= '0; bad_release <= '0;
    end else begin
      got <= '0;
      bad_release <= '0;
      for (int c = 0; c < 2; c++)
        if (rel[c]) begin
          if (locked[idx[c]] && owner[idx[c]] == c[0]) locked[idx[c]] <= 1'b0;
          else bad_release[c] <= 1'b1;
        end
      if (acq[0] && !locked[idx[0]]) begin
        locked[idx[0]] <= 1'b1; owner[idx[0]] <= 1'b0; got[0] <= 1'b1;
      end
      if (acq[1] && !locked[idx[1]] && !(acq[0] && idx[0] == idx[1])) begin
        locked[idx[1]] <= 1'b1; owner[idx[1]] <= 1'b1; got[1] <= 1'b1;
      end
    end
  end
endmodule
