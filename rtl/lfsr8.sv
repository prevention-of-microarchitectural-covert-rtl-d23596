// lfsr8: 8-bit pseudo-random sequence generator used for victim selection in
// the L1 caches.
//
// The paper states that L1 replacement is driven by an 8-bit LFSR whose
// sequence has a period of 256. A plain 8-bit LFSR has at most 255 states, so
// this design uses the de Bruijn extension of the maximal-length Fibonacci
// LFSR x^8 + x^6 + x^5 + x^4 + 1: the feedback bit is additionally inverted
// whenever bits 6:0 are all zero, which splices the all-zero state into the
// cycle and gives all 256 states. The polynomial and seed are this design's
// own choice.
//
// Interface: en_i advances the sequence by one step; flush_i (a fence.t
// pulse) returns it to SEED, so the victim sequence no longer depends on
// execution history. flush_i has priority over en_i. state_o is the
// registered state, valid in the cycle after the update.
module lfsr8 #(
  parameter logic [7:0] SEED = 8'h01
) (
  input  logic       clk_i,
  input  logic       rst_ni,
  input  logic       en_i,
  input  logic       flush_i,
  output logic [7:0] state_o
);
  logic [7:0] q, d;
  logic       fb;

  always_comb begin
    fb = q[7] ^ q[5] ^ q[4] ^ q[3] ^ (q[6:0] == 7'd0);
    d  = q;
    if (flush_i)   d = SEED;
    else if (en_i) d = {q[6:0], fb};
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) q <= SEED;
    else         q <= d;
  end

  assign state_o = q;
endmodule
