// rr_arbiter: round-robin arbiter for the L1 data cache ports.
//
// The paper's L1-D is shared by the load unit, the store unit and the
// memory-management unit, with concurrent accesses arbitrated round-robin.
// The arbiter's priority pointer is history-dependent state, which the paper
// found to carry a residual covert channel; fence.t therefore resets it.
//
// Interface: req_i holds one request bit per client. When en_i is high and
// any request is pending, gnt_o is one-hot for the winner: the first
// requester at or after the pointer, searching upwards and wrapping. In the
// cycle after a grant the pointer moves to the client after the winner.
// flush_i returns the pointer to client 0 (this reset value is this design's
// own choice). The grant is combinational; the pointer is registered.
module rr_arbiter #(
  parameter int unsigned N = 3
) (
  input  logic         clk_i,
  input  logic         rst_ni,
  input  logic         en_i,
  input  logic         flush_i,
  input  logic [N-1:0] req_i,
  output logic [N-1:0] gnt_o,
  output logic [$clog2(N)-1:0] idx_o
);
  localparam int unsigned IW = $clog2(N);
  logic [IW-1:0] ptr_q, ptr_d;

  always_comb begin
    logic found;
    int unsigned k;
    gnt_o = '0;
    idx_o = '0;
    found = 1'b0;
    for (int unsigned i = 0; i < N; i++) begin
      k = (int'(ptr_q) + i) % N;
      if (!found && en_i && req_i[k]) begin
        found    = 1'b1;
        gnt_o[k] = 1'b1;
        idx_o    = IW'(k);
      end
    end
    ptr_d = ptr_q;
    if (flush_i)    ptr_d = '0;
    else if (found) ptr_d = (int'(idx_o) == N - 1) ? '0 : idx_o + IW'(1);
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) ptr_q <= '0;
    else         ptr_q <= ptr_d;
  end

  a_onehot: assert property (@(posedge clk_i) disable iff (!rst_ni) $onehot0(gnt_o));
  a_grant_req: assert property (@(posedge clk_i) disable iff (!rst_ni) (gnt_o & ~req_i) == '0);
endmodule
