// btb: branch target buffer, caching the destinations of indirect jumps.
//
// 16 entries (the paper's size), each a valid bit and a full target
// address, indexed directly by the jump's address. The paper gives only the
// size; direct-mapped untagged indexing with a one-bit offset for compressed
// instructions is this design's choice. fence.t clears all entries, valid
// bits and targets, in one cycle.
//
// Interface: lookup is combinational (pred_valid_o, pred_target_o for pc_i).
// upd_valid_i writes upd_target_i into the entry of upd_pc_i. flush_i wins
// over an update in the same cycle.
module btb #(
  parameter int unsigned ENTRIES = 16,
  parameter int unsigned VLEN    = 64
) (
  input  logic            clk_i,
  input  logic            rst_ni,
  input  logic            flush_i,
  input  logic [VLEN-1:0] pc_i,
  output logic            pred_valid_o,
  output logic [VLEN-1:0] pred_target_o,
  input  logic            upd_valid_i,
  input  logic [VLEN-1:0] upd_pc_i,
  input  logic [VLEN-1:0] upd_target_i
);
  localparam int unsigned IW = $clog2(ENTRIES);
  logic [ENTRIES-1:0] valid_q;
  logic [VLEN-1:0]    tgt_q [ENTRIES];
  logic [IW-1:0]      ridx, widx;

  assign ridx          = pc_i[IW:1];
  assign widx          = upd_pc_i[IW:1];
  assign pred_valid_o  = valid_q[ridx];
  assign pred_target_o = valid_q[ridx] ? tgt_q[ridx] : '0;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      valid_q <= '0;
      for (int i = 0; i < ENTRIES; i++) tgt_q[i] <= '0;
    end else if (flush_i) begin
      valid_q <= '0;
      for (int i = 0; i < ENTRIES; i++) tgt_q[i] <= '0;
    end else if (upd_valid_i) begin
      valid_q[widx] <= 1'b1;
      tgt_q[widx]   <= upd_target_i;
    end
  end
endmodule
