// bht: branch history table, predicting whether conditional branches are
// taken.
//
// 64 entries (the paper's size), each a valid bit and a 2-bit saturating
// counter, indexed directly by the instruction address. The paper only gives
// the size and that fence.t resets the saturating counters; the counter
// scheme, the untagged direct-mapped indexing and the offset of one bit
// (2-byte compressed instructions) are this design's choices, modelled on
// common practice.
//
// Interface: prediction is combinational: pred_valid_o is high when the entry
// for pc_i has been trained, pred_taken_o is then its counter's upper bit.
// An update (upd_valid_i) moves the counter of upd_pc_i one step towards
// upd_taken_i; an untrained entry starts weakly taken or weakly not taken.
// flush_i (fence.t) clears every counter and valid bit in one cycle, and
// takes precedence over an update in the same cycle.
module bht #(
  parameter int unsigned ENTRIES = 64,
  parameter int unsigned VLEN    = 64
) (
  input  logic            clk_i,
  input  logic            rst_ni,
  input  logic            flush_i,
  input  logic [VLEN-1:0] pc_i,
  output logic            pred_valid_o,
  output logic            pred_taken_o,
  input  logic            upd_valid_i,
  input  logic [VLEN-1:0] upd_pc_i,
  input  logic            upd_taken_i
);
  localparam int unsigned IW = $clog2(ENTRIES);
  logic [ENTRIES-1:0] valid_q;
  logic [1:0]         cnt_q [ENTRIES];
  logic [IW-1:0]      ridx, widx;
  logic [1:0]         cur, nxt;

  assign ridx         = pc_i[IW:1];
  assign widx         = upd_pc_i[IW:1];
  assign pred_valid_o = valid_q[ridx];
  assign pred_taken_o = valid_q[ridx] && cnt_q[ridx][1];

  always_comb begin
    cur = cnt_q[widx];
    if (!valid_q[widx])            nxt = upd_taken_i ? 2'b10 : 2'b01;
    else if (upd_taken_i)          nxt = (cur == 2'b11) ? cur : cur + 2'd1;
    else                           nxt = (cur == 2'b00) ? cur : cur - 2'd1;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      valid_q <= '0;
      for (int i = 0; i < ENTRIES; i++) cnt_q[i] <= 2'b00;
    end else if (flush_i) begin
      valid_q <= '0;
      for (int i = 0; i < ENTRIES; i++) cnt_q[i] <= 2'b00;
    end else if (upd_valid_i) begin
      valid_q[widx] <= 1'b1;
      cnt_q[widx]   <= nxt;
    end
  end
endmodule
