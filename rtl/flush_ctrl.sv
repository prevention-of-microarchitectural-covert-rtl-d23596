// flush_ctrl: the controller that carries out fence.t.
//
// When fence.t commits, the paper's controller flushes the pipeline and sends
// a flush signal to every stateful on-core component picked by the select
// bitmap. This controller does that in four steps:
//   IDLE   wait for a committed fence.t; in its commit cycle raise
//          flush_pipeline_o and latch the select bitmap.
//   DRAIN  hold the core (stall_o) until the L1-D is idle and its write
//          buffer is empty, so no store is lost or half-done. Draining the
//          write buffer first is this design's choice.
//   FLUSH  one cycle: pulse the flush request of every selected component.
//   WAIT   wait until the L1 caches have cleared their valid bits (one set
//          per cycle, 256 cycles for the evaluated caches); then pulse
//          done_o and return to IDLE.
// Everything except the caches resets in the single FLUSH cycle, as the
// paper states. With the write buffer already empty the fence takes a fixed
// number of cycles: done_o comes 3 cycles plus the cache flush time after
// the commit cycle (259 cycles with full caches).
//
// Interface: commit_valid_i/commit_instr_i come from the core's commit
// stage; dcache_idle_i means "L1-D idle and write buffer empty";
// dcache_busy_i/icache_busy_i are the caches' flush-in-progress flags.
module flush_ctrl
  import tp_pkg::*;
(
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic        commit_valid_i,
  input  logic [31:0] commit_instr_i,
  input  logic        dcache_idle_i,
  input  logic        dcache_busy_i,
  input  logic        icache_busy_i,
  output logic        flush_pipeline_o,
  output logic        stall_o,
  output flush_req_t  flush_o,
  output logic        done_o
);
  typedef enum logic [1:0] {S_IDLE, S_DRAIN, S_FLUSH, S_WAIT} state_e;
  state_e state_q, state_d;
  logic [SELECT_W-1:0] sel_q, sel_d;
  logic                is_fence;
  logic [SELECT_W-1:0] sel_dec;

  fence_t_decoder u_dec (
    .instr_i      (commit_instr_i),
    .is_fence_t_o (is_fence),
    .select_o     (sel_dec)
  );

  always_comb begin
    state_d          = state_q;
    sel_d            = sel_q;
    flush_pipeline_o = 1'b0;
    flush_o          = '0;
    done_o           = 1'b0;
    stall_o          = (state_q != S_IDLE);
    unique case (state_q)
      S_IDLE: if (commit_valid_i && is_fence) begin
        flush_pipeline_o = 1'b1;
        stall_o          = 1'b1;
        sel_d            = sel_dec;
        state_d          = S_DRAIN;
      end
      S_DRAIN: if (dcache_idle_i) state_d = S_FLUSH;
      S_FLUSH: begin
        flush_o.dcache = sel_q[SEL_DCACHE];
        flush_o.icache = sel_q[SEL_ICACHE];
        flush_o.tlb    = sel_q[SEL_TLB];
        flush_o.bht    = sel_q[SEL_BHT];
        flush_o.btb    = sel_q[SEL_BTB];
        flush_o.lfsr   = sel_q[SEL_LFSR];
        flush_o.arb    = sel_q[SEL_ARB];
        flush_o.plru   = sel_q[SEL_PLRU];
        state_d        = S_WAIT;
      end
      S_WAIT: if (!dcache_busy_i && !icache_busy_i) begin
        done_o  = 1'b1;
        state_d = S_IDLE;
      end
      default: state_d = S_IDLE;
    endcase
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q <= S_IDLE;
      sel_q   <= '0;
    end else begin
      state_q <= state_d;
      sel_q   <= sel_d;
    end
  end
endmodule
