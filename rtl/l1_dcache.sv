// l1_dcache: write-through, set-associative L1 data cache with a flush that
// fence.t can trigger.
//
// Evaluated configuration (the paper's, and the defaults): 32 KiB, 8 ways,
// 16-byte lines, hence 256 sets; pseudo-random victim selection driven by an
// 8-bit LFSR; three clients (load unit, store unit, page-table walker)
// arbitrated round-robin; a 40-entry write buffer towards the L2.
//
// Operation. In IDLE the round-robin arbiter grants one client and the set is
// read from the tag SRAM (valid bit and tag of every way) and the data SRAM.
// In LOOKUP, one cycle later, the tags are compared:
//   load hit   the addressed 64-bit word is returned (2-cycle hit latency);
//   store      the store is queued in the write buffer and, on a hit, also
//              written into the line (no allocation on a store miss);
//   load miss  the cache waits until the write buffer has drained (so the
//              L2 holds every earlier store), requests the line from the L2,
//              and on its return writes it into the first invalid way, or
//              else into the way chosen by the LFSR, and answers the load.
// The L2 port is used by refills and, at all other times, by the write
// buffer. A store is not granted while the write buffer is full.
//
// Flush. As in the paper, the valid bits live with the tags in a
// one-set-per-cycle SRAM, so flush_i clears them set by set: 256 cycles, the
// same whatever the cache holds (flush_busy_o is high meanwhile). The data
// is write-through, so nothing is written back. flush_lfsr_i and
// flush_arb_i reset the second-order state the paper identified: the
// replacement LFSR and the arbiter's priority pointer (one cycle).
//
// Own choices where the paper is silent: the state machine, hit latency,
// refill-after-drain rule, invalid-way-first victim choice, store responses
// and that the cache is indexed and tagged with physical addresses.
module l1_dcache
  import tp_pkg::*;
#(
  parameter int unsigned SIZE_BYTES = 32768,
  parameter int unsigned WAYS       = 8,
  parameter int unsigned NPORTS     = 3,
  parameter int unsigned WBUF_DEPTH = 40
) (
  input  logic                  clk_i,
  input  logic                  rst_ni,
  // fence.t
  input  logic                  flush_i,
  input  logic                  flush_lfsr_i,
  input  logic                  flush_arb_i,
  output logic                  flush_busy_o,
  output logic                  idle_o,
  // clients
  input  logic [NPORTS-1:0]     req_valid_i,
  input  dreq_t [NPORTS-1:0]    req_i,
  output logic [NPORTS-1:0]     gnt_o,
  output logic [NPORTS-1:0]     rsp_valid_o,
  output logic [XLEN-1:0]       rsp_rdata_o,
  // L2
  output logic                  l2_req_valid_o,
  input  logic                  l2_req_ready_i,
  output l2_req_t               l2_req_o,
  input  logic                  l2_rsp_valid_i,
  input  logic [LINE_W-1:0]     l2_rsp_data_i,
  // events, for performance counting
  output logic                  hit_o,
  output logic                  miss_o,
  output logic                  wbuf_full_o
);
  localparam int unsigned SETS  = SIZE_BYTES / (WAYS * LINE_BYTES);
  localparam int unsigned IW    = $clog2(SETS);
  localparam int unsigned TAG_W = PA_W - IW - OFFSET_W;
  localparam int unsigned TE_W  = TAG_W + 1;            // valid + tag
  localparam int unsigned WW    = (WAYS > 1) ? $clog2(WAYS) : 1;
  localparam int unsigned PW    = (NPORTS > 1) ? $clog2(NPORTS) : 1;

  typedef enum logic [2:0] {S_IDLE, S_LOOKUP, S_WAIT_WB, S_REFILL_REQ, S_REFILL_WAIT, S_FLUSH} state_e;
  state_e state_q, state_d;

  dreq_t           req_q, req_d;
  logic [PW-1:0]   port_q, port_d;
  logic [IW-1:0]   fcnt_q, fcnt_d;

  // SRAMs
  logic                  tag_req, tag_we, dat_req, dat_we;
  logic [IW-1:0]         tag_addr, dat_addr;
  logic [WAYS*TE_W-1:0]  tag_wdata, tag_wmask, tag_rdata;
  logic [WAYS*LINE_W-1:0] dat_wdata, dat_wmask, dat_rdata;

  sram_sp #(.WIDTH(WAYS*TE_W), .DEPTH(SETS)) u_tag_sram (
    .clk_i, .req_i(tag_req), .we_i(tag_we), .addr_i(tag_addr),
    .wdata_i(tag_wdata), .wmask_i(tag_wmask), .rdata_o(tag_rdata));
  sram_sp #(.WIDTH(WAYS*LINE_W), .DEPTH(SETS)) u_data_sram (
    .clk_i, .req_i(dat_req), .we_i(dat_we), .addr_i(dat_addr),
    .wdata_i(dat_wdata), .wmask_i(dat_wmask), .rdata_o(dat_rdata));

  // arbitration
  logic [NPORTS-1:0] arb_req, arb_gnt;
  logic [PW-1:0]     arb_idx;
  logic              arb_en;
  logic              wb_full, wb_empty, wb_valid, wb_push, wb_pop;
  wbuf_entry_t       wb_head;

  always_comb begin
    for (int i = 0; i < NPORTS; i++) arb_req[i] = req_valid_i[i] && !(req_i[i].we && wb_full);
  end
  assign arb_en = (state_q == S_IDLE) && !flush_i;

  rr_arbiter #(.N(NPORTS)) u_arb (
    .clk_i, .rst_ni, .en_i(arb_en), .flush_i(flush_arb_i),
    .req_i(arb_req), .gnt_o(arb_gnt), .idx_o(arb_idx));
  assign gnt_o = arb_gnt;

  // replacement LFSR
  logic [7:0] lfsr;
  logic       lfsr_en;
  lfsr8 u_lfsr (.clk_i, .rst_ni, .en_i(lfsr_en), .flush_i(flush_lfsr_i), .state_o(lfsr));

  // write buffer
  write_buffer #(.DEPTH(WBUF_DEPTH)) u_wbuf (
    .clk_i, .rst_ni,
    .push_i(wb_push), .entry_i('{addr: req_q.addr, wdata: req_q.wdata, be: req_q.be}),
    .full_o(wb_full), .valid_o(wb_valid), .head_o(wb_head), .pop_i(wb_pop),
    .empty_o(wb_empty), .count_o());
  assign wbuf_full_o = wb_full;

  // tag compare
  logic [IW-1:0]    req_idx;
  logic [TAG_W-1:0] req_tag;
  logic [WAYS-1:0]  way_hit, way_valid;
  logic             hit;
  logic [WW-1:0]    hit_way, victim_way;
  logic             have_inv;
  logic [WW-1:0]    inv_way;

  assign req_idx = req_q.addr[OFFSET_W +: IW];
  assign req_tag = req_q.addr[OFFSET_W + IW +: TAG_W];

  always_comb begin
    hit      = 1'b0;
    hit_way  = '0;
    have_inv = 1'b0;
    inv_way  = '0;
    for (int w = 0; w < WAYS; w++) begin
      way_valid[w] = tag_rdata[w*TE_W + TAG_W];
      way_hit[w]   = way_valid[w] && (tag_rdata[w*TE_W +: TAG_W] == req_tag);
      if (way_hit[w] && !hit) begin
        hit     = 1'b1;
        hit_way = WW'(w);
      end
      if (!way_valid[w] && !have_inv) begin
        have_inv = 1'b1;
        inv_way  = WW'(w);
      end
    end
    victim_way = have_inv ? inv_way : lfsr[WW-1:0];
  end

  // main state machine
  always_comb begin
    state_d        = state_q;
    req_d          = req_q;
    port_d         = port_q;
    fcnt_d         = fcnt_q;
    tag_req        = 1'b0;
    tag_we         = 1'b0;
    tag_addr       = req_idx;
    tag_wdata      = '0;
    tag_wmask      = '0;
    dat_req        = 1'b0;
    dat_we         = 1'b0;
    dat_addr       = req_idx;
    dat_wdata      = '0;
    dat_wmask      = '0;
    rsp_valid_o    = '0;
    rsp_rdata_o    = '0;
    wb_push        = 1'b0;
    wb_pop         = 1'b0;
    lfsr_en        = 1'b0;
    hit_o          = 1'b0;
    miss_o         = 1'b0;
    // L2 port: write-buffer drain unless a refill owns it
    l2_req_valid_o = wb_valid;
    l2_req_o       = '{we: 1'b1, addr: wb_head.addr, wdata: wb_head.wdata, be: wb_head.be};
    wb_pop         = wb_valid && l2_req_ready_i;

    unique case (state_q)
      S_IDLE: begin
        if (flush_i) begin
          state_d = S_FLUSH;
          fcnt_d  = '0;
        end else if (|arb_gnt) begin
          req_d    = req_i[arb_idx];
          port_d   = arb_idx;
          tag_req  = 1'b1;
          dat_req  = 1'b1;
          tag_addr = req_i[arb_idx].addr[OFFSET_W +: IW];
          dat_addr = req_i[arb_idx].addr[OFFSET_W +: IW];
          state_d  = S_LOOKUP;
        end
      end
      S_LOOKUP: begin
        if (req_q.we) begin
          wb_push             = 1'b1;
          rsp_valid_o[port_q] = 1'b1;
          hit_o               = hit;
          miss_o              = !hit;
          if (hit) begin
            dat_req = 1'b1;
            dat_we  = 1'b1;
            for (int b = 0; b < 8; b++) begin
              dat_wmask[int'(hit_way)*LINE_W + int'(req_q.addr[3])*64 + b*8 +: 8] = {8{req_q.be[b]}};
            end
            dat_wdata = {WAYS*(LINE_W/XLEN){req_q.wdata}};
          end
          state_d = S_IDLE;
        end else if (hit) begin
          hit_o               = 1'b1;
          rsp_valid_o[port_q] = 1'b1;
          rsp_rdata_o         = dat_rdata[int'(hit_way)*LINE_W + int'(req_q.addr[3])*64 +: 64];
          state_d             = S_IDLE;
        end else begin
          miss_o  = 1'b1;
          state_d = S_WAIT_WB;
        end
      end
      S_WAIT_WB: if (wb_empty) state_d = S_REFILL_REQ;
      S_REFILL_REQ: begin
        l2_req_valid_o = 1'b1;
        l2_req_o       = '{we: 1'b0, addr: {req_q.addr[PA_W-1:OFFSET_W], {OFFSET_W{1'b0}}}, wdata: '0, be: '0};
        wb_pop         = 1'b0;
        if (l2_req_ready_i) state_d = S_REFILL_WAIT;
      end
      S_REFILL_WAIT: begin
        l2_req_valid_o = 1'b0;
        wb_pop         = 1'b0;
        if (l2_rsp_valid_i) begin
          tag_req   = 1'b1;
          tag_we    = 1'b1;
          tag_wmask[int'(victim_way)*TE_W +: TE_W] = '1;
          tag_wdata = {WAYS{1'b1, req_tag}};
          dat_req   = 1'b1;
          dat_we    = 1'b1;
          dat_wmask[int'(victim_way)*LINE_W +: LINE_W] = '1;
          dat_wdata = {WAYS{l2_rsp_data_i}};
          lfsr_en   = 1'b1;
          rsp_valid_o[port_q] = 1'b1;
          rsp_rdata_o         = l2_rsp_data_i[int'(req_q.addr[3])*64 +: 64];
          state_d   = S_IDLE;
        end
      end
      S_FLUSH: begin
        tag_req   = 1'b1;
        tag_we    = 1'b1;
        tag_addr  = fcnt_q;
        tag_wmask = '1;
        tag_wdata = '0;
        fcnt_d    = fcnt_q + IW'(1);
        if (int'(fcnt_q) == SETS - 1) state_d = S_IDLE;
      end
      default: state_d = S_IDLE;
    endcase
  end

  assign flush_busy_o = (state_q == S_FLUSH);
  assign idle_o       = (state_q == S_IDLE) && wb_empty;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q <= S_FLUSH;   // clear the valid bits after reset
      req_q   <= '0;
      port_q  <= '0;
      fcnt_q  <= '0;
    end else begin
      state_q <= state_d;
      req_q   <= req_d;
      port_q  <= port_d;
      fcnt_q  <= fcnt_d;
    end
  end

  a_refill_read: assert property (@(posedge clk_i) disable iff (!rst_ni)
    (state_q == S_REFILL_REQ) |-> !l2_req_o.we);
endmodule
