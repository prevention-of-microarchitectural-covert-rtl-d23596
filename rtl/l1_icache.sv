// l1_icache: set-associative L1 instruction cache with a flush that fence.t
// can trigger.
//
// Evaluated configuration (the paper's, and the defaults): 16 KiB, 4 ways,
// 16-byte lines, hence 256 sets; pseudo-random victim selection driven by an
// 8-bit LFSR; line refills from the L2.
//
// Operation. A fetch request is accepted in IDLE (req_ready_o) and reads the
// set from the tag SRAM (valid bit and tag of every way) and the data SRAM.
// One cycle later the tags are compared: on a hit the aligned 64-bit fetch
// word is returned; on a miss the line is requested from the L2 and, on its
// return, written into the first invalid way, or else into the way the LFSR
// picks, and the fetch word is returned.
//
// Flush. As in the paper, valid bits share the one-set-per-cycle tag SRAM,
// so flush_i clears them set by set in 256 cycles (flush_busy_o high).
// flush_lfsr_i resets the replacement LFSR in one cycle.
//
// Own choices where the paper is silent: fetch width (64 bits), the state
// machine, 2-cycle hit latency, invalid-way-first victim choice and
// physical indexing. The L2 request carries only a line address: reads are
// all the I-cache issues, and the low four bits of l2_req_addr_o are always
// zero because refills are whole 16-byte lines.
module l1_icache
  import tp_pkg::*;
#(
  parameter int unsigned SIZE_BYTES = 16384,
  parameter int unsigned WAYS       = 4
) (
  input  logic              clk_i,
  input  logic              rst_ni,
  input  logic              flush_i,
  input  logic              flush_lfsr_i,
  output logic              flush_busy_o,
  // fetch
  input  logic              req_valid_i,
  output logic              req_ready_o,
  input  logic [PA_W-1:0]   req_addr_i,
  output logic              rsp_valid_o,
  output logic [XLEN-1:0]   rsp_data_o,
  // L2: line reads only, addressed by a line-aligned address
  output logic              l2_req_valid_o,
  input  logic              l2_req_ready_i,
  output logic [PA_W-1:0]   l2_req_addr_o,
  input  logic              l2_rsp_valid_i,
  input  logic [LINE_W-1:0] l2_rsp_data_i,
  // events
  output logic              hit_o,
  output logic              miss_o
);
  localparam int unsigned SETS  = SIZE_BYTES / (WAYS * LINE_BYTES);
  localparam int unsigned IW    = $clog2(SETS);
  localparam int unsigned TAG_W = PA_W - IW - OFFSET_W;
  localparam int unsigned TE_W  = TAG_W + 1;
  localparam int unsigned WW    = (WAYS > 1) ? $clog2(WAYS) : 1;

  typedef enum logic [2:0] {S_IDLE, S_LOOKUP, S_REFILL_REQ, S_REFILL_WAIT, S_FLUSH} state_e;
  state_e state_q, state_d;

  logic [PA_W-1:0] addr_q, addr_d;
  logic [IW-1:0]   fcnt_q, fcnt_d;

  logic                   tag_req, tag_we, dat_req, dat_we;
  logic [IW-1:0]          tag_addr, dat_addr;
  logic [WAYS*TE_W-1:0]   tag_wdata, tag_wmask, tag_rdata;
  logic [WAYS*LINE_W-1:0] dat_wdata, dat_wmask, dat_rdata;

  sram_sp #(.WIDTH(WAYS*TE_W), .DEPTH(SETS)) u_tag_sram (
    .clk_i, .req_i(tag_req), .we_i(tag_we), .addr_i(tag_addr),
    .wdata_i(tag_wdata), .wmask_i(tag_wmask), .rdata_o(tag_rdata));
  sram_sp #(.WIDTH(WAYS*LINE_W), .DEPTH(SETS)) u_data_sram (
    .clk_i, .req_i(dat_req), .we_i(dat_we), .addr_i(dat_addr),
    .wdata_i(dat_wdata), .wmask_i(dat_wmask), .rdata_o(dat_rdata));

  logic [7:0] lfsr;
  logic       lfsr_en;
  lfsr8 u_lfsr (.clk_i, .rst_ni, .en_i(lfsr_en), .flush_i(flush_lfsr_i), .state_o(lfsr));

  logic [IW-1:0]    req_idx;
  logic [TAG_W-1:0] req_tag;
  logic             hit, have_inv;
  logic [WW-1:0]    hit_way, inv_way, victim_way;

  assign req_idx = addr_q[OFFSET_W +: IW];
  assign req_tag = addr_q[OFFSET_W + IW +: TAG_W];

  always_comb begin
    hit      = 1'b0;
    hit_way  = '0;
    have_inv = 1'b0;
    inv_way  = '0;
    for (int w = 0; w < WAYS; w++) begin
      if (tag_rdata[w*TE_W + TAG_W] && tag_rdata[w*TE_W +: TAG_W] == req_tag && !hit) begin
        hit     = 1'b1;
        hit_way = WW'(w);
      end
      if (!tag_rdata[w*TE_W + TAG_W] && !have_inv) begin
        have_inv = 1'b1;
        inv_way  = WW'(w);
      end
    end
    victim_way = have_inv ? inv_way : lfsr[WW-1:0];
  end

  assign req_ready_o = (state_q == S_IDLE) && !flush_i;

  always_comb begin
    state_d        = state_q;
    addr_d         = addr_q;
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
    rsp_valid_o    = 1'b0;
    rsp_data_o     = '0;
    l2_req_valid_o = 1'b0;
    l2_req_addr_o  = {addr_q[PA_W-1:OFFSET_W], {OFFSET_W{1'b0}}};
    lfsr_en        = 1'b0;
    hit_o          = 1'b0;
    miss_o         = 1'b0;
    unique case (state_q)
      S_IDLE: begin
        if (flush_i) begin
          state_d = S_FLUSH;
          fcnt_d  = '0;
        end else if (req_valid_i) begin
          addr_d   = req_addr_i;
          tag_req  = 1'b1;
          dat_req  = 1'b1;
          tag_addr = req_addr_i[OFFSET_W +: IW];
          dat_addr = req_addr_i[OFFSET_W +: IW];
          state_d  = S_LOOKUP;
        end
      end
      S_LOOKUP: begin
        if (hit) begin
          hit_o       = 1'b1;
          rsp_valid_o = 1'b1;
          rsp_data_o  = dat_rdata[int'(hit_way)*LINE_W + int'(addr_q[3])*64 +: 64];
          state_d     = S_IDLE;
        end else begin
          miss_o  = 1'b1;
          state_d = S_REFILL_REQ;
        end
      end
      S_REFILL_REQ: begin
        l2_req_valid_o = 1'b1;
        if (l2_req_ready_i) state_d = S_REFILL_WAIT;
      end
      S_REFILL_WAIT: if (l2_rsp_valid_i) begin
        tag_req   = 1'b1;
        tag_we    = 1'b1;
        tag_wmask[int'(victim_way)*TE_W +: TE_W] = '1;
        tag_wdata = {WAYS{1'b1, req_tag}};
        dat_req   = 1'b1;
        dat_we    = 1'b1;
        dat_wmask[int'(victim_way)*LINE_W +: LINE_W] = '1;
        dat_wdata = {WAYS{l2_rsp_data_i}};
        lfsr_en   = 1'b1;
        rsp_valid_o = 1'b1;
        rsp_data_o  = l2_rsp_data_i[int'(addr_q[3])*64 +: 64];
        state_d   = S_IDLE;
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

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q <= S_FLUSH;   // clear the valid bits after reset
      addr_q  <= '0;
      fcnt_q  <= '0;
    end else begin
      state_q <= state_d;
      addr_q  <= addr_d;
      fcnt_q  <= fcnt_d;
    end
  end
endmodule
