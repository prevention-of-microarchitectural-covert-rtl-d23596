// tp_core: the flushable on-core state of the evaluated 64-bit RISC-V core,
// together with the temporal fence (fence.t) that resets it.
//
// This is the top of the design. It holds every on-core component whose
// history-dependent state can carry a microarchitectural timing channel
// between security domains that time-share the core, and the controller
// that clears that state when the operating system executes fence.t:
//   - flush_ctrl  decodes committed instructions and sequences the fence;
//   - l1_dcache   32 KiB, 8-way, write-through, with its round-robin port
//                 arbiter, replacement LFSR and 40-entry write buffer;
//   - l1_icache   16 KiB, 4-way, with its replacement LFSR;
//   - tlb         16-entry fully associative TLB with a pseudo-LRU tree;
//   - bht, btb    64-entry branch history table, 16-entry target buffer.
// The rest of the core (fetch, decode, issue, execute, commit stages and
// the page-table walker) and the L2 cache are outside this module: their
// connections are the ports below. The commit stage reports each committed
// instruction; the fetch stage, the load unit, store unit and page-table
// walker, and the branch predictor's users connect to the caches, the TLB,
// the BHT and the BTB; the two L2 ports (data side and instruction side)
// go to the shared L2.
//
// Timing of a fence: in the commit cycle of fence.t, flush_pipeline_o asks
// the core to squash all younger instructions and fence_stall_o holds it.
// Once the L1-D is idle and its write buffer empty, every component picked
// by the select bitmap receives a one-cycle flush pulse; the caches then
// clear their valid bits, one set per cycle (256 cycles). fence_done_o
// pulses when all is clean, 259 cycles after the commit cycle when both L1
// caches are flushed and no stores are pending.
module tp_core
  import tp_pkg::*;
#(
  parameter int unsigned DCACHE_BYTES = 32768,
  parameter int unsigned DCACHE_WAYS  = 8,
  parameter int unsigned ICACHE_BYTES = 16384,
  parameter int unsigned ICACHE_WAYS  = 4,
  parameter int unsigned WBUF_DEPTH   = 40,
  parameter int unsigned TLB_ENTRIES  = 16,
  parameter int unsigned BHT_ENTRIES  = 64,
  parameter int unsigned BTB_ENTRIES  = 16
) (
  input  logic              clk_i,
  input  logic              rst_ni,
  // commit stage
  input  logic              commit_valid_i,
  input  logic [31:0]       commit_instr_i,
  output logic              flush_pipeline_o,
  output logic              fence_stall_o,
  output logic              fence_done_o,
  // instruction fetch
  input  logic              if_req_valid_i,
  output logic              if_req_ready_o,
  input  logic [PA_W-1:0]   if_req_addr_i,
  output logic              if_rsp_valid_o,
  output logic [XLEN-1:0]   if_rsp_data_o,
  // L1-D clients: 0 load unit, 1 store unit, 2 page-table walker
  input  logic [2:0]        dc_req_valid_i,
  input  dreq_t [2:0]       dc_req_i,
  output logic [2:0]        dc_gnt_o,
  output logic [2:0]        dc_rsp_valid_o,
  output logic [XLEN-1:0]   dc_rsp_rdata_o,
  // L2, data side
  output logic              dl2_req_valid_o,
  input  logic              dl2_req_ready_i,
  output l2_req_t           dl2_req_o,
  input  logic              dl2_rsp_valid_i,
  input  logic [LINE_W-1:0] dl2_rsp_data_i,
  // L2, instruction side
  output logic              il2_req_valid_o,
  input  logic              il2_req_ready_i,
  output logic [PA_W-1:0]   il2_req_addr_o,
  input  logic              il2_rsp_valid_i,
  input  logic [LINE_W-1:0] il2_rsp_data_i,
  // TLB lookup and refill
  input  logic              tlb_lu_valid_i,
  input  logic [26:0]       tlb_lu_vpn_i,
  input  logic [15:0]       tlb_lu_asid_i,
  output logic              tlb_lu_hit_o,
  output logic [43:0]       tlb_lu_ppn_o,
  output logic [7:0]        tlb_lu_flags_o,
  input  logic              tlb_upd_valid_i,
  input  logic [26:0]       tlb_upd_vpn_i,
  input  logic [15:0]       tlb_upd_asid_i,
  input  logic [43:0]       tlb_upd_ppn_i,
  input  logic              tlb_upd_is_2m_i,
  input  logic              tlb_upd_is_1g_i,
  input  logic [7:0]        tlb_upd_flags_i,
  // branch prediction
  input  logic [XLEN-1:0]   bp_pc_i,
  output logic              bht_valid_o,
  output logic              bht_taken_o,
  output logic              btb_valid_o,
  output logic [XLEN-1:0]   btb_target_o,
  input  logic              bht_upd_valid_i,
  input  logic [XLEN-1:0]   bht_upd_pc_i,
  input  logic              bht_upd_taken_i,
  input  logic              btb_upd_valid_i,
  input  logic [XLEN-1:0]   btb_upd_pc_i,
  input  logic [XLEN-1:0]   btb_upd_target_i,
  // events
  output logic              dc_hit_o,
  output logic              dc_miss_o,
  output logic              ic_hit_o,
  output logic              ic_miss_o,
  output logic              wbuf_full_o
);
  flush_req_t flush;
  logic       dc_idle, dc_busy, ic_busy;

  flush_ctrl u_ctrl (
    .clk_i, .rst_ni,
    .commit_valid_i, .commit_instr_i,
    .dcache_idle_i    (dc_idle),
    .dcache_busy_i    (dc_busy),
    .icache_busy_i    (ic_busy),
    .flush_pipeline_o,
    .stall_o          (fence_stall_o),
    .flush_o          (flush),
    .done_o           (fence_done_o)
  );

  l1_dcache #(.SIZE_BYTES(DCACHE_BYTES), .WAYS(DCACHE_WAYS), .NPORTS(3), .WBUF_DEPTH(WBUF_DEPTH)) u_dcache (
    .clk_i, .rst_ni,
    .flush_i        (flush.dcache),
    .flush_lfsr_i   (flush.lfsr),
    .flush_arb_i    (flush.arb),
    .flush_busy_o   (dc_busy),
    .idle_o         (dc_idle),
    .req_valid_i    (dc_req_valid_i),
    .req_i          (dc_req_i),
    .gnt_o          (dc_gnt_o),
    .rsp_valid_o    (dc_rsp_valid_o),
    .rsp_rdata_o    (dc_rsp_rdata_o),
    .l2_req_valid_o (dl2_req_valid_o),
    .l2_req_ready_i (dl2_req_ready_i),
    .l2_req_o       (dl2_req_o),
    .l2_rsp_valid_i (dl2_rsp_valid_i),
    .l2_rsp_data_i  (dl2_rsp_data_i),
    .hit_o          (dc_hit_o),
    .miss_o         (dc_miss_o),
    .wbuf_full_o
  );

  l1_icache #(.SIZE_BYTES(ICACHE_BYTES), .WAYS(ICACHE_WAYS)) u_icache (
    .clk_i, .rst_ni,
    .flush_i        (flush.icache),
    .flush_lfsr_i   (flush.lfsr),
    .flush_busy_o   (ic_busy),
    .req_valid_i    (if_req_valid_i),
    .req_ready_o    (if_req_ready_o),
    .req_addr_i     (if_req_addr_i),
    .rsp_valid_o    (if_rsp_valid_o),
    .rsp_data_o     (if_rsp_data_o),
    .l2_req_valid_o (il2_req_valid_o),
    .l2_req_ready_i (il2_req_ready_i),
    .l2_req_addr_o  (il2_req_addr_o),
    .l2_rsp_valid_i (il2_rsp_valid_i),
    .l2_rsp_data_i  (il2_rsp_data_i),
    .hit_o          (ic_hit_o),
    .miss_o         (ic_miss_o)
  );

  tlb #(.ENTRIES(TLB_ENTRIES), .ASID_W(16)) u_tlb (
    .clk_i, .rst_ni,
    .flush_i      (flush.tlb),
    .flush_plru_i (flush.plru),
    .lu_valid_i   (tlb_lu_valid_i),
    .lu_vpn_i     (tlb_lu_vpn_i),
    .lu_asid_i    (tlb_lu_asid_i),
    .lu_hit_o     (tlb_lu_hit_o),
    .lu_ppn_o     (tlb_lu_ppn_o),
    .lu_flags_o   (tlb_lu_flags_o),
    .upd_valid_i  (tlb_upd_valid_i),
    .upd_vpn_i    (tlb_upd_vpn_i),
    .upd_asid_i   (tlb_upd_asid_i),
    .upd_ppn_i    (tlb_upd_ppn_i),
    .upd_is_2m_i  (tlb_upd_is_2m_i),
    .upd_is_1g_i  (tlb_upd_is_1g_i),
    .upd_flags_i  (tlb_upd_flags_i)
  );

  bht #(.ENTRIES(BHT_ENTRIES), .VLEN(XLEN)) u_bht (
    .clk_i, .rst_ni,
    .flush_i      (flush.bht),
    .pc_i         (bp_pc_i),
    .pred_valid_o (bht_valid_o),
    .pred_taken_o (bht_taken_o),
    .upd_valid_i  (bht_upd_valid_i),
    .upd_pc_i     (bht_upd_pc_i),
    .upd_taken_i  (bht_upd_taken_i)
  );

  btb #(.ENTRIES(BTB_ENTRIES), .VLEN(XLEN)) u_btb (
    .clk_i, .rst_ni,
    .flush_i       (flush.btb),
    .pc_i          (bp_pc_i),
    .pred_valid_o  (btb_valid_o),
    .pred_target_o (btb_target_o),
    .upd_valid_i   (btb_upd_valid_i),
    .upd_pc_i      (btb_upd_pc_i),
    .upd_target_i  (btb_upd_target_i)
  );
endmodule
