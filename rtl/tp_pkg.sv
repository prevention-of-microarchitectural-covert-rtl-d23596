// tp_pkg: types and constants shared by the temporal-fence (fence.t) hardware.
//
// The fence.t encoding follows the paper: a U-type instruction on the
// custom-0 major opcode (0001011), rd = 00000, and a 20-bit select bitmap in
// bits 31:12 that chooses which on-core state is flushed. Which bit selects
// which component is not given by the paper; the assignment below is this
// design's own. First-order state (valid bits, predictor counters) and
// second-order state (replacement LFSRs, the L1-D round-robin arbiter and
// the TLB pseudo-LRU tree) have separate bits, so both the "first attempt"
// and the complete ("improved") fence can be requested.
//
// Address and line geometry follow the evaluated configuration: SV39
// (56-bit physical addresses) and 16-byte cache lines.
package tp_pkg;

  // ---- fence.t encoding ----
  localparam logic [6:0] OPCODE_CUSTOM0 = 7'b0001011;
  localparam int unsigned SELECT_W = 20;

  // Select bitmap bit positions (own assignment).
  localparam int unsigned SEL_DCACHE = 0;  // L1-D valid bits
  localparam int unsigned SEL_ICACHE = 1;  // L1-I valid bits
  localparam int unsigned SEL_TLB    = 2;  // TLB valid bits
  localparam int unsigned SEL_BHT    = 3;  // BHT counters
  localparam int unsigned SEL_BTB    = 4;  // BTB entries
  localparam int unsigned SEL_LFSR   = 5;  // L1-D and L1-I replacement LFSRs
  localparam int unsigned SEL_ARB    = 6;  // L1-D round-robin arbiter
  localparam int unsigned SEL_PLRU   = 7;  // TLB pseudo-LRU tree

  // ---- memory geometry ----
  localparam int unsigned PA_W      = 56;   // SV39 physical address
  localparam int unsigned XLEN      = 64;
  localparam int unsigned LINE_BYTES = 16;
  localparam int unsigned LINE_W    = LINE_BYTES * 8;
  localparam int unsigned OFFSET_W  = $clog2(LINE_BYTES);

  // One flush request for every flushable component, as broadcast by the
  // fence controller. Each field is a single-cycle pulse.
  typedef struct packed {
    logic dcache;
    logic icache;
    logic tlb;
    logic bht;
    logic btb;
    logic lfsr;
    logic arb;
    logic plru;
  } flush_req_t;

  // Request from one of the L1-D's clients (load unit, store unit, PTW).
  typedef struct packed {
    logic            we;
    logic [PA_W-1:0] addr;
    logic [XLEN-1:0] wdata;
    logic [7:0]      be;
  } dreq_t;

  // Request from an L1 cache to the L2. Reads fetch a whole line (addr is
  // line aligned), writes carry one 64-bit word with byte enables.
  typedef struct packed {
    logic            we;
    logic [PA_W-1:0] addr;
    logic [XLEN-1:0] wdata;
    logic [7:0]      be;
  } l2_req_t;

  // One write-buffer entry.
  typedef struct packed {
    logic [PA_W-1:0] addr;
    logic [XLEN-1:0] wdata;
    logic [7:0]      be;
  } wbuf_entry_t;

endpackage
