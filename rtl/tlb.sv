// tlb: single-level, unified, fully associative TLB with pseudo-LRU
// replacement, as in the evaluated core (16 entries).
//
// Each entry caches one SV39 translation: a 27-bit virtual page number, the
// 16-bit address-space identifier, the 44-bit physical page number, the page
// size (4 KiB, 2 MiB or 1 GiB) and the 8 PTE flag bits. A lookup compares
// all entries at once; superpages ignore the lower VPN fields and take those
// bits of the result from the virtual address. Refills from the page-table
// walker replace the first invalid entry, or else the pseudo-LRU victim.
// Lookups that hit and refills mark the entry as recently used.
//
// Follows the paper: size, full associativity, pseudo-LRU, and that fence.t
// clears the valid bits (first-order state, flush_i) and resets the
// pseudo-LRU tree (second-order state, flush_plru_i). Entry format, ASID
// matching and refill policy are this design's choices.
//
// Interface: lookup is combinational (lu_valid_i, lu_vpn_i, lu_asid_i ->
// lu_hit_o, lu_ppn_o, lu_flags_o); the pseudo-LRU update of a hit is
// registered. upd_valid_i writes a new entry at the next clock edge.
module tlb
  import tp_pkg::*;
#(
  parameter int unsigned ENTRIES = 16,
  parameter int unsigned ASID_W  = 16
) (
  input  logic              clk_i,
  input  logic              rst_ni,
  input  logic              flush_i,
  input  logic              flush_plru_i,
  // lookup
  input  logic              lu_valid_i,
  input  logic [26:0]       lu_vpn_i,
  input  logic [ASID_W-1:0] lu_asid_i,
  output logic              lu_hit_o,
  output logic [43:0]       lu_ppn_o,
  output logic [7:0]        lu_flags_o,
  // refill from the page-table walker
  input  logic              upd_valid_i,
  input  logic [26:0]       upd_vpn_i,
  input  logic [ASID_W-1:0] upd_asid_i,
  input  logic [43:0]       upd_ppn_i,
  input  logic              upd_is_2m_i,
  input  logic              upd_is_1g_i,
  input  logic [7:0]        upd_flags_i
);
  localparam int unsigned IW = $clog2(ENTRIES);

  typedef struct packed {
    logic [26:0]       vpn;
    logic [ASID_W-1:0] asid;
    logic [43:0]       ppn;
    logic              is_2m;
    logic              is_1g;
    logic [7:0]        flags;
  } tlb_entry_t;

  tlb_entry_t         ent_q [ENTRIES];
  logic [ENTRIES-1:0] valid_q;
  logic [IW-1:0]      hit_idx, victim_plru, victim, touch_idx;
  logic               touch, have_free;
  logic [IW-1:0]      free_idx;

  // lookup
  always_comb begin
    logic m;
    lu_hit_o   = 1'b0;
    hit_idx    = '0;
    lu_ppn_o   = '0;
    lu_flags_o = '0;
    for (int i = 0; i < ENTRIES; i++) begin
      m = valid_q[i] && (ent_q[i].asid == lu_asid_i) &&
          (ent_q[i].vpn[26:18] == lu_vpn_i[26:18]) &&
          (ent_q[i].is_1g || ent_q[i].vpn[17:9] == lu_vpn_i[17:9]) &&
          (ent_q[i].is_1g || ent_q[i].is_2m || ent_q[i].vpn[8:0] == lu_vpn_i[8:0]);
      if (lu_valid_i && m && !lu_hit_o) begin
        lu_hit_o   = 1'b1;
        hit_idx    = IW'(i);
        lu_flags_o = ent_q[i].flags;
        lu_ppn_o   = ent_q[i].ppn;
        if (ent_q[i].is_1g)      lu_ppn_o[17:0] = lu_vpn_i[17:0];
        else if (ent_q[i].is_2m) lu_ppn_o[8:0]  = lu_vpn_i[8:0];
      end
    end
  end

  // replacement
  always_comb begin
    have_free = 1'b0;
    free_idx  = '0;
    for (int i = 0; i < ENTRIES; i++) begin
      if (!valid_q[i] && !have_free) begin
        have_free = 1'b1;
        free_idx  = IW'(i);
      end
    end
    victim    = have_free ? free_idx : victim_plru;
    touch     = upd_valid_i || lu_hit_o;
    touch_idx = upd_valid_i ? victim : hit_idx;
  end

  plru_tree #(.N(ENTRIES)) u_plru (
    .clk_i, .rst_ni,
    .flush_i     (flush_plru_i),
    .touch_i     (touch),
    .touch_idx_i (touch_idx),
    .victim_o    (victim_plru)
  );

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      valid_q <= '0;
      for (int i = 0; i < ENTRIES; i++) ent_q[i] <= '0;
    end else if (flush_i) begin
      valid_q <= '0;
    end else if (upd_valid_i) begin
      valid_q[victim] <= 1'b1;
      ent_q[victim]   <= '{vpn: upd_vpn_i, asid: upd_asid_i, ppn: upd_ppn_i,
                           is_2m: upd_is_2m_i, is_1g: upd_is_1g_i, flags: upd_flags_i};
    end
  end
endmodule
