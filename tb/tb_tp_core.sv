// tb_tp_core: end-to-end test of the whole design at its default (full)
// size, with a behavioural L2 on both L2 ports.
//
// It first exercises every mechanism of the on-core state (L1-I and L1-D
// hits and misses, concurrent L1-D clients, write-buffer full stall, TLB
// hits, misses, superpages and pseudo-LRU eviction, BHT and BTB training)
// and then the temporal fence:
//   - a partial fence.t (BHT only) clears the BHT and leaves the rest, and
//     takes 3 cycles;
//   - a full fence.t squashes the pipeline, waits for pending stores to
//     drain, flushes everything in 259 cycles plus the drain, and leaves all
//     of it cold: the next access to each structure misses.
// Finally it replays the paper's prime-and-probe covert channel on the L1-D:
// a spy primes 64 lines, a trojan touches s conflicting lines to encode a
// secret s, and the spy times its probe of the 64 lines. Without a fence the
// probe time depends on s (a channel); with a full fence.t at the domain
// switch it is the same for every s (no channel).
// Each mechanism is counted; one that never happened counts as a failure.
module tb_tp_core;
  import tp_pkg::*;
  logic clk = 0, rst_n = 0;
  logic commit_valid = 0;
  logic [31:0] commit_instr = 0;
  logic flush_pipe, fstall, fdone;
  logic if_v = 0, if_rdy, if_rv;
  logic [PA_W-1:0] if_a = 0;
  logic [63:0] if_d;
  logic [2:0] dc_v = 0, dc_gnt, dc_rv;
  dreq_t [2:0] dc_req;
  logic [63:0] dc_rd;
  logic dl2_v, dl2_rdy, dl2_rv, il2_v, il2_rdy, il2_rv, l2_stall = 0;
  l2_req_t dl2_req, il2_req;
  logic [PA_W-1:0] il2_addr;
  assign il2_req = '{we: 1'b0, addr: il2_addr, wdata: '0, be: '0};
  logic [127:0] dl2_rd, il2_rd;
  logic tlb_lv = 0, tlb_hit, tlb_uv = 0, tlb_2m = 0, tlb_1g = 0;
  logic [26:0] tlb_lvpn = 0, tlb_uvpn = 0;
  logic [15:0] tlb_lasid = 0, tlb_uasid = 0;
  logic [43:0] tlb_ppn, tlb_uppn = 0;
  logic [7:0] tlb_flags, tlb_uflags = 0;
  logic [63:0] bp_pc = 0, bht_upc = 0, btb_upc = 0, btb_utgt = 0, btb_tgt;
  logic bht_v, bht_t, btb_v, bht_uv = 0, bht_ut = 0, btb_uv = 0;
  logic dc_hit, dc_miss, ic_hit, ic_miss, wb_full;

  int checks = 0, failures = 0;
  typedef enum int {M_IC_HIT, M_IC_MISS, M_DC_HIT, M_DC_MISS, M_DC_STORE, M_ARB_CONTEND, M_WBUF_FULL,
                    M_TLB_HIT, M_TLB_MISS, M_TLB_EVICT, M_TLB_SUPERPAGE, M_BHT_PRED, M_BTB_PRED,
                    M_PIPE_FLUSH, M_FENCE_DRAIN, M_FENCE_FULL, M_FENCE_PARTIAL, M_CHANNEL_OPEN,
                    M_CHANNEL_CLOSED, M_COUNT} mech_e;
  int mech [M_COUNT];
  string mech_name [M_COUNT] = '{"icache hit", "icache miss", "dcache hit", "dcache miss", "dcache store",
    "arbiter contention", "write buffer full", "tlb hit", "tlb miss", "tlb plru eviction", "tlb superpage",
    "bht prediction", "btb prediction", "pipeline flush", "fence waits for drain", "full fence",
    "partial fence", "channel without fence", "channel closed by fence"};

  tp_core dut (
    .clk_i(clk), .rst_ni(rst_n),
    .commit_valid_i(commit_valid), .commit_instr_i(commit_instr),
    .flush_pipeline_o(flush_pipe), .fence_stall_o(fstall), .fence_done_o(fdone),
    .if_req_valid_i(if_v), .if_req_ready_o(if_rdy), .if_req_addr_i(if_a), .if_rsp_valid_o(if_rv), .if_rsp_data_o(if_d),
    .dc_req_valid_i(dc_v), .dc_req_i(dc_req), .dc_gnt_o(dc_gnt), .dc_rsp_valid_o(dc_rv), .dc_rsp_rdata_o(dc_rd),
    .dl2_req_valid_o(dl2_v), .dl2_req_ready_i(dl2_rdy), .dl2_req_o(dl2_req), .dl2_rsp_valid_i(dl2_rv), .dl2_rsp_data_i(dl2_rd),
    .il2_req_valid_o(il2_v), .il2_req_ready_i(il2_rdy), .il2_req_addr_o(il2_addr), .il2_rsp_valid_i(il2_rv), .il2_rsp_data_i(il2_rd),
    .tlb_lu_valid_i(tlb_lv), .tlb_lu_vpn_i(tlb_lvpn), .tlb_lu_asid_i(tlb_lasid), .tlb_lu_hit_o(tlb_hit),
    .tlb_lu_ppn_o(tlb_ppn), .tlb_lu_flags_o(tlb_flags),
    .tlb_upd_valid_i(tlb_uv), .tlb_upd_vpn_i(tlb_uvpn), .tlb_upd_asid_i(tlb_uasid), .tlb_upd_ppn_i(tlb_uppn),
    .tlb_upd_is_2m_i(tlb_2m), .tlb_upd_is_1g_i(tlb_1g), .tlb_upd_flags_i(tlb_uflags),
    .bp_pc_i(bp_pc), .bht_valid_o(bht_v), .bht_taken_o(bht_t), .btb_valid_o(btb_v), .btb_target_o(btb_tgt),
    .bht_upd_valid_i(bht_uv), .bht_upd_pc_i(bht_upc), .bht_upd_taken_i(bht_ut),
    .btb_upd_valid_i(btb_uv), .btb_upd_pc_i(btb_upc), .btb_upd_target_i(btb_utgt),
    .dc_hit_o(dc_hit), .dc_miss_o(dc_miss), .ic_hit_o(ic_hit), .ic_miss_o(ic_miss), .wbuf_full_o(wb_full));

  l2_mem_model #(.LAT(8)) u_dl2 (.clk_i(clk), .stall_i(l2_stall), .req_valid_i(dl2_v), .req_ready_o(dl2_rdy),
    .req_i(dl2_req), .rsp_valid_o(dl2_rv), .rsp_data_o(dl2_rd));
  l2_mem_model #(.LAT(8)) u_il2 (.clk_i(clk), .stall_i(1'b0), .req_valid_i(il2_v), .req_ready_o(il2_rdy),
    .req_i(il2_req), .rsp_valid_o(il2_rv), .rsp_data_o(il2_rd));

  always #5 clk = ~clk;

  always @(posedge clk) if (rst_n) begin
    mech[M_IC_HIT]   += int'(ic_hit);
    mech[M_IC_MISS]  += int'(ic_miss);
    mech[M_DC_HIT]   += int'(dc_hit);
    mech[M_DC_MISS]  += int'(dc_miss);
    mech[M_WBUF_FULL] += int'(wb_full);
    mech[M_PIPE_FLUSH] += int'(flush_pipe);
    if ($countones(dc_v) > 1 && |dc_gnt) mech[M_ARB_CONTEND]++;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  // ---------------- drivers ----------------
  task automatic fetch(input logic [PA_W-1:0] a, output bit was_hit);
    @(negedge clk);
    if_v = 1; if_a = a;
    #1;
    while (!if_rdy) begin @(negedge clk); #1; end
    @(negedge clk);
    if_v = 0;
    #1;
    was_hit = ic_hit;
    while (!if_rv) begin @(negedge clk); #1; end
    check(if_d == u_il2.read_word(a), $sformatf("fetch %h", a));
  endtask

  // L1-D access on port p; returns the number of cycles from request to answer
  task automatic daccess(input int p, input logic we, input logic [PA_W-1:0] a, input logic [63:0] wd,
                         output bit was_hit, output int cycles);
    logic [63:0] exp;
    cycles = 0;
    @(negedge clk);
    dc_req[p] = '{we: we, addr: a, wdata: wd, be: 8'hFF};
    dc_v[p] = 1;
    #1;
    while (!dc_gnt[p]) begin @(negedge clk); #1; cycles++; end
    exp = u_dl2.read_word(a);   // write-through: the L2 plus pending stores
    @(negedge clk);
    dc_v[p] = 0;
    #1;
    cycles++;
    was_hit = dc_hit;
    while (!dc_rv[p]) begin @(negedge clk); #1; cycles++; end
    if (we) mech[M_DC_STORE]++;
    else if (pending_none()) check(dc_rd == exp, $sformatf("load %h = %h exp %h", a, dc_rd, exp));
  endtask

  function automatic bit pending_none();
    return dut.u_dcache.u_wbuf.empty_o;
  endfunction

  task automatic tlb_fill(input logic [26:0] v, input logic [43:0] p, input logic g1);
    @(negedge clk);
    tlb_uv = 1; tlb_uvpn = v; tlb_uasid = 16'h1; tlb_uppn = p; tlb_1g = g1; tlb_uflags = 8'hCF;
    @(negedge clk);
    tlb_uv = 0; tlb_1g = 0;
  endtask

  task automatic tlb_look(input logic [26:0] v, output bit h, output logic [43:0] p);
    @(negedge clk);
    tlb_lv = 1; tlb_lvpn = v; tlb_lasid = 16'h1;
    #1;
    h = tlb_hit;
    p = tlb_ppn;
    if (h) mech[M_TLB_HIT]++; else mech[M_TLB_MISS]++;
    @(negedge clk);
    tlb_lv = 0;
  endtask

  // commit a fence.t and return its latency in cycles (commit cycle to done)
  task automatic fence_t(input logic [19:0] sel, output int lat);
    @(negedge clk);
    commit_valid = 1;
    commit_instr = {sel, 5'b00000, 7'b0001011};
    #1;
    check(flush_pipe && fstall, "fence.t flushes the pipeline and stalls");
    @(negedge clk);
    commit_valid = 0;
    commit_instr = 32'h0000_0013;
    #1;
    lat = 1;
    while (!fdone && lat < 5000) begin @(negedge clk); #1; lat++; end
    @(negedge clk);
    check(!fstall, "stall released after fence");
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit h, h2;
    int cyc, lat;
    logic [43:0] p;
    int probe_nofence [3], probe_fence [3];
    static int secrets [3] = '{0, 9, 40};
    dc_req = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (300) @(negedge clk);   // caches clear their valid bits after reset

    // ---- instruction side ----
    fetch(56'h8000_0000, h);
    fetch(56'h8000_0008, h2);
    check(!h && h2, "icache miss then hit");
    for (int n = 0; n < 200; n++) fetch(PA_W'(64'h8000_0000 + $urandom_range(0, 40) * 4096 + $urandom_range(0, 7) * 8), h);

    // ---- data side: three clients at once ----
    fork
      for (int n = 0; n < 150; n++) daccess(0, 0, PA_W'(64'h9000_0000 + $urandom_range(0, 30) * 16), 0, h, cyc);
      for (int n = 0; n < 150; n++) daccess(1, 1, PA_W'(64'h9000_0000 + $urandom_range(0, 30) * 16 + 8), {$urandom, $urandom}, h, cyc);
      for (int n = 0; n < 150; n++) daccess(2, 0, PA_W'(64'h9100_0000 + $urandom_range(0, 60) * 4096), 0, h, cyc);
    join
    // write buffer full: stall the L2 and issue 41 stores
    while (!pending_none()) @(negedge clk);
    l2_stall = 1;
    fork
      for (int n = 0; n < 41; n++) daccess(1, 1, PA_W'(64'h9200_0000 + n * 8), 64'(n), h, cyc);
    join_none
    repeat (300) @(negedge clk);
    check(wb_full, "write buffer filled");
    l2_stall = 0;
    wait fork;

    // ---- TLB ----
    for (int k = 0; k < 16; k++) tlb_fill(27'h1000 + 27'(k), 44'h800 + 44'(k), 0);
    for (int k = 0; k < 16; k++) begin
      tlb_look(27'h1000 + 27'(k), h, p);
      check(h && p == 44'h800 + 44'(k), "tlb hit");
    end
    tlb_fill(27'h2000, 44'h900, 0);      // 17th: evicts the pseudo-LRU entry
    tlb_look(27'h1000, h, p);
    check(!h, "tlb pseudo-LRU eviction of the oldest entry");
    if (!h) mech[M_TLB_EVICT]++;
    tlb_fill({9'h5, 18'h0}, 44'h40000, 1);
    tlb_look({9'h5, 18'h1234}, h, p);
    check(h && p == {26'h1, 18'h1234}, "1 GiB translation");
    if (h) mech[M_TLB_SUPERPAGE]++;

    // ---- branch prediction ----
    @(negedge clk);
    bht_uv = 1; bht_upc = 64'h8000_0010; bht_ut = 1;
    btb_uv = 1; btb_upc = 64'h8000_0010; btb_utgt = 64'h8000_4000;
    @(negedge clk);
    bht_uv = 0; btb_uv = 0;
    bp_pc = 64'h8000_0010;
    #1;
    check(bht_v && bht_t, "bht predicts taken");
    check(btb_v && btb_tgt == 64'h8000_4000, "btb predicts target");
    if (bht_t) mech[M_BHT_PRED]++;
    if (btb_v) mech[M_BTB_PRED]++;

    // ---- partial fence: BHT only ----
    fence_t(20'h00008, lat);
    check(lat == 3, $sformatf("partial fence latency %0d, expected 3", lat));
    mech[M_FENCE_PARTIAL]++;
    bp_pc = 64'h8000_0010;
    #1;
    check(!bht_v && btb_v, "partial fence clears the BHT only");
    tlb_look({9'h5, 18'h1234}, h, p);
    check(h, "TLB survives partial fence");

    // ---- full fence with stores pending ----
    daccess(0, 0, 56'h9000_0000, 0, h, cyc);
    daccess(0, 0, 56'h9000_0000, 0, h, cyc);
    check(h, "line cached before fence");
    l2_stall = 1;
    for (int n = 0; n < 5; n++) daccess(1, 1, PA_W'(64'h9300_0000 + n * 8), 64'(n), h, cyc);
    fork
      begin repeat (20) @(negedge clk); l2_stall = 0; end
    join_none
    fence_t(20'hFFFFF, lat);
    check(lat > 259, $sformatf("fence waited for the write buffer (%0d cycles)", lat));
    if (lat > 259) mech[M_FENCE_DRAIN]++;
    fence_t(20'hFFFFF, lat);
    check(lat == 259, $sformatf("full fence latency %0d, expected 259", lat));
    mech[M_FENCE_FULL]++;
    // everything is cold now
    daccess(0, 0, 56'h9000_0000, 0, h, cyc);
    check(!h, "dcache cold after fence");
    fetch(56'h8000_0000, h);
    check(!h, "icache cold after fence");
    tlb_look({9'h5, 18'h1234}, h, p);
    check(!h, "tlb cold after fence");
    bp_pc = 64'h8000_0010;
    #1;
    check(!bht_v && !btb_v, "predictors cold after fence");

    // ---- prime and probe on the L1-D ----
    for (int mode = 0; mode < 2; mode++) begin
      for (int si = 0; si < 3; si++) begin
        int t;
        // the spy primes 64 lines (8 sets x 8 ways)
        for (int k = 0; k < 64; k++) daccess(0, 0, PA_W'(64'hB000_0000 + (64'(k) % 8) * 16 + (64'(k) / 8) * 4096), 0, h, cyc);
        // domain switch (spy -> trojan)
        if (mode == 1) fence_t(20'hFFFFF, lat);
        // the trojan encodes its secret: s conflicting lines
        for (int k = 0; k < secrets[si]; k++) daccess(0, 0, PA_W'(64'hC000_0000 + (64'(k) % 8) * 16 + (64'(k) / 8) * 4096), 0, h, cyc);
        // domain switch (trojan -> spy)
        if (mode == 1) fence_t(20'hFFFFF, lat);
        // the spy probes and times its 64 loads
        t = 0;
        for (int k = 0; k < 64; k++) begin
          daccess(0, 0, PA_W'(64'hB000_0000 + (64'(k) % 8) * 16 + (64'(k) / 8) * 4096), 0, h, cyc);
          t += cyc;
        end
        if (mode == 0) probe_nofence[si] = t; else probe_fence[si] = t;
        $display("%s secret=%0d probe=%0d cycles", (mode != 0) ? "fence.t  " : "no fence ", secrets[si], t);
      end
    end
    check(probe_nofence[0] != probe_nofence[2], "without fence the probe time depends on the secret");
    if (probe_nofence[0] != probe_nofence[2]) mech[M_CHANNEL_OPEN]++;
    check(probe_fence[0] == probe_fence[1] && probe_fence[1] == probe_fence[2], "with fence.t the probe time is constant");
    if (probe_fence[0] == probe_fence[2]) mech[M_CHANNEL_CLOSED]++;

    for (int m = 0; m < M_COUNT; m++) begin
      $display("mechanism %-26s %0d", mech_name[m], mech[m]);
      check(mech[m] > 0, $sformatf("mechanism '%s' happened", mech_name[m]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
