// tb_channels: the five prime-and-probe covert channels of the paper's
// evaluation (L1-D, L1-I, TLB, BTB, BHT), run on the whole design at its
// default size. For each channel a spy primes the structure, a trojan
// touches s of its entries to encode a secret s, and the spy times a probe
// of the whole structure. The secret is swept over five values from 0 to
// the structure's size (256 lines of each L1 in the primed sets, 16 TLB
// entries, 16 BTB entries, 64 BHT entries). Without a fence the probe time
// must depend on s. Two fences are run at each domain switch, as in the
// paper's evaluation: the first-order one (select 0x0001F: valid bits of
// L1-D, L1-I and TLB, BHT and BTB) and the full one (0xFFFFF, which also
// resets the LFSRs, the L1-D arbiter and the TLB pseudo-LRU tree). With
// either, the probe time must be the same for every s, and each fence must
// take 259 cycles. For the L1s the time is measured in clock cycles;
// for the TLB, BTB and BHT, which have no timing of their own here, a miss
// or misprediction is charged a fixed penalty (20 cycles for a TLB refill,
// 10 for a branch misprediction). A single run per secret replaces the
// paper's million samples: the model is deterministic, so any dependence on
// the secret shows in one run.
module tb_channels;
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
    if (!we && pending_none()) check(dc_rd == exp, $sformatf("load %h = %h exp %h", a, dc_rd, exp));
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


  // ---- timed spy/trojan operations for each channel (return cycles) ----
  function automatic logic [PA_W-1:0] d_addr(logic [PA_W-1:0] base, int k);
    return base + PA_W'((PA_W'(k) % 32) * 16 + (PA_W'(k) / 32) * 4096);   // 32 sets x 8 ways
  endfunction
  function automatic logic [PA_W-1:0] i_addr(logic [PA_W-1:0] base, int k);
    return base + PA_W'((PA_W'(k) % 64) * 16 + (PA_W'(k) / 64) * 4096);   // 64 sets x 4 ways
  endfunction

  task automatic touch(input int ch, input bit spy, input int k, inout int t);
    bit h;
    int cyc, t0;
    logic [43:0] p;
    case (ch)
      0: begin  // L1-D: loads
        daccess(0, 0, d_addr(spy ? 56'hB000_0000 : 56'hC000_0000, k), 0, h, cyc);
        t += cyc;
      end
      1: begin  // L1-I: fetches
        t0 = cycle;
        fetch(i_addr(spy ? 56'hD000_0000 : 56'hE000_0000, k), h);
        t += cycle - t0;
      end
      2: begin  // TLB: lookup, refill on a miss (walk penalty 20 cycles)
        tlb_look((spy ? 27'h10000 : 27'h20000) + 27'(k), h, p);
        t += 1;
        if (!h) begin
          tlb_fill((spy ? 27'h10000 : 27'h20000) + 27'(k), 44'(k), 0);
          t += 20;
        end
      end
      3: begin  // BTB: indirect jump; a wrong or missing target costs 10 cycles
        logic [63:0] pc, tgt;
        pc  = 64'h8000_0000 + 64'(k * 2);
        tgt = spy ? 64'h1111_0000 + 64'(k) : 64'h2222_0000 + 64'(k);
        @(negedge clk);
        bp_pc = pc;
        #1;
        t += (btb_v && btb_tgt == tgt) ? 1 : 10;
        btb_uv = 1; btb_upc = pc; btb_utgt = tgt;
        @(negedge clk);
        btb_uv = 0;
      end
      default: begin  // BHT: the spy's branches are taken, the trojan's not
        logic [63:0] pc;
        pc = 64'h8000_0000 + 64'(k * 2);
        @(negedge clk);
        bp_pc = pc;
        #1;
        t += (bht_v && bht_t == spy) ? 1 : 10;
        // the trojan runs each of its branches twice, enough to flip a
        // saturated counter
        repeat (spy ? 1 : 2) begin
          bht_uv = 1; bht_upc = pc; bht_ut = spy;
          @(negedge clk);
        end
        bht_uv = 0;
      end
    endcase
  endtask

  int cycle = 0;
  always @(posedge clk) cycle++;

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    static string cname [5] = '{"L1-D", "L1-I", "TLB", "BTB", "BHT"};
    static int    size  [5] = '{256, 256, 16, 16, 64};
    int lat, t;
    int probe [3][5];
    // fence.t select per mode: none, the first-order fence (valid bits of
    // L1-D, L1-I and TLB, BHT and BTB), the full fence
    static logic [19:0] msel [3] = '{20'h00000, 20'h0001F, 20'hFFFFF};
    static string       mname [3] = '{"no fence   ", "first fence", "full fence "};
    dc_req = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (300) @(negedge clk);
    for (int ch = 0; ch < 5; ch++) begin
      for (int mode = 0; mode < 3; mode++) begin
        for (int si = 0; si < 5; si++) begin
          int s;
          s = (size[ch] * si) / 4;
          // the spy primes
          t = 0;
          for (int k = 0; k < size[ch]; k++) touch(ch, 1, k, t);
          if (mode != 0) fence_t(msel[mode], lat);
          // the trojan encodes s
          for (int k = 0; k < s; k++) touch(ch, 0, k, t);
          if (mode != 0) begin
            fence_t(msel[mode], lat);
            // both fences clear the L1 valid bits: 3 + 256 cycles when the
            // write buffer is empty (the channels issue only loads)
            check(lat == 259, $sformatf("%s fence latency %0d cycles", cname[ch], lat));
          end
          // the spy probes
          t = 0;
          for (int k = 0; k < size[ch]; k++) touch(ch, 1, k, t);
          probe[mode][si] = t;
          $display("%-4s %s secret=%3d probe=%0d cycles", cname[ch], mname[mode], s, t);
        end
        if (mode == 0)
          check(probe[0][0] != probe[0][4], $sformatf("%s channel exists without fence", cname[ch]));
        else
          for (int si = 1; si < 5; si++)
            check(probe[mode][si] == probe[mode][0],
                  $sformatf("%s probe time independent of the secret with the %s", cname[ch], mname[mode]));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
