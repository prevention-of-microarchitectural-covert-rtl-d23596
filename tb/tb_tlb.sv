// tb_tlb: fills the TLB, checks hits and translations (including 2 MiB and
// 1 GiB pages), checks that pseudo-LRU replacement evicts the least recently
// used entry after a sequential access pattern, and that the two flushes
// (valid bits, pseudo-LRU tree) restore a history-independent state.
module tb_tlb;
  logic clk = 0, rst_n = 0, flush = 0, flush_plru = 0;
  logic lu_valid = 0, hit;
  logic [26:0] lu_vpn = 0;
  logic [15:0] lu_asid = 0;
  logic [43:0] ppn;
  logic [7:0]  flags;
  logic upd = 0, is2m = 0, is1g = 0;
  logic [26:0] upd_vpn = 0;
  logic [15:0] upd_asid = 0;
  logic [43:0] upd_ppn = 0;
  logic [7:0]  upd_flags = 0;
  int checks = 0, failures = 0;

  tlb dut (.clk_i(clk), .rst_ni(rst_n), .flush_i(flush), .flush_plru_i(flush_plru),
    .lu_valid_i(lu_valid), .lu_vpn_i(lu_vpn), .lu_asid_i(lu_asid), .lu_hit_o(hit), .lu_ppn_o(ppn), .lu_flags_o(flags),
    .upd_valid_i(upd), .upd_vpn_i(upd_vpn), .upd_asid_i(upd_asid), .upd_ppn_i(upd_ppn),
    .upd_is_2m_i(is2m), .upd_is_1g_i(is1g), .upd_flags_i(upd_flags));
  always #5 clk = ~clk;

  function automatic logic [26:0] vpn_of(int k);  return 27'h100000 + 27'(k * 3); endfunction
  function automatic logic [43:0] ppn_of(int k);  return 44'hABC0000 + 44'(k * 7); endfunction

  task automatic fill(input logic [26:0] v, input logic [43:0] p, input logic m2, input logic g1);
    @(negedge clk);
    upd = 1; upd_vpn = v; upd_asid = 16'h5; upd_ppn = p; is2m = m2; is1g = g1; upd_flags = v[7:0];
    @(negedge clk);
    upd = 0; is2m = 0; is1g = 0;
  endtask

  // lookup: checked combinationally, then one clock so the PLRU sees the hit
  task automatic look(input logic [26:0] v, input logic exp_hit, input logic [43:0] exp_ppn);
    @(negedge clk);
    lu_valid = 1; lu_vpn = v; lu_asid = 16'h5;
    #1;
    checks++;
    if (hit !== exp_hit || (exp_hit && ppn !== exp_ppn)) begin
      failures++;
      $display("FAIL vpn=%h hit=%b ppn=%h exp %b %h", v, hit, ppn, exp_hit, exp_ppn);
    end
    @(negedge clk);
    lu_valid = 0;
  endtask

  task automatic do_flush(input logic v, input logic p);
    @(negedge clk);
    flush = v; flush_plru = p;
    @(negedge clk);
    flush = 0; flush_plru = 0;
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    look(vpn_of(0), 0, 0);
    for (int k = 0; k < 16; k++) fill(vpn_of(k), ppn_of(k), 0, 0);
    for (int k = 0; k < 16; k++) look(vpn_of(k), 1, ppn_of(k));
    // other ASID misses
    @(negedge clk); lu_valid = 1; lu_vpn = vpn_of(3); lu_asid = 16'h6; #1;
    checks++; if (hit) begin failures++; $display("FAIL ASID mismatch hit"); end
    lu_valid = 0;
    // the accesses above were 0..15 in order: PLRU victim is entry of vpn 0
    fill(vpn_of(100), ppn_of(100), 0, 0);
    look(vpn_of(0), 0, 0);
    for (int k = 1; k < 16; k++) look(vpn_of(k), 1, ppn_of(k));
    look(vpn_of(100), 1, ppn_of(100));
    // access order 1..15 then 0: the tree points at entry 8 (pseudo-LRU,
    // not true LRU, which would pick entry 1)
    fill(vpn_of(101), ppn_of(101), 0, 0);
    look(vpn_of(8), 0, 0);
    look(vpn_of(1), 1, ppn_of(1));
    look(vpn_of(101), 1, ppn_of(101));
    // full flush: everything misses
    do_flush(1, 1);
    for (int k = 2; k < 16; k++) look(vpn_of(k), 0, 0);
    // superpages
    fill({9'h12, 9'h34, 9'h00}, 44'h00000_0C0000, 0, 1);              // 1 GiB
    fill({9'h22, 9'h44, 9'h00}, 44'h00000_0ABE00, 1, 0);              // 2 MiB
    look({9'h12, 9'h1F, 9'h0A7}, 1, {26'h0000_003, 9'h1F, 9'h0A7});
    look({9'h22, 9'h44, 9'h155}, 1, {35'h0000_0055F, 9'h155});
    look({9'h22, 9'h45, 9'h155}, 0, 0);
    // history independence: after flushing valid bits and the PLRU tree, the
    // replacement order is the same whatever happened before
    for (int trial = 0; trial < 2; trial++) begin
      do_flush(1, 1);
      for (int k = 0; k < 16; k++) fill(vpn_of(200 + k), ppn_of(k), 0, 0);
      for (int k = 0; k < 40; k++) begin
        int j;
        j = (trial == 0) ? $urandom_range(0, 15) : (15 - (k % 16));
        look(vpn_of(200 + j), 1, ppn_of(j));
      end
      // resetting only the tree makes entry 0 the next victim, whatever the
      // access history was
      do_flush(0, 1);
      fill(vpn_of(500), ppn_of(50), 0, 0);
      look(vpn_of(200), 0, 0);
      for (int k = 1; k < 16; k++) look(vpn_of(200 + k), 1, ppn_of(k));
      look(vpn_of(500), 1, ppn_of(50));
      do_flush(1, 1);
      for (int k = 0; k < 16; k++) fill(vpn_of(300 + k), ppn_of(k), 0, 0);
      for (int k = 0; k < 16; k++) look(vpn_of(300 + k), 1, ppn_of(k));
      // after the fill/lookup pattern above, the next victim is vpn 300's entry
      fill(vpn_of(400), ppn_of(40), 0, 0);
      look(vpn_of(300), 0, 0);
      look(vpn_of(400), 1, ppn_of(40));
      do_flush(1, 1);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
