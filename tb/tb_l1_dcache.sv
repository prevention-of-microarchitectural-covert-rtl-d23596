// tb_l1_dcache: the L1 data cache at its full 32 KiB / 8-way size against a
// behavioural L2 and a shadow memory kept by the testbench.
//   - Three clients (load unit, store unit, page-table walker) issue random
//     loads and stores at the same time; every load must return the value
//     the shadow memory holds at the moment of its grant.
//   - Hits answer one cycle after the grant; a line touched twice hits.
//   - Many stores with a stalled L2 fill the 40-entry write buffer.
//   - After the traffic, the L2 must hold every store (write-through).
//   - A flush keeps the cache busy for exactly 256 cycles and makes every
//     line miss afterwards.
//   - History independence: after a flush of valid bits, LFSR and arbiter,
//     the same conflict pattern evicts the same lines, whatever ran before.
module tb_l1_dcache;
  import tp_pkg::*;
  logic clk = 0, rst_n = 0;
  logic flush = 0, flush_lfsr = 0, flush_arb = 0, busy, idle;
  logic [2:0] req_valid = 0, gnt, rsp_valid;
  dreq_t [2:0] req;
  logic [63:0] rdata;
  logic l2_v, l2_rdy, l2_rv, l2_stall = 0;
  l2_req_t l2_req;
  logic [127:0] l2_rd;
  logic hit, miss, wb_full;
  int checks = 0, failures = 0;
  int n_hit = 0, n_miss = 0, n_full = 0, n_contend = 0, n_store = 0;
  logic [63:0] shadow [logic [PA_W-1:0]];

  l1_dcache dut (.clk_i(clk), .rst_ni(rst_n), .flush_i(flush), .flush_lfsr_i(flush_lfsr), .flush_arb_i(flush_arb),
    .flush_busy_o(busy), .idle_o(idle), .req_valid_i(req_valid), .req_i(req), .gnt_o(gnt),
    .rsp_valid_o(rsp_valid), .rsp_rdata_o(rdata), .l2_req_valid_o(l2_v), .l2_req_ready_i(l2_rdy),
    .l2_req_o(l2_req), .l2_rsp_valid_i(l2_rv), .l2_rsp_data_i(l2_rd), .hit_o(hit), .miss_o(miss), .wbuf_full_o(wb_full));
  l2_mem_model #(.LAT(6)) u_l2 (.clk_i(clk), .stall_i(l2_stall), .req_valid_i(l2_v), .req_ready_o(l2_rdy),
    .req_i(l2_req), .rsp_valid_o(l2_rv), .rsp_data_o(l2_rd));
  always #5 clk = ~clk;

  always @(posedge clk) begin
    n_hit  += int'(hit);
    n_miss += int'(miss);
    n_full += int'(wb_full);
    if ($countones(req_valid) > 1 && |gnt) n_contend++;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  function automatic logic [63:0] expect_word(logic [PA_W-1:0] a);
    logic [PA_W-1:0] wa = {a[PA_W-1:3], 3'b000};
    return shadow.exists(wa) ? shadow[wa] : u_l2.init_word(wa);
  endfunction

  // one access on port p; returns the load data and whether it hit
  task automatic access(input int p, input logic we, input logic [PA_W-1:0] a, input logic [63:0] wd,
                        input logic [7:0] be, output logic [63:0] rd, output bit was_hit);
    logic [63:0] exp;
    int wait_cycles;
    @(negedge clk);
    req[p] = '{we: we, addr: a, wdata: wd, be: be};
    req_valid[p] = 1'b1;
    #1;
    while (!gnt[p]) begin
      @(negedge clk);
      #1;
    end
    // granted at the coming edge: this is the access's place in memory order
    exp = expect_word(a);
    if (we) begin
      logic [63:0] w;
      w = exp;
      for (int b = 0; b < 8; b++) if (be[b]) w[b*8 +: 8] = wd[b*8 +: 8];
      shadow[{a[PA_W-1:3], 3'b000}] = w;
      n_store++;
    end
    @(negedge clk);
    req_valid[p] = 1'b0;
    #1;
    wait_cycles = 1;
    was_hit = hit;
    while (!rsp_valid[p]) begin
      @(negedge clk);
      #1;
      wait_cycles++;
    end
    rd = rdata;
    if (!we) begin
      check(rd == exp, $sformatf("port %0d load %h = %h, expected %h", p, a, rd, exp));
      if (was_hit) check(wait_cycles == 1, "hit answered one cycle after grant");
    end
  endtask

  function automatic logic [PA_W-1:0] pool_addr(int p);
    // 40 lines in 4 sets (conflicts and evictions) plus scattered lines
    int k;
    k = $urandom_range(0, 59);
    if (k < 40) return PA_W'(64'h8000_0000 + (64'(k) / 4) * 4096 + (64'(k) % 4) * 16 + $urandom_range(0, 1) * 8);
    return PA_W'(64'h9000_0000 + $urandom_range(0, 4095) * 16 + p * 8);
  endfunction

  task automatic do_flush(input bit all);
    int cyc;
    @(negedge clk);
    while (!idle) @(negedge clk);
    flush = 1; flush_lfsr = all; flush_arb = all;
    @(negedge clk);
    flush = 0; flush_lfsr = 0; flush_arb = 0;
    cyc = 0;
    while (busy) begin
      @(negedge clk);
      cyc++;
    end
    check(cyc == 256, $sformatf("flush took %0d cycles, expected 256", cyc));
  endtask

  // fills one set with 9 lines and probes which of the first 8 miss
  task automatic conflict_pattern(output logic [7:0] pat);
    logic [63:0] rd;
    bit h;
    for (int k = 0; k < 9; k++) access(0, 0, PA_W'(64'hA000_0000 + k * 4096 + 16 * 77), 0, 0, rd, h);
    for (int k = 0; k < 8; k++) begin
      access(0, 0, PA_W'(64'hA000_0000 + k * 4096 + 16 * 77), 0, 0, rd, h);
      pat[k] = !h;
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [63:0] rd;
    bit h, h2;
    logic [7:0] pat [2];
    req = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // reset clears the valid bits in 256 cycles
    repeat (2) @(negedge clk);
    while (busy) @(negedge clk);
    // miss then hit
    access(0, 0, 56'h8000_1230, 0, 0, rd, h);
    access(0, 0, 56'h8000_1238, 0, 0, rd, h2);
    check(!h && h2, "first access misses, second hits");
    // three clients at once
    fork
      for (int n = 0; n < 300; n++) begin access(0, 1'($urandom_range(0, 3) == 0), pool_addr(0), {$urandom, $urandom}, 8'($urandom), rd, h); end
      for (int n = 0; n < 300; n++) begin access(1, 1'($urandom_range(0, 1)), pool_addr(1), {$urandom, $urandom}, 8'($urandom), rd, h); end
      for (int n = 0; n < 300; n++) begin access(2, 1'b0, pool_addr(2), 0, 0, rd, h); end
    join
    // stall the L2 and fill the write buffer: 40 stores are accepted, the
    // 41st waits until the L2 drains the buffer
    while (!idle) @(negedge clk);
    l2_stall = 1;
    for (int n = 0; n < 40; n++) access(1, 1, PA_W'(64'h8000_0000 + n * 8), {$urandom, $urandom}, 8'hFF, rd, h);
    fork
      access(1, 1, PA_W'(64'h8000_0200), {$urandom, $urandom}, 8'hFF, rd, h);
    join_none
    repeat (20) @(negedge clk);
    check(wb_full && !gnt[1], "write buffer full stalls the store unit");
    l2_stall = 0;
    wait fork;
    while (!idle) @(negedge clk);
    // write-through: every store is in the L2
    foreach (shadow[a]) check(u_l2.read_word(a) == shadow[a], $sformatf("L2 holds store at %h", a));
    // flush: everything misses afterwards
    access(0, 0, 56'h8000_1230, 0, 0, rd, h);
    check(h, "line present before flush");
    do_flush(0);
    access(0, 0, 56'h8000_1230, 0, 0, rd, h);
    check(!h, "line gone after flush");
    check(rd == expect_word(56'h8000_1230), "data correct after flush");
    // history independence of the replacement state
    for (int t = 0; t < 2; t++) begin
      for (int n = 0; n < 50 + 37 * t; n++) access(n % 3, 0, pool_addr(0), 0, 0, rd, h);
      do_flush(1);
      conflict_pattern(pat[t]);
    end
    check(pat[0] == pat[1], $sformatf("same evictions after full flush: %b vs %b", pat[0], pat[1]));
    check($countones(pat[0]) >= 1, "a line was evicted");
    check(n_hit > 0 && n_miss > 0, "hits and misses seen");
    check(n_contend > 0, "concurrent requests arbitrated");
    check(n_full > 0, "write buffer full seen");
    $display("hits=%0d misses=%0d stores=%0d contended=%0d", n_hit, n_miss, n_store, n_contend);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
