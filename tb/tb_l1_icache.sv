// tb_l1_icache: the L1 instruction cache at its full 16 KiB / 4-way size
// against a behavioural L2. Checks fetched data against the L2's contents,
// miss-then-hit behaviour and one-cycle hit answer, evictions under
// conflicts, the 256-cycle flush after which every line misses, and that
// after a flush of valid bits and LFSR the same conflict pattern evicts the
// same lines whatever ran before.
module tb_l1_icache;
  import tp_pkg::*;
  logic clk = 0, rst_n = 0;
  logic flush = 0, flush_lfsr = 0, busy;
  logic req_v = 0, req_rdy, rsp_v;
  logic [PA_W-1:0] req_a = 0;
  logic [63:0] rsp_d;
  logic l2_v, l2_rdy, l2_rv;
  logic [PA_W-1:0] l2_addr;
  l2_req_t l2_req;
  assign l2_req = '{we: 1'b0, addr: l2_addr, wdata: '0, be: '0};
  logic [127:0] l2_rd;
  logic hit, miss;
  int checks = 0, failures = 0, n_hit = 0, n_miss = 0;

  l1_icache dut (.clk_i(clk), .rst_ni(rst_n), .flush_i(flush), .flush_lfsr_i(flush_lfsr), .flush_busy_o(busy),
    .req_valid_i(req_v), .req_ready_o(req_rdy), .req_addr_i(req_a), .rsp_valid_o(rsp_v), .rsp_data_o(rsp_d),
    .l2_req_valid_o(l2_v), .l2_req_ready_i(l2_rdy), .l2_req_addr_o(l2_addr), .l2_rsp_valid_i(l2_rv), .l2_rsp_data_i(l2_rd),
    .hit_o(hit), .miss_o(miss));
  l2_mem_model #(.LAT(5)) u_l2 (.clk_i(clk), .stall_i(1'b0), .req_valid_i(l2_v), .req_ready_o(l2_rdy),
    .req_i(l2_req), .rsp_valid_o(l2_rv), .rsp_data_o(l2_rd));
  always #5 clk = ~clk;

  always @(posedge clk) begin
    n_hit  += int'(hit);
    n_miss += int'(miss);
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  task automatic fetch(input logic [PA_W-1:0] a, output bit was_hit);
    int cyc;
    @(negedge clk);
    req_v = 1;
    req_a = a;
    #1;
    while (!req_rdy) begin
      @(negedge clk);
      #1;
    end
    @(negedge clk);
    req_v = 0;
    #1;
    was_hit = hit;
    cyc = 1;
    while (!rsp_v) begin
      @(negedge clk);
      #1;
      cyc++;
    end
    check(rsp_d == u_l2.read_word(a), $sformatf("fetch %h = %h", a, rsp_d));
    if (was_hit) check(cyc == 1, "hit answered one cycle after request");
  endtask

  task automatic do_flush(input bit lfsr_too);
    int cyc;
    @(negedge clk);
    flush = 1;
    flush_lfsr = lfsr_too;
    @(negedge clk);
    flush = 0;
    flush_lfsr = 0;
    cyc = 0;
    while (busy) begin
      @(negedge clk);
      cyc++;
    end
    check(cyc == 256, $sformatf("flush took %0d cycles", cyc));
  endtask

  task automatic conflict_pattern(output logic [3:0] pat);
    bit h;
    for (int k = 0; k < 5; k++) fetch(PA_W'(64'h4000_0000 + k * 4096 + 16 * 9), h);
    for (int k = 0; k < 4; k++) begin
      fetch(PA_W'(64'h4000_0000 + k * 4096 + 16 * 9), h);
      pat[k] = !h;
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit h, h2;
    logic [3:0] pat [2];
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(negedge clk);
    while (busy) @(negedge clk);
    fetch(56'h1000_0040, h);
    fetch(56'h1000_0048, h2);
    check(!h && h2, "miss then hit");
    for (int n = 0; n < 600; n++) begin
      int k;
      k = $urandom_range(0, 23);
      fetch(PA_W'(64'h1000_0000 + (64'(k) / 3) * 4096 + (64'(k) % 3) * 16 + $urandom_range(0, 1) * 8), h);
    end
    fetch(56'h1000_0040, h);
    do_flush(0);
    fetch(56'h1000_0040, h);
    check(!h, "miss after flush");
    for (int t = 0; t < 2; t++) begin
      for (int n = 0; n < 30 + 29 * t; n++) fetch(PA_W'(64'h4000_0000 + $urandom_range(0, 11) * 4096 + 16 * 9), h);
      do_flush(1);
      conflict_pattern(pat[t]);
    end
    check(pat[0] == pat[1], $sformatf("same evictions after flush: %b vs %b", pat[0], pat[1]));
    check(pat[0] != 0, "a line was evicted");
    check(n_hit > 0 && n_miss > 0, "hits and misses seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
