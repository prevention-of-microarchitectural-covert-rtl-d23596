// tb_flush_ctrl: commits fence.t instructions with random select bitmaps
// and checks the pipeline flush, the stall, the flush pulses (exactly one
// per selected component, none for the others), the wait for the write
// buffer to drain and the fixed latency: done 3 cycles plus the cache flush
// time after the commit cycle (259 cycles with 256-set caches). The two
// caches are modelled here: each stays busy for 256 cycles after its pulse.
module tb_flush_ctrl;
  import tp_pkg::*;
  logic clk = 0, rst_n = 0;
  logic commit = 0;
  logic [31:0] instr = 0;
  logic dc_idle = 1, dc_busy, ic_busy;
  logic flush_pipe, stall, done;
  flush_req_t fl;
  int checks = 0, failures = 0;
  int dc_cnt = 0, ic_cnt = 0;
  int pulses [8];
  int n_drain_waits = 0;

  flush_ctrl dut (.clk_i(clk), .rst_ni(rst_n), .commit_valid_i(commit), .commit_instr_i(instr),
    .dcache_idle_i(dc_idle), .dcache_busy_i(dc_busy), .icache_busy_i(ic_busy),
    .flush_pipeline_o(flush_pipe), .stall_o(stall), .flush_o(fl), .done_o(done));
  always #5 clk = ~clk;

  // cache busy models and pulse counters
  always @(posedge clk) begin
    if (fl.dcache) dc_cnt <= 256; else if (dc_cnt > 0) dc_cnt <= dc_cnt - 1;
    if (fl.icache) ic_cnt <= 256; else if (ic_cnt > 0) ic_cnt <= ic_cnt - 1;
    pulses[0] += int'(fl.dcache); pulses[1] += int'(fl.icache); pulses[2] += int'(fl.tlb);
    pulses[3] += int'(fl.bht);    pulses[4] += int'(fl.btb);    pulses[5] += int'(fl.lfsr);
    pulses[6] += int'(fl.arb);    pulses[7] += int'(fl.plru);
  end
  assign dc_busy = (dc_cnt > 0);
  assign ic_busy = (ic_cnt > 0);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    // non-fence instructions do nothing
    for (int n = 0; n < 50; n++) begin
      @(negedge clk);
      commit = 1;
      instr = $urandom;
      if (instr[6:0] == 7'h0B) instr[6:0] = 7'h13;
      #1;
      check(!flush_pipe && !stall, "no action on other instructions");
    end
    commit = 0;
    for (int n = 0; n < 40; n++) begin
      logic [19:0] sel;
      int lat, drain;
      int exp_lat;
      sel = (n == 0) ? 20'hFFFFF : (n == 1) ? 20'h0 : 20'($urandom);
      drain = (n % 3 == 2) ? $urandom_range(1, 30) : 0;
      foreach (pulses[i]) pulses[i] = 0;
      @(negedge clk);
      commit = 1;
      instr  = {sel, 5'b00000, 7'b0001011};
      dc_idle = (drain == 0);
      #1;
      check(flush_pipe && stall, "pipeline flush and stall in commit cycle");
      @(negedge clk);
      commit = 0;
      instr = 0;
      lat = 1;
      fork
        begin
          repeat (drain) @(negedge clk);
          dc_idle = 1;
        end
      join_none
      while (!done) begin
        check(stall, "stall held while fence runs");
        @(negedge clk);
        #1;
        lat++;
        if (lat > 1000) break;
      end
      if (drain > 0) n_drain_waits++;
      exp_lat = 3 + drain + ((sel[0] || sel[1]) ? 256 : 0);
      check(lat == exp_lat, $sformatf("fence latency %0d, expected %0d (sel=%h drain=%0d)", lat, exp_lat, sel, drain));
      @(negedge clk);
      check(!stall, "stall released");
      for (int b = 0; b < 8; b++)
        check(pulses[b] == int'(sel[b]), $sformatf("flush pulses bit %0d: %0d", b, pulses[b]));
    end
    check(n_drain_waits > 0, "write-buffer drain wait exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
