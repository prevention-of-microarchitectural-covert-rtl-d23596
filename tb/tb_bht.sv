// tb_bht: trains random branches against a reference table of 2-bit
// saturating counters, checks predictions, and checks that a flush leaves
// every entry untrained in one cycle.
module tb_bht;
  logic clk = 0, rst_n = 0, flush = 0, upd = 0, upd_taken = 0;
  logic [63:0] pc = 0, upd_pc = 0;
  logic pv, pt;
  int checks = 0, failures = 0;
  bit   rv [64];
  int   rc [64];

  bht dut (.clk_i(clk), .rst_ni(rst_n), .flush_i(flush), .pc_i(pc),
    .pred_valid_o(pv), .pred_taken_o(pt), .upd_valid_i(upd), .upd_pc_i(upd_pc), .upd_taken_i(upd_taken));
  always #5 clk = ~clk;

  task automatic check_all();
    for (int i = 0; i < 64; i++) begin
      pc = 64'h8000_0000 + 64'(i * 2);
      #1;
      checks++;
      if (pv !== rv[i] || pt !== (rv[i] && rc[i] >= 2)) begin
        failures++;
        $display("FAIL entry %0d pv=%b pt=%b exp %b cnt %0d", i, pv, pt, rv[i], rc[i]);
      end
    end
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check_all();
    for (int round = 0; round < 3; round++) begin
      for (int n = 0; n < 1500; n++) begin
        int i;
        @(negedge clk);
        i = $urandom_range(0, 63);
        upd = 1;
        upd_pc = 64'h4000_0000 + 64'(i * 2) + 64'($urandom_range(0, 7) * 128);  // aliases
        upd_taken = (i % 4 == 0) ? 1'b1 : (i % 4 == 1) ? 1'b0 : 1'($urandom);
        @(posedge clk);
        #1;
        upd = 0;
        if (!rv[i]) rc[i] = upd_taken ? 2 : 1;
        else if (upd_taken) rc[i] = (rc[i] == 3) ? 3 : rc[i] + 1;
        else rc[i] = (rc[i] == 0) ? 0 : rc[i] - 1;
        rv[i] = 1;
        if (n % 100 == 0) check_all();
      end
      check_all();
      // flush: single cycle
      @(negedge clk);
      flush = 1;
      @(negedge clk);
      flush = 0;
      foreach (rv[i]) begin
        rv[i] = 0;
        rc[i] = 0;
      end
      check_all();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
