// tb_btb: random target updates against a reference table; checks lookups
// and that a flush clears all 16 entries in one cycle.
module tb_btb;
  logic clk = 0, rst_n = 0, flush = 0, upd = 0;
  logic [63:0] pc = 0, upd_pc = 0, upd_tgt = 0, tgt;
  logic pv;
  int checks = 0, failures = 0;
  bit          rv [16];
  logic [63:0] rt [16];

  btb dut (.clk_i(clk), .rst_ni(rst_n), .flush_i(flush), .pc_i(pc),
    .pred_valid_o(pv), .pred_target_o(tgt), .upd_valid_i(upd), .upd_pc_i(upd_pc), .upd_target_i(upd_tgt));
  always #5 clk = ~clk;

  task automatic check_all();
    for (int i = 0; i < 16; i++) begin
      pc = 64'h1000 + 64'(i * 2) + 64'(32 * $urandom_range(0, 100));
      #1;
      checks++;
      if (pv !== rv[i] || (rv[i] && tgt !== rt[i])) begin
        failures++;
        $display("FAIL entry %0d pv=%b tgt=%h exp %b %h", i, pv, tgt, rv[i], rt[i]);
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
      for (int n = 0; n < 500; n++) begin
        int i;
        @(negedge clk);
        i = $urandom_range(0, 15);
        upd = 1;
        upd_pc = 64'h2000 + 64'(i * 2);
        upd_tgt = {$urandom, $urandom};
        @(posedge clk);
        #1;
        upd = 0;
        rv[i] = 1;
        rt[i] = upd_tgt;
        if (n % 50 == 0) check_all();
      end
      @(negedge clk);
      flush = 1;
      @(negedge clk);
      flush = 0;
      foreach (rv[i]) rv[i] = 0;
      check_all();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
