// tb_lfsr8: checks that the replacement sequence has period 256 and visits
// every 8-bit value, that enable gates it, and that a flush returns it to
// the seed so the sequence repeats exactly.
module tb_lfsr8;
  logic clk = 0, rst_n = 0, en = 0, flush = 0;
  logic [7:0] st;
  int checks = 0, failures = 0;
  logic [7:0] seq [256];
  bit seen [256];

  lfsr8 dut (.clk_i(clk), .rst_ni(rst_n), .en_i(en), .flush_i(flush), .state_o(st));
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int distinct;
    logic [7:0] s0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check(st == 8'h01, "seed after reset");
    // enable low: no change
    repeat (3) @(negedge clk);
    check(st == 8'h01, "hold when disabled");
    en = 1;
    for (int i = 0; i < 256; i++) begin
      seq[i] = st;
      seen[st] = 1'b1;
      @(negedge clk);
    end
    distinct = 0;
    foreach (seen[i]) if (seen[i]) distinct++;
    check(distinct == 256, $sformatf("256 distinct states, got %0d", distinct));
    check(st == 8'h01, "period 256: back to seed");
    // consecutive states are shifts
    for (int i = 1; i < 256; i++) check(seq[i][7:1] == seq[i-1][6:0], "shift structure");
    // advance a random amount, flush, sequence restarts from the seed
    repeat ($urandom_range(3, 100)) @(negedge clk);
    s0 = st;
    flush = 1;
    @(negedge clk);
    flush = 0;
    check(st == 8'h01, "flush returns to seed");
    for (int i = 0; i < 40; i++) begin
      check(st == seq[i], "sequence repeats after flush");
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
