// tb_write_buffer: random pushes and pops against a queue model; checks
// order, data, full at 40 entries and empty.
module tb_write_buffer;
  import tp_pkg::*;
  logic clk = 0, rst_n = 0, push = 0, pop = 0;
  wbuf_entry_t din, head;
  logic full, valid, empty;
  logic [5:0] count;
  wbuf_entry_t q[$];
  int checks = 0, failures = 0, n_full = 0;

  write_buffer dut (.clk_i(clk), .rst_ni(rst_n), .push_i(push), .entry_i(din),
    .full_o(full), .valid_o(valid), .head_o(head), .pop_i(pop), .empty_o(empty), .count_o(count));
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
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
    for (int n = 0; n < 4000; n++) begin
      @(negedge clk);
      check(count == 6'(q.size()), "count");
      check(full == (q.size() == 40), "full flag");
      check(empty == (q.size() == 0), "empty flag");
      if (q.size() > 0) check(head == q[0], "head data/order");
      if (full) n_full++;
      // phases: fill, drain, mixed
      push = (n < 1000) ? ($urandom_range(0, 3) != 0) : (n < 2000) ? ($urandom_range(0, 3) == 0) : ($urandom_range(0, 1) != 0);
      pop  = (n < 1000) ? ($urandom_range(0, 5) == 0) : (n < 2000) ? ($urandom_range(0, 3) != 0) : ($urandom_range(0, 1) != 0);
      if (full) push = 0;
      din = '{addr: PA_W'({$urandom, $urandom}), wdata: {$urandom, $urandom}, be: 8'($urandom)};
      @(posedge clk);
      #1;
      if (pop && q.size() > 0) void'(q.pop_front());
      if (push) q.push_back(din);
    end
    check(n_full > 0, "buffer reached full");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
