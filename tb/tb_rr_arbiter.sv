// tb_rr_arbiter: random requests against a reference round-robin model;
// checks one-hot grants, fairness order and that flush resets the pointer.
module tb_rr_arbiter;
  localparam int N = 3;
  logic clk = 0, rst_n = 0, en = 0, flush = 0;
  logic [N-1:0] req, gnt;
  logic [1:0] idx;
  int checks = 0, failures = 0;
  int ptr = 0;
  int n_contended = 0;

  rr_arbiter dut (.clk_i(clk), .rst_ni(rst_n), .en_i(en), .flush_i(flush),
                           .req_i(req), .gnt_o(gnt), .idx_o(idx));
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    req = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      req   = N'($urandom);
      en    = ($urandom_range(0, 7) != 0);
      flush = ($urandom_range(0, 31) == 0);
      #1;
      begin
        logic [N-1:0] exp;
        int win;
        exp = '0;
        win = -1;
        for (int i = 0; i < N; i++) begin
          int k;
          k = (ptr + i) % N;
          if (win < 0 && en && req[k]) win = k;
        end
        if (win >= 0) exp[win] = 1'b1;
        if ($countones(req) > 1 && en) n_contended++;
        checks++;
        if (gnt !== exp || (win >= 0 && idx != 2'(win))) begin
          failures++;
          $display("FAIL req=%b ptr=%0d gnt=%b exp=%b", req, ptr, gnt, exp);
        end
        if (flush) ptr = 0;
        else if (win >= 0) ptr = (win + 1) % N;
      end
    end
    checks++;
    if (n_contended == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
