// tb_fence_t_decoder: checks fence.t recognition and select extraction
// against the encoding table, on directed and random instruction words.
module tb_fence_t_decoder;
  import tp_pkg::*;
  logic [31:0] instr;
  logic        is_ft;
  logic [19:0] sel;
  int checks = 0, failures = 0;

  fence_t_decoder dut (.instr_i(instr), .is_fence_t_o(is_ft), .select_o(sel));

  task automatic check(input logic [31:0] i, input logic exp_ft, input logic [19:0] exp_sel);
    instr = i;
    #1;
    checks++;
    if (is_ft !== exp_ft || sel !== exp_sel) begin
      failures++;
      $display("FAIL instr=%h is_ft=%b sel=%h exp %b %h", i, is_ft, sel, exp_ft, exp_sel);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    check(32'h0000_000B, 1'b1, 20'h0);        // fence.t with empty select
    check(32'hFFFF_F00B, 1'b1, 20'hFFFFF);    // select everything
    check(32'h0000_100B, 1'b1, 20'h00001);    // select bit 0 -> imm bit 12
    check(32'h8000_000B, 1'b1, 20'h80000);    // select bit 19 -> instr bit 31
    check(32'h0000_008B, 1'b0, 20'h0);        // rd = 1: not fence.t
    check(32'h0000_000F, 1'b0, 20'h0);        // FENCE (MISC-MEM)
    check(32'h0000_0013, 1'b0, 20'h0);        // nop
    for (int n = 0; n < 2000; n++) begin
      logic [31:0] r;
      r = $urandom;
      if (n % 3 == 0) r[6:0] = 7'h0B;
      if (n % 6 == 0) r[11:7] = 5'd0;
      check(r, (r[6:0] == 7'h0B && r[11:7] == 5'd0),
               (r[6:0] == 7'h0B && r[11:7] == 5'd0) ? r[31:12] : 20'h0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
