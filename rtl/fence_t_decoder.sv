// fence_t_decoder: recognises the temporal fence instruction, fence.t.
//
// Encoding as given by the paper: bits 6:0 hold the custom-0 opcode 0001011,
// bits 11:7 (the rd field of a U-type instruction) are 00000 and bits 31:12
// hold the 20-bit select bitmap naming the state to be flushed. Any other
// value in bits 11:7 is not fence.t; treating it as an ordinary custom-0
// instruction is this design's choice.
//
// Interface: purely combinational. is_fence_t_o is high when instr_i is
// fence.t; select_o is then its select field (zero otherwise).
module fence_t_decoder
  import tp_pkg::*;
(
  input  logic [31:0]         instr_i,
  output logic                is_fence_t_o,
  output logic [SELECT_W-1:0] select_o
);
  always_comb begin
    is_fence_t_o = (instr_i[6:0] == OPCODE_CUSTOM0) && (instr_i[11:7] == 5'b00000);
    select_o     = is_fence_t_o ? instr_i[31:12] : '0;
  end
endmodule
