// l2_mem_model: behavioural stand-in for the off-core L2 cache and memory,
// used only by testbenches.
//
// Reads return a whole 16-byte line LAT cycles after the request is
// accepted; writes (one 64-bit word with byte enables) are accepted and
// applied at once. Memory that was never written reads as init_word(addr),
// a fixed function of the word address, so testbenches can compute the
// expected data themselves. One read is outstanding at a time; ready is low
// while it is in flight or while stall_i is high. It is not synthesizable.
module l2_mem_model
  import tp_pkg::*;
#(
  parameter int unsigned LAT = 4
) (
  input  logic              clk_i,
  input  logic              stall_i,
  input  logic              req_valid_i,
  output logic              req_ready_o,
  input  l2_req_t           req_i,
  output logic              rsp_valid_o,
  output logic [LINE_W-1:0] rsp_data_o
);
  logic [XLEN-1:0] mem [logic [PA_W-1:0]];
  int unsigned     busy_cnt = 0;
  logic [PA_W-1:0] rd_addr;
  int unsigned     n_reads = 0, n_writes = 0;

  function automatic logic [XLEN-1:0] init_word(logic [PA_W-1:0] a);
    return {8'hC3, a[55:3], 3'b000} ^ 64'h0123_4567_89AB_CDEF;
  endfunction

  function automatic logic [XLEN-1:0] read_word(logic [PA_W-1:0] a);
    logic [PA_W-1:0] wa = {a[PA_W-1:3], 3'b000};
    return mem.exists(wa) ? mem[wa] : init_word(wa);
  endfunction

  assign req_ready_o = (busy_cnt == 0) && !stall_i;

  initial begin
    rsp_valid_o = 1'b0;
    rsp_data_o  = '0;
  end

  always @(posedge clk_i) begin
    rsp_valid_o <= 1'b0;
    if (busy_cnt > 0) begin
      busy_cnt <= busy_cnt - 1;
      if (busy_cnt == 1) begin
        rsp_valid_o <= 1'b1;
        rsp_data_o  <= {read_word(rd_addr + 8), read_word(rd_addr)};
      end
    end else if (req_valid_i && req_ready_o) begin
      if (req_i.we) begin
        logic [XLEN-1:0] w;
        logic [PA_W-1:0] wa;
        wa = {req_i.addr[PA_W-1:3], 3'b000};
        w  = read_word(wa);
        for (int b = 0; b < 8; b++) if (req_i.be[b]) w[b*8 +: 8] = req_i.wdata[b*8 +: 8];
        mem[wa] = w;
        n_writes++;
      end else begin
        rd_addr  <= {req_i.addr[PA_W-1:4], 4'b0000};
        busy_cnt <= LAT;
        n_reads++;
      end
    end
  end
endmodule
