// write_buffer: FIFO of pending stores between the write-through L1 data
// cache and the L2.
//
// Every store the L1-D accepts is also queued here and later written to the
// L2, one entry at a time, so the store unit does not stall on the L2. The
// paper enlarges this buffer to 40 entries in the evaluated core; that is the
// default depth. The paper does not describe its insides: this design uses a
// plain in-order FIFO without merging of stores to the same line.
//
// Interface: push_i with a free slot (full_o low) enqueues entry_i. The head
// entry is offered on head_o with valid_o; it leaves when pop_i is high.
// empty_o tells the cache and the fence controller that all stores have
// reached the L2. count_o is the number of entries held.
module write_buffer
  import tp_pkg::*;
#(
  parameter int unsigned DEPTH = 40
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic        push_i,
  input  wbuf_entry_t entry_i,
  output logic        full_o,
  output logic        valid_o,
  output wbuf_entry_t head_o,
  input  logic        pop_i,
  output logic        empty_o,
  output logic [$clog2(DEPTH+1)-1:0] count_o
);
  localparam int unsigned PW = $clog2(DEPTH);
  localparam int unsigned CW = $clog2(DEPTH + 1);

  wbuf_entry_t   mem [DEPTH];
  logic [PW-1:0] rd_q, wr_q;
  logic [CW-1:0] cnt_q;
  logic          do_push, do_pop;

  assign full_o  = (cnt_q == CW'(DEPTH));
  assign empty_o = (cnt_q == '0);
  assign valid_o = !empty_o;
  assign head_o  = mem[rd_q];
  assign count_o = cnt_q;
  assign do_push = push_i && !full_o;
  assign do_pop  = pop_i && !empty_o;

  always_ff @(posedge clk_i) begin
    if (do_push) mem[wr_q] <= entry_i;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rd_q  <= '0;
      wr_q  <= '0;
      cnt_q <= '0;
    end else begin
      if (do_push) wr_q <= (int'(wr_q) == DEPTH - 1) ? '0 : wr_q + PW'(1);
      if (do_pop)  rd_q <= (int'(rd_q) == DEPTH - 1) ? '0 : rd_q + PW'(1);
      cnt_q <= cnt_q + CW'(do_push) - CW'(do_pop);
    end
  end

  a_no_overflow: assert property (@(posedge clk_i) disable iff (!rst_ni) !(push_i && full_o));
endmodule
