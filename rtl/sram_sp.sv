// sram_sp: single-port synchronous RAM with a bit-level write mask.
//
// Stands for the SRAM macros that hold the L1 caches' tags, valid bits and
// data. The paper notes that in the evaluated core the valid bits are kept
// together with the tags in sequentially accessible SRAM, so only one set
// can be read or written per cycle; this model has exactly that property.
// It is written as an array, so it synthesises to a memory.
//
// Interface: req_i starts an access to row addr_i. With we_i high, the bits
// of wdata_i selected by wmask_i are written; otherwise the row is read and
// rdata_o shows it from the next cycle on (it holds until the next read).
// Contents are not reset.
module sram_sp #(
  parameter int unsigned WIDTH = 64,
  parameter int unsigned DEPTH = 256
) (
  input  logic                     clk_i,
  input  logic                     req_i,
  input  logic                     we_i,
  input  logic [$clog2(DEPTH)-1:0] addr_i,
  input  logic [WIDTH-1:0]         wdata_i,
  input  logic [WIDTH-1:0]         wmask_i,
  output logic [WIDTH-1:0]         rdata_o
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk_i) begin
    if (req_i) begin
      if (we_i) mem[addr_i] <= (mem[addr_i] & ~wmask_i) | (wdata_i & wmask_i);
      else      rdata_o     <= mem[addr_i];
    end
  end
endmodule
