// forest_mem: on-chip memory of the Central FPGA holding the forest of
// spanning trees in Node-Depth Encoding.
//
// The memory is organised in 64-bit words, two NDE entries per word, with
// N/2 words reserved for each of the NTREES trees, so that any tree can grow
// to hold all N nodes. Word address = {tree, word index}. It has one
// synchronous read port (data one cycle after the address) and one write
// port, the shape of a simple dual-port FPGA block RAM. A read of the word
// being written returns the old contents.
//
// From the paper: the Central FPGA keeps the trees in a local memory, and the
// graph size was bounded by the on-chip memory (4096 nodes fit, 8192 did
// not). The per-tree layout and NTREES are this design's own choices.
module forest_mem
  import nde_pkg::*;
#(
  parameter int unsigned N      = 4096,  // nodes a tree can hold
  parameter int unsigned NTREES = 4,     // trees in the forest
  localparam int unsigned WORDS = NTREES * N / 2,
  localparam int unsigned AW    = $clog2(WORDS)
) (
  input  logic          clk,
  input  logic [AW-1:0] raddr,
  output word_t         rdata,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  word_t         wdata
);

  word_t mem [WORDS];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end

endmodule
