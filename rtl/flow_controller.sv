// flow_controller: the Flow Controller between the Central Controller and
// the Network Abstraction System (NAS) on the Central FPGA.
//
// It decouples the Central Controller, which issues one 64-bit write every
// few cycles, from the NAS, which needs several cycles per write to frame
// it for Ethernet. Writes (address and data) enter a DEPTH-entry FIFO on an
// Avalon-MM slave port; s_waitrequest is raised while the FIFO is full. The
// FIFO head is presented on an Avalon-MM master port and leaves it when the
// NAS does not assert m_waitrequest. The host processor can hold the output
// with enable low (the figure shows the processor driving this block); a
// write already presented stays until it is taken. The host also
// reads the number of forwarded writes and the times the FIFO was full.
// Latency: a write reaches the master port the cycle after it is accepted.
//
// The paper only names this block and places it in its figure. Its function
// as a FIFO with backpressure, the depth, the enable input and the counters
// are this design's own choices.
module flow_controller
  import nde_pkg::*;
#(
  parameter int unsigned DEPTH = 16,
  localparam int unsigned PW = $clog2(DEPTH)
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  enable,
  input  logic  s_write,
  input  addr_t s_address,
  input  word_t s_writedata,
  output logic  s_waitrequest,
  output logic  m_write,
  output addr_t m_address,
  output word_t m_writedata,
  input  logic  m_waitrequest,
  output logic [31:0] forwarded,
  output logic [31:0] full_cycles
);

  typedef struct packed {
    addr_t a;
    word_t d;
  } wr_t;

  wr_t fifo [DEPTH];
  logic [PW:0] count;
  logic [PW-1:0] rd_ptr, wr_ptr;
  logic push, pop;
  logic holding;   // a write is on the master port waiting to be taken

  assign s_waitrequest = (count == (PW+1)'(DEPTH));
  assign push = s_write && !s_waitrequest;
  assign m_write = (enable || holding) && (count != '0);
  assign pop = m_write && !m_waitrequest;
  assign m_address = fifo[rd_ptr].a;
  assign m_writedata = fifo[rd_ptr].d;

  always_ff @(posedge clk) begin
    if (push) fifo[wr_ptr] <= '{a: s_address, d: s_writedata};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      count <= '0;
      rd_ptr <= '0;
      wr_ptr <= '0;
      forwarded <= '0;
      full_cycles <= '0;
      holding <= 1'b0;
    end else begin
      holding <= m_write && m_waitrequest;
      if (push) wr_ptr <= (32'(wr_ptr) == DEPTH - 1) ? '0 : wr_ptr + 1'b1;
      if (pop) rd_ptr <= (32'(rd_ptr) == DEPTH - 1) ? '0 : rd_ptr + 1'b1;
      count <= count + (PW+1)'(push) - (PW+1)'(pop);
      if (pop) forwarded <= forwarded + 32'd1;
      if (s_write && s_waitrequest) full_cycles <= full_cycles + 32'd1;
    end
  end

  // Avalon-MM rule: a master holds its command while waitrequest is high.
  property p_hold;
    @(posedge clk) disable iff (!rst_n)
      (m_write && m_waitrequest) |=> (m_write && m_address == $past(m_address) &&
                                      m_writedata == $past(m_writedata));
  endproperty
  a_hold: assert property (p_hold);

endmodule
