// nas_mm_master: receive half of the Network Abstraction System (NAS). It
// takes Ethernet frames from the Avalon-ST interface of a 10 Gb Ethernet MAC
// and replays the write each one carries on an Avalon-MM master frontend.
//
// Frames have the layout written by nas_mm_slave (destination MAC, source
// MAC, EtherType, sequence number, then the word address in beat 2 and the
// data in beat 3). A frame is dropped, and counted, when its destination is
// not LOCAL_MAC, its EtherType is not ETHERTYPE, it is shorter than four
// beats, or the MAC flags an error on its last beat. Beats after the fourth
// are ignored. At the end of a good frame the master asserts m_write and
// holds it until m_waitrequest is low; st_ready stays low meanwhile, so the
// MAC is back-pressured. Latency: m_write rises the cycle after the eop beat.
//
// From the paper: the NAS master frontend, the conversion between the
// streaming bus of the MAC and memory-mapped transactions. Frame filtering
// and error handling are this design's own choices.
module nas_mm_master
  import nde_pkg::*;
#(
  parameter logic [47:0] LOCAL_MAC = 48'h02_00_00_00_00_02,
  parameter logic [15:0] ETHERTYPE = 16'h88B5
) (
  input  logic        clk,
  input  logic        rst_n,
  // Avalon-ST sink from the MAC receiver
  input  logic        st_valid,
  output logic        st_ready,
  input  word_t       st_data,
  input  logic        st_sop,
  input  logic        st_eop,
  input  logic        st_error,
  // Avalon-MM master (write only)
  output logic        m_write,
  output addr_t       m_address,
  output word_t       m_writedata,
  input  logic        m_waitrequest,
  output logic [31:0] frames_ok,
  output logic [31:0] frames_dropped
);

  logic       in_frame, good, pend;
  logic [2:0] beat;
  addr_t      a_q;
  word_t      d_q;
  logic       take;

  assign st_ready = !pend;
  assign take = st_valid && st_ready;
  assign m_write = pend;
  assign m_address = a_q;
  assign m_writedata = d_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in_frame <= 1'b0; good <= 1'b0; pend <= 1'b0; beat <= '0;
      a_q <= '0; d_q <= '0; frames_ok <= '0; frames_dropped <= '0;
    end else begin
      if (pend && !m_waitrequest) pend <= 1'b0;
      if (take) begin
        logic g;
        logic [2:0] b;
        g = good;
        b = beat;
        if (st_sop) begin
          g = 1'b1;
          b = 3'd0;
        end else if (!in_frame) begin
          g = 1'b0;          // data outside a frame
        end
        unique case (b)
          3'd0: if (st_data[63:16] != LOCAL_MAC) g = 1'b0;
          3'd1: if (st_data[31:16] != ETHERTYPE) g = 1'b0;
          3'd2: a_q <= addr_t'(st_data);
          3'd3: d_q <= st_data;
          default: ;
        endcase
        if (st_eop) begin
          in_frame <= 1'b0;
          if (g && !st_error && b >= 3'd3) begin
            pend <= 1'b1;
            frames_ok <= frames_ok + 32'd1;
          end else begin
            frames_dropped <= frames_dropped + 32'd1;
          end
        end else begin
          in_frame <= st_sop || in_frame;
        end
        good <= g;
        beat <= (b == 3'd7) ? 3'd7 : b + 3'd1;
      end
    end
  end

  // Avalon-MM rule: the command is held while waitrequest is high.
  a_mm_hold: assert property (@(posedge clk) disable iff (!rst_n)
    (m_write && m_waitrequest) |=> (m_write && m_address == $past(m_address) &&
                                    m_writedata == $past(m_writedata)));

endmodule
