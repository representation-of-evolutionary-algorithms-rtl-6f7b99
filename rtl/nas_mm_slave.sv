// nas_mm_slave: transmit half of the Network Abstraction System (NAS). An
// Avalon-MM slave frontend that turns each memory-mapped write into one
// Ethernet frame on the Avalon-ST interface of a 10 Gb Ethernet MAC.
//
// A write accepted on the slave port (s_waitrequest low) is latched and sent
// as a minimum-size frame of eight 64-bit beats, first byte in bits [63:56]:
//   beat 0: destination MAC (6 bytes), source MAC bytes 0-1
//   beat 1: source MAC bytes 2-5, EtherType (2 bytes), sequence number (2)
//   beat 2: the 16-bit word address, zero-extended to 64 bits
//   beat 3: the 64-bit write data
//   beats 4-7: zero padding; beat 7 carries eop with empty = 4, for a
//   60-byte frame to which the MAC appends its 4-byte FCS.
// The slave waits while a frame is being sent, so one write costs at least
// eight cycles; st_ready low stalls the frame.
//
// From the paper: the NAS has master and slave Avalon-MM frontends facing the
// Central and Satellite modules, converts their transactions to a streaming
// Avalon bus and hands that to the Ethernet MAC, over a 10 Gbps link. The
// frame layout, one write per frame, the EtherType and the sequence number
// are this design's own choices.
module nas_mm_slave
  import nde_pkg::*;
#(
  parameter logic [47:0] LOCAL_MAC  = 48'h02_00_00_00_00_01,
  parameter logic [47:0] REMOTE_MAC = 48'h02_00_00_00_00_02,
  parameter logic [15:0] ETHERTYPE  = 16'h88B5
) (
  input  logic        clk,
  input  logic        rst_n,
  // Avalon-MM slave (write only)
  input  logic        s_write,
  input  addr_t       s_address,
  input  word_t       s_writedata,
  output logic        s_waitrequest,
  // Avalon-ST source to the MAC transmitter
  output logic        st_valid,
  input  logic        st_ready,
  output word_t       st_data,
  output logic        st_sop,
  output logic        st_eop,
  output logic [2:0]  st_empty,
  output logic [31:0] frames_sent
);

  logic        active;
  logic [2:0]  beat;
  addr_t       a_q;
  word_t       d_q;
  logic [15:0] seq;

  assign s_waitrequest = active;
  assign st_valid = active;
  assign st_sop = (beat == 3'd0);
  assign st_eop = (beat == 3'd7);
  assign st_empty = st_eop ? 3'd4 : 3'd0;

  always_comb begin
    unique case (beat)
      3'd0: st_data = {REMOTE_MAC, LOCAL_MAC[47:32]};
      3'd1: st_data = {LOCAL_MAC[31:0], ETHERTYPE, seq};
      3'd2: st_data = word_t'(a_q);
      3'd3: st_data = d_q;
      default: st_data = '0;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active <= 1'b0;
      beat <= '0;
      a_q <= '0;
      d_q <= '0;
      seq <= '0;
      frames_sent <= '0;
    end else if (!active) begin
      if (s_write) begin
        active <= 1'b1;
        beat <= '0;
        a_q <= s_address;
        d_q <= s_writedata;
      end
    end else if (st_ready) begin
      beat <= beat + 3'd1;
      if (beat == 3'd7) begin
        active <= 1'b0;
        seq <= seq + 16'd1;
        frames_sent <= frames_sent + 32'd1;
      end
    end
  end

  // Avalon-ST rule: a beat stays on the bus until the sink takes it.
  a_st_hold: assert property (@(posedge clk) disable iff (!rst_n)
    (st_valid && !st_ready) |=> (st_valid && st_data == $past(st_data)));

endmodule
