// dndewg_top: the distributed NDE evolutionary platform, one Central FPGA and
// NSAT Satellite FPGAs in a star, cut at the Ethernet MAC streaming
// interfaces.
//
// Central side: the host processor loads the forest and starts a run through
// the host_* ports. The Central Controller (with its forest memory)
// broadcasts each tree pair, for every Satellite s, through Flow Controller s
// to the transmit half of NAS s, which frames every write for MAC s
// (c_tx_*[s]). Results come back from MAC s (c_rx_*[s]) through the receive
// half of NAS s. Satellite s: frames from its MAC (s_rx_*[s]) become writes
// into its Worker Controller; its reports and trees leave through its NAS
// transmitter (s_tx_*[s]). The Workers' edge weights come from the
// Satellite's graph memory through mem_*[s].
//
// The MACs, XAUI PHYs, optical links, host processors, JTAG and DDR3
// controllers are outside this module; their signals are ports. Joining
// c_tx[s] to s_rx[s] and s_tx[s] to c_rx[s] (directly or through a link
// model) closes the loops. All FPGAs run on one clock here.
//
// From the paper: the star organisation with a Central FPGA and Satellite
// FPGAs, each holding several Workers and reached over a dedicated link, the
// Flow Controller and NAS on the path, 64-bit data, 4096-node graphs. The
// default of one Satellite is the paper's two-board validation system; its
// simulation results also cover 4 and 8 Satellites. The MAC addresses
// (Central 02:00:00:00:00:01, Satellite s 02:00:00:00:01:s) and the sizes
// marked assumed in the submodules are this design's own choices.
module dndewg_top
  import nde_pkg::*;
#(
  parameter int unsigned N        = 4096,  // nodes of the largest graph
  parameter int unsigned NTREES   = 4,     // trees in the forest
  parameter int unsigned NSAT     = 1,     // Satellite FPGAs
  parameter int unsigned NW       = 4,     // Workers on each Satellite
  parameter int unsigned DMAX     = 4,     // degree restriction
  parameter int unsigned FC_DEPTH = 16,    // Flow Controller FIFO depth
  localparam int unsigned TW      = $clog2(NTREES),
  localparam int unsigned AW      = TW + $clog2(N / 2)
) (
  input  logic             clk,
  input  logic             rst_n,
  // host processor of the Central FPGA
  input  logic             host_we,
  input  logic [AW-1:0]    host_waddr,
  input  word_t            host_wdata,
  input  logic             host_len_we,
  input  logic [TW-1:0]    host_len_tree,
  input  len_t             host_len,
  input  logic [AW-1:0]    host_raddr,
  output word_t            host_rdata,
  input  logic             host_start,
  input  logic [31:0]      host_iterations,
  input  logic [31:0]      host_seed,
  input  logic             host_fc_enable,
  output logic             busy,
  output logic [31:0]      iter_count,
  output logic [31:0]      improvements,
  output logic signed [31:0] delta_sum,
  output logic [31:0]      fc_full_cycles [NSAT],
  output logic [31:0]      c_frames_dropped [NSAT],
  output logic [31:0]      s_frames_dropped [NSAT],
  output logic [31:0]      sat_jobs_done [NSAT],
  // Central FPGA MACs (one per Satellite link), transmit and receive
  output logic [NSAT-1:0]  c_tx_valid,
  input  logic [NSAT-1:0]  c_tx_ready,
  output word_t            c_tx_data [NSAT],
  output logic [NSAT-1:0]  c_tx_sop,
  output logic [NSAT-1:0]  c_tx_eop,
  output logic [2:0]       c_tx_empty [NSAT],
  input  logic [NSAT-1:0]  c_rx_valid,
  output logic [NSAT-1:0]  c_rx_ready,
  input  word_t            c_rx_data [NSAT],
  input  logic [NSAT-1:0]  c_rx_sop,
  input  logic [NSAT-1:0]  c_rx_eop,
  input  logic [NSAT-1:0]  c_rx_error,
  // Satellite FPGA MACs, transmit and receive
  output logic [NSAT-1:0]  s_tx_valid,
  input  logic [NSAT-1:0]  s_tx_ready,
  output word_t            s_tx_data [NSAT],
  output logic [NSAT-1:0]  s_tx_sop,
  output logic [NSAT-1:0]  s_tx_eop,
  output logic [2:0]       s_tx_empty [NSAT],
  input  logic [NSAT-1:0]  s_rx_valid,
  output logic [NSAT-1:0]  s_rx_ready,
  input  word_t            s_rx_data [NSAT],
  input  logic [NSAT-1:0]  s_rx_sop,
  input  logic [NSAT-1:0]  s_rx_eop,
  input  logic [NSAT-1:0]  s_rx_error,
  // Satellite graph (edge weight) memories
  output logic [NSAT-1:0]  mem_req,
  output node_t            mem_u [NSAT],
  output node_t            mem_v [NSAT],
  input  logic [NSAT-1:0]  mem_ack,
  input  wgt_t             mem_data [NSAT]
);

  // ---------------- Central FPGA ----------------
  logic [AW-1:0] fm_raddr, fm_waddr;
  word_t         fm_rdata, fm_wdata;
  logic          fm_we;

  logic [NSAT-1:0] cc_write, cc_wait, cr_write, cr_wait;
  addr_t           cc_addr [NSAT], cr_addr [NSAT];
  word_t           cc_data [NSAT], cr_data [NSAT];

  forest_mem #(.N(N), .NTREES(NTREES)) u_forest (
    .clk, .raddr(fm_raddr), .rdata(fm_rdata), .we(fm_we), .waddr(fm_waddr), .wdata(fm_wdata));

  central_controller #(.N(N), .NTREES(NTREES), .NSAT(NSAT)) u_central (
    .clk, .rst_n,
    .host_we, .host_waddr, .host_wdata, .host_len_we, .host_len_tree, .host_len,
    .host_raddr, .host_rdata, .start(host_start), .iterations(host_iterations), .seed(host_seed),
    .busy, .iter_count, .improvements, .delta_sum,
    .m_write(cc_write), .m_address(cc_addr), .m_writedata(cc_data), .m_waitrequest(cc_wait),
    .s_write(cr_write), .s_address(cr_addr), .s_writedata(cr_data), .s_waitrequest(cr_wait),
    .fm_raddr, .fm_rdata, .fm_we, .fm_waddr, .fm_wdata);

  for (genvar s = 0; s < NSAT; s++) begin : g_link
    localparam logic [47:0] C_MAC = 48'h02_00_00_00_00_01;
    localparam logic [47:0] S_MAC = 48'h02_00_00_00_01_00 + 48'(s);

    logic  fc_write, fc_wait, sj_write, sj_wait, sr_write, sr_wait, sat_busy;
    addr_t fc_addr, sj_addr, sr_addr;
    word_t fc_data, sj_data, sr_data;
    logic [31:0] fc_forwarded, c_sent, c_ok, s_ok, s_sent;

    // Central FPGA side of link s
    flow_controller #(.DEPTH(FC_DEPTH)) u_flow (
      .clk, .rst_n, .enable(host_fc_enable),
      .s_write(cc_write[s]), .s_address(cc_addr[s]), .s_writedata(cc_data[s]), .s_waitrequest(cc_wait[s]),
      .m_write(fc_write), .m_address(fc_addr), .m_writedata(fc_data), .m_waitrequest(fc_wait),
      .forwarded(fc_forwarded), .full_cycles(fc_full_cycles[s]));

    nas_mm_slave #(.LOCAL_MAC(C_MAC), .REMOTE_MAC(S_MAC)) u_c_nas_tx (
      .clk, .rst_n,
      .s_write(fc_write), .s_address(fc_addr), .s_writedata(fc_data), .s_waitrequest(fc_wait),
      .st_valid(c_tx_valid[s]), .st_ready(c_tx_ready[s]), .st_data(c_tx_data[s]), .st_sop(c_tx_sop[s]),
      .st_eop(c_tx_eop[s]), .st_empty(c_tx_empty[s]), .frames_sent(c_sent));

    nas_mm_master #(.LOCAL_MAC(C_MAC)) u_c_nas_rx (
      .clk, .rst_n,
      .st_valid(c_rx_valid[s]), .st_ready(c_rx_ready[s]), .st_data(c_rx_data[s]), .st_sop(c_rx_sop[s]),
      .st_eop(c_rx_eop[s]), .st_error(c_rx_error[s]),
      .m_write(cr_write[s]), .m_address(cr_addr[s]), .m_writedata(cr_data[s]), .m_waitrequest(cr_wait[s]),
      .frames_ok(c_ok), .frames_dropped(c_frames_dropped[s]));

    // Satellite FPGA s
    nas_mm_master #(.LOCAL_MAC(S_MAC)) u_s_nas_rx (
      .clk, .rst_n,
      .st_valid(s_rx_valid[s]), .st_ready(s_rx_ready[s]), .st_data(s_rx_data[s]), .st_sop(s_rx_sop[s]),
      .st_eop(s_rx_eop[s]), .st_error(s_rx_error[s]),
      .m_write(sj_write), .m_address(sj_addr), .m_writedata(sj_data), .m_waitrequest(sj_wait),
      .frames_ok(s_ok), .frames_dropped(s_frames_dropped[s]));

    worker_controller #(.N(N), .NW(NW), .DMAX(DMAX), .SAT_ID(s)) u_workers (
      .clk, .rst_n,
      .s_write(sj_write), .s_address(sj_addr), .s_writedata(sj_data), .s_waitrequest(sj_wait),
      .m_write(sr_write), .m_address(sr_addr), .m_writedata(sr_data), .m_waitrequest(sr_wait),
      .mem_req(mem_req[s]), .mem_u(mem_u[s]), .mem_v(mem_v[s]), .mem_ack(mem_ack[s]), .mem_data(mem_data[s]),
      .busy(sat_busy), .jobs_done(sat_jobs_done[s]));

    nas_mm_slave #(.LOCAL_MAC(S_MAC), .REMOTE_MAC(C_MAC)) u_s_nas_tx (
      .clk, .rst_n,
      .s_write(sr_write), .s_address(sr_addr), .s_writedata(sr_data), .s_waitrequest(sr_wait),
      .st_valid(s_tx_valid[s]), .st_ready(s_tx_ready[s]), .st_data(s_tx_data[s]), .st_sop(s_tx_sop[s]),
      .st_eop(s_tx_eop[s]), .st_empty(s_tx_empty[s]), .frames_sent(s_sent));
  end

endmodule
