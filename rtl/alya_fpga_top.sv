// alya_fpga_top: FPGA side of the streamed Alya incompressible-flow matrix assembly.
//
// The host splits the mesh into chunks of elements. For each chunk it gathers every element's
// velocities and coordinates into buffers in HBM2 and starts three streaming blocks: stream_in
// reads the buffers and feeds NUM_ENGINES matrix assembly engines one element per cycle each;
// the engines turn elements into results; stream_out_writer (elrbu) and stream_dt_mass_out
// (eldtrho, elmurho) write the results of all engines back to HBM2, from where the host copies
// them and accumulates them into the global arrays. The irregular, index-driven gathers and
// scatters thus stay on the host and the FPGA only ever sees long contiguous bursts.
//
// Element e of a chunk is processed by engine e mod NUM_ENGINES. Each streaming block has its
// own ap_ctrl_chain control (prefixes in_, rbu_, dtm_) so the host can start the blocks of one
// chunk and wait for each one's done independently. Memory ports: 4*NUM_ENGINES AXI4 read
// masters (m_rd_*, port 4k+2v+h for engine k, variable v, half h, see stream_in), and three
// AXI4 write masters (m_wr_*, index 0 elrbu, 1 eldtrho, 2 elmurho), all 512 bits wide.
//
// The six computational stages of each engine are not part of this RTL; their streams are
// ports of this module, prefixed eng_ and indexed by engine (see assembly_engine for what each
// carries). The block structure (one input block, engines, two output blocks) follows the
// paper's streaming architecture; the default of two engines is its configuration that keeps
// all computation on the FPGA.
module alya_fpga_top
  import alya_pkg::*;
#(
  parameter int NUM_ENGINES = 2,
  parameter int ADDR_W      = 64,
  parameter int MAX_BURST   = 64,
  parameter int FIFO_DEPTH  = 16,
  parameter int CARTD_W     = 13 * 64,
  localparam int NRD        = 4 * NUM_ENGINES,
  localparam int NE         = NUM_ENGINES
) (
  input  logic                         clk,
  input  logic                         rst_n,
  // control: stream_in
  input  logic                         in_ap_start,
  output logic                         in_ap_ready,
  output logic                         in_ap_done,
  output logic                         in_ap_idle,
  input  logic                         in_ap_continue,
  input  logic [31:0]                  in_n_elems,
  input  logic [NRD-1:0][ADDR_W-1:0]   in_base_addr,
  // control: elrbu output
  input  logic                         rbu_ap_start,
  output logic                         rbu_ap_ready,
  output logic                         rbu_ap_done,
  output logic                         rbu_ap_idle,
  input  logic                         rbu_ap_continue,
  input  logic [31:0]                  rbu_n_elems,
  input  logic [ADDR_W-1:0]            rbu_base_addr,
  // control: eldtrho / elmurho output
  input  logic                         dtm_ap_start,
  output logic                         dtm_ap_ready,
  output logic                         dtm_ap_done,
  output logic                         dtm_ap_idle,
  input  logic                         dtm_ap_continue,
  input  logic [31:0]                  dtm_n_elems,
  input  logic [ADDR_W-1:0]            dtm_dt_base_addr,
  input  logic [ADDR_W-1:0]            dtm_mass_base_addr,
  // AXI4 read masters to HBM2
  output logic [NRD-1:0][ADDR_W-1:0]   m_rd_araddr,
  output logic [NRD-1:0][7:0]          m_rd_arlen,
  output logic [NRD-1:0]               m_rd_arvalid,
  input  logic [NRD-1:0]               m_rd_arready,
  input  logic [NRD-1:0][511:0]        m_rd_rdata,
  input  logic [NRD-1:0]               m_rd_rlast,
  input  logic [NRD-1:0]               m_rd_rvalid,
  output logic [NRD-1:0]               m_rd_rready,
  // AXI4 write masters to HBM2: 0 elrbu, 1 eldtrho, 2 elmurho
  output logic [2:0][ADDR_W-1:0]       m_wr_awaddr,
  output logic [2:0][7:0]              m_wr_awlen,
  output logic [2:0]                   m_wr_awvalid,
  input  logic [2:0]                   m_wr_awready,
  output logic [2:0][511:0]            m_wr_wdata,
  output logic [2:0][63:0]             m_wr_wstrb,
  output logic [2:0]                   m_wr_wlast,
  output logic [2:0]                   m_wr_wvalid,
  input  logic [2:0]                   m_wr_wready,
  input  logic [2:0]                   m_wr_bvalid,
  output logic [2:0]                   m_wr_bready,
  // streams of the engines' computational stages
  output logic [NE-1:0]                eng_cd_elvel_valid,
  input  logic [NE-1:0]                eng_cd_elvel_ready,
  output elem_vec_t [NE-1:0]           eng_cd_elvel_data,
  output logic [NE-1:0]                eng_cd_elcod_valid,
  input  logic [NE-1:0]                eng_cd_elcod_ready,
  output elem_vec_t [NE-1:0]           eng_cd_elcod_data,
  input  logic [NE-1:0]                eng_cartd_valid,
  output logic [NE-1:0]                eng_cartd_ready,
  input  logic [NE-1:0][CARTD_W-1:0]   eng_cartd_data,
  output logic [NE-1:0]                eng_tau_valid,
  input  logic [NE-1:0]                eng_tau_ready,
  output logic [NE-1:0][CARTD_W-1:0]   eng_tau_data,
  output logic [NE-1:0]                eng_gpv_valid,
  input  logic [NE-1:0]                eng_gpv_ready,
  output logic [NE-1:0][CARTD_W-1:0]   eng_gpv_data,
  input  logic [NE-1:0]                eng_conv_gp_valid,
  output logic [NE-1:0]                eng_conv_gp_ready,
  input  elem_vec_t [NE-1:0]           eng_conv_gp_data,
  input  logic [NE-1:0]                eng_visc_gp_valid,
  output logic [NE-1:0]                eng_visc_gp_ready,
  input  elem_vec_t [NE-1:0]           eng_visc_gp_data,
  input  logic [NE-1:0]                eng_dt_valid,
  output logic [NE-1:0]                eng_dt_ready,
  input  node_vec_t [NE-1:0]           eng_dt_data,
  input  logic [NE-1:0]                eng_mass_valid,
  output logic [NE-1:0]                eng_mass_ready,
  input  node_vec_t [NE-1:0]           eng_mass_data
);
  logic [NE-1:0]      elvel_valid, elvel_ready, elcod_valid, elcod_ready;
  elem_vec_t [NE-1:0] elvel_data, elcod_data;
  logic [NE-1:0]      rbu_valid, rbu_ready, dt_valid, dt_ready, mass_valid, mass_ready;
  elem_vec_t [NE-1:0] rbu_data;
  node_vec_t [NE-1:0] dt_data, mass_data;

  stream_in #(.NUM_ENGINES(NE), .ADDR_W(ADDR_W), .MAX_BURST(MAX_BURST), .FIFO_DEPTH(FIFO_DEPTH)) u_in (
    .clk, .rst_n,
    .ap_start (in_ap_start), .ap_ready (in_ap_ready), .ap_done (in_ap_done), .ap_idle (in_ap_idle),
    .ap_continue (in_ap_continue), .n_elems (in_n_elems), .base_addr (in_base_addr),
    .m_araddr (m_rd_araddr), .m_arlen (m_rd_arlen), .m_arvalid (m_rd_arvalid), .m_arready (m_rd_arready),
    .m_rdata (m_rd_rdata), .m_rlast (m_rd_rlast), .m_rvalid (m_rd_rvalid), .m_rready (m_rd_rready),
    .elvel_valid, .elvel_ready, .elvel_data, .elcod_valid, .elcod_ready, .elcod_data
  );

  for (genvar k = 0; k < NE; k++) begin : g_engine
    assembly_engine #(.CARTD_W(CARTD_W), .FIFO_DEPTH(FIFO_DEPTH)) u_engine (
      .clk, .rst_n,
      .elvel_valid (elvel_valid[k]), .elvel_ready (elvel_ready[k]), .elvel_data (elvel_data[k]),
      .elcod_valid (elcod_valid[k]), .elcod_ready (elcod_ready[k]), .elcod_data (elcod_data[k]),
      .cd_elvel_valid (eng_cd_elvel_valid[k]), .cd_elvel_ready (eng_cd_elvel_ready[k]), .cd_elvel_data (eng_cd_elvel_data[k]),
      .cd_elcod_valid (eng_cd_elcod_valid[k]), .cd_elcod_ready (eng_cd_elcod_ready[k]), .cd_elcod_data (eng_cd_elcod_data[k]),
      .cartd_valid (eng_cartd_valid[k]), .cartd_ready (eng_cartd_ready[k]), .cartd_data (eng_cartd_data[k]),
      .tau_valid (eng_tau_valid[k]), .tau_ready (eng_tau_ready[k]), .tau_data (eng_tau_data[k]),
      .gpv_valid (eng_gpv_valid[k]), .gpv_ready (eng_gpv_ready[k]), .gpv_data (eng_gpv_data[k]),
      .conv_gp_valid (eng_conv_gp_valid[k]), .conv_gp_ready (eng_conv_gp_ready[k]), .conv_gp_data (eng_conv_gp_data[k]),
      .visc_gp_valid (eng_visc_gp_valid[k]), .visc_gp_ready (eng_visc_gp_ready[k]), .visc_gp_data (eng_visc_gp_data[k]),
      .dt_valid (eng_dt_valid[k]), .dt_ready (eng_dt_ready[k]), .dt_data (eng_dt_data[k]),
      .mass_valid (eng_mass_valid[k]), .mass_ready (eng_mass_ready[k]), .mass_data (eng_mass_data[k]),
      .elrbu_valid (rbu_valid[k]), .elrbu_ready (rbu_ready[k]), .elrbu_data (rbu_data[k]),
      .eldtrho_valid (dt_valid[k]), .eldtrho_ready (dt_ready[k]), .eldtrho_data (dt_data[k]),
      .elmurho_valid (mass_valid[k]), .elmurho_ready (mass_ready[k]), .elmurho_data (mass_data[k])
    );
  end

  stream_out_writer #(.NUM_ENGINES(NE), .VALS(ELEM_VALS), .ADDR_W(ADDR_W), .MAX_BURST(MAX_BURST)) u_rbu_out (
    .clk, .rst_n,
    .ap_start (rbu_ap_start), .ap_ready (rbu_ap_ready), .ap_done (rbu_ap_done), .ap_idle (rbu_ap_idle),
    .ap_continue (rbu_ap_continue), .n_elems (rbu_n_elems), .base_addr (rbu_base_addr),
    .in_valid (rbu_valid), .in_ready (rbu_ready), .in_data (rbu_data),
    .m_awaddr (m_wr_awaddr[0]), .m_awlen (m_wr_awlen[0]), .m_awvalid (m_wr_awvalid[0]), .m_awready (m_wr_awready[0]),
    .m_wdata (m_wr_wdata[0]), .m_wstrb (m_wr_wstrb[0]), .m_wlast (m_wr_wlast[0]), .m_wvalid (m_wr_wvalid[0]),
    .m_wready (m_wr_wready[0]), .m_bvalid (m_wr_bvalid[0]), .m_bready (m_wr_bready[0])
  );

  stream_dt_mass_out #(.NUM_ENGINES(NE), .VALS(PNODE), .ADDR_W(ADDR_W), .MAX_BURST(MAX_BURST)) u_dtm_out (
    .clk, .rst_n,
    .ap_start (dtm_ap_start), .ap_ready (dtm_ap_ready), .ap_done (dtm_ap_done), .ap_idle (dtm_ap_idle),
    .ap_continue (dtm_ap_continue), .n_elems (dtm_n_elems),
    .dt_base_addr (dtm_dt_base_addr), .mass_base_addr (dtm_mass_base_addr),
    .dt_valid, .dt_ready, .dt_data, .mass_valid, .mass_ready, .mass_data,
    .m_dt_awaddr (m_wr_awaddr[1]), .m_dt_awlen (m_wr_awlen[1]), .m_dt_awvalid (m_wr_awvalid[1]), .m_dt_awready (m_wr_awready[1]),
    .m_dt_wdata (m_wr_wdata[1]), .m_dt_wstrb (m_wr_wstrb[1]), .m_dt_wlast (m_wr_wlast[1]), .m_dt_wvalid (m_wr_wvalid[1]),
    .m_dt_wready (m_wr_wready[1]), .m_dt_bvalid (m_wr_bvalid[1]), .m_dt_bready (m_wr_bready[1]),
    .m_mass_awaddr (m_wr_awaddr[2]), .m_mass_awlen (m_wr_awlen[2]), .m_mass_awvalid (m_wr_awvalid[2]), .m_mass_awready (m_wr_awready[2]),
    .m_mass_wdata (m_wr_wdata[2]), .m_mass_wstrb (m_wr_wstrb[2]), .m_mass_wlast (m_wr_wlast[2]), .m_mass_wvalid (m_wr_wvalid[2]),
    .m_mass_wready (m_wr_wready[2]), .m_mass_bvalid (m_wr_bvalid[2]), .m_mass_bready (m_wr_bready[2])
  );
endmodule
