// stream_dt_mass_out: the "Stream eldtrho and elmurho out" block.
//
// Writes the two per-node results of every element, eldtrho and elmurho (VALS = 4 binary64
// values each), from all engines to two buffers in HBM2, one AXI4 write channel per variable.
// It is two stream_out_writer cores, one per variable, under a single ap_ctrl_chain control:
// ap_start starts both with the same element count, ap_done rises when both have their last
// write response and is held until ap_continue. Packing, order and layout are those of
// stream_out_writer. One AXI4 channel per variable follows the paper's multi-engine
// description; the shared control is this design's choice.
module stream_dt_mass_out
  import alya_pkg::*;
#(
  parameter int NUM_ENGINES = 2,
  parameter int VALS        = PNODE,
  parameter int ADDR_W      = 64,
  parameter int MAX_BURST   = 64
) (
  input  logic                                    clk,
  input  logic                                    rst_n,
  input  logic                                    ap_start,
  output logic                                    ap_ready,
  output logic                                    ap_done,
  output logic                                    ap_idle,
  input  logic                                    ap_continue,
  input  logic [31:0]                             n_elems,
  input  logic [ADDR_W-1:0]                       dt_base_addr,
  input  logic [ADDR_W-1:0]                       mass_base_addr,
  input  logic [NUM_ENGINES-1:0]                  dt_valid,
  output logic [NUM_ENGINES-1:0]                  dt_ready,
  input  logic [NUM_ENGINES-1:0][VALS-1:0][63:0]  dt_data,
  input  logic [NUM_ENGINES-1:0]                  mass_valid,
  output logic [NUM_ENGINES-1:0]                  mass_ready,
  input  logic [NUM_ENGINES-1:0][VALS-1:0][63:0]  mass_data,
  // AXI4 write master for eldtrho
  output logic [ADDR_W-1:0] m_dt_awaddr,
  output logic [7:0]        m_dt_awlen,
  output logic              m_dt_awvalid,
  input  logic              m_dt_awready,
  output logic [511:0]      m_dt_wdata,
  output logic [63:0]       m_dt_wstrb,
  output logic              m_dt_wlast,
  output logic              m_dt_wvalid,
  input  logic              m_dt_wready,
  input  logic              m_dt_bvalid,
  output logic              m_dt_bready,
  // AXI4 write master for elmurho
  output logic [ADDR_W-1:0] m_mass_awaddr,
  output logic [7:0]        m_mass_awlen,
  output logic              m_mass_awvalid,
  input  logic              m_mass_awready,
  output logic [511:0]      m_mass_wdata,
  output logic [63:0]       m_mass_wstrb,
  output logic              m_mass_wlast,
  output logic              m_mass_wvalid,
  input  logic              m_mass_wready,
  input  logic              m_mass_bvalid,
  output logic              m_mass_bready
);
  logic dt_ap_ready, dt_ap_done, dt_ap_idle, mass_ap_ready, mass_ap_done, mass_ap_idle;
  logic start_both, cont_both;

  assign ap_idle    = dt_ap_idle && mass_ap_idle;
  assign start_both = ap_start && ap_idle;
  assign ap_ready   = dt_ap_ready && mass_ap_ready;
  assign ap_done    = dt_ap_done && mass_ap_done;
  assign cont_both  = ap_continue && ap_done;

  stream_out_writer #(.NUM_ENGINES(NUM_ENGINES), .VALS(VALS), .ADDR_W(ADDR_W), .MAX_BURST(MAX_BURST)) u_dt (
    .clk, .rst_n,
    .ap_start (start_both), .ap_ready (dt_ap_ready), .ap_done (dt_ap_done), .ap_idle (dt_ap_idle),
    .ap_continue (cont_both), .n_elems, .base_addr (dt_base_addr),
    .in_valid (dt_valid), .in_ready (dt_ready), .in_data (dt_data),
    .m_awaddr (m_dt_awaddr), .m_awlen (m_dt_awlen), .m_awvalid (m_dt_awvalid), .m_awready (m_dt_awready),
    .m_wdata (m_dt_wdata), .m_wstrb (m_dt_wstrb), .m_wlast (m_dt_wlast), .m_wvalid (m_dt_wvalid),
    .m_wready (m_dt_wready), .m_bvalid (m_dt_bvalid), .m_bready (m_dt_bready)
  );

  stream_out_writer #(.NUM_ENGINES(NUM_ENGINES), .VALS(VALS), .ADDR_W(ADDR_W), .MAX_BURST(MAX_BURST)) u_mass (
    .clk, .rst_n,
    .ap_start (start_both), .ap_ready (mass_ap_ready), .ap_done (mass_ap_done), .ap_idle (mass_ap_idle),
    .ap_continue (cont_both), .n_elems, .base_addr (mass_base_addr),
    .in_valid (mass_valid), .in_ready (mass_ready), .in_data (mass_data),
    .m_awaddr (m_mass_awaddr), .m_awlen (m_mass_awlen), .m_awvalid (m_mass_awvalid), .m_awready (m_mass_awready),
    .m_wdata (m_mass_wdata), .m_wstrb (m_mass_wstrb), .m_wlast (m_mass_wlast), .m_wvalid (m_mass_wvalid),
    .m_wready (m_mass_wready), .m_bvalid (m_mass_bvalid), .m_bready (m_mass_bready)
  );
endmodule
