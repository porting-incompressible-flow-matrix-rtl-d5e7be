// stream_in: the "Stream elvel and elcod in" block.
//
// The host gathers each element's velocities (elvel) and coordinates (elcod), 12 binary64
// values each, into chunk buffers in HBM2 and then starts this block with the chunk's element
// count and buffer addresses. The block reads the buffers and feeds every engine one complete
// element of elvel and of elcod per cycle, as two AXI-Stream style outputs per engine.
//
// How it works: one 512-bit beat carries only 8 doubles, too few for a 12-value array, so each
// variable of each engine is split over two buffers (in two HBM2 banks, each behind its own
// AXI4 port): the low buffer holds values 0-5 of an element in bits [383:0] of one beat, the
// high buffer values 6-11; the upper 128 bits of each beat are padding. That makes 4 read ports
// per engine: port 4k+2v+h serves engine k, variable v (0 elvel, 1 elcod), half h (0 low,
// 1 high), with its buffer at base_addr[4k+2v+h]. Elements are dealt out round-robin, element e
// of the chunk to engine e mod NUM_ENGINES, so engine k's buffers hold ceil((n_elems-k)/NUM_ENGINES)
// beats. Each port has a burst reader and a FIFO; an engine's elvel (elcod) word is valid when
// both of its halves are at the FIFO heads, and is then one cycle's transfer.
//
// Control follows the ap_ctrl_chain handshake: ap_start with the arguments is taken when the
// block is idle (ap_ready pulses then), ap_done rises once every beat has been passed to an
// engine and stays high until ap_continue, which returns the block to idle.
// The split of each variable over two banks and ports, the 6+6 value layout and one element per
// cycle per engine follow the paper; the round-robin element distribution, buffer layout and
// control details are this design's choices.
module stream_in
  import alya_pkg::*;
#(
  parameter int NUM_ENGINES = 2,
  parameter int ADDR_W      = 64,
  parameter int MAX_BURST   = 64,
  parameter int FIFO_DEPTH  = 16,
  localparam int NRD        = 4 * NUM_ENGINES
) (
  input  logic                         clk,
  input  logic                         rst_n,
  // ap_ctrl_chain
  input  logic                         ap_start,
  output logic                         ap_ready,
  output logic                         ap_done,
  output logic                         ap_idle,
  input  logic                         ap_continue,
  input  logic [31:0]                  n_elems,
  input  logic [NRD-1:0][ADDR_W-1:0]   base_addr,
  // AXI4 read masters
  output logic [NRD-1:0][ADDR_W-1:0]   m_araddr,
  output logic [NRD-1:0][7:0]          m_arlen,
  output logic [NRD-1:0]               m_arvalid,
  input  logic [NRD-1:0]               m_arready,
  input  logic [NRD-1:0][511:0]        m_rdata,
  input  logic [NRD-1:0]               m_rlast,
  input  logic [NRD-1:0]               m_rvalid,
  output logic [NRD-1:0]               m_rready,
  // per-engine element streams
  output logic [NUM_ENGINES-1:0]       elvel_valid,
  input  logic [NUM_ENGINES-1:0]       elvel_ready,
  output elem_vec_t [NUM_ENGINES-1:0]  elvel_data,
  output logic [NUM_ENGINES-1:0]       elcod_valid,
  input  logic [NUM_ENGINES-1:0]       elcod_ready,
  output elem_vec_t [NUM_ENGINES-1:0]  elcod_data
);
  ctrl_state_e state;
  logic        start_rd;
  logic [NRD-1:0]        rd_busy, rd_valid, rd_ready, f_valid, f_ready;
  logic [NRD-1:0][511:0] rd_data, f_data;
  logic [NUM_ENGINES-1:0][31:0] eng_elems;

  assign ap_idle  = (state == CTRL_IDLE);
  assign ap_ready = ap_start && (state == CTRL_IDLE);
  assign ap_done  = (state == CTRL_DONE);
  assign start_rd = ap_ready;

  always_comb begin
    for (int k = 0; k < NUM_ENGINES; k++)
      eng_elems[k] = (n_elems > 32'(k)) ? (n_elems - 32'(k) + 32'(NUM_ENGINES - 1)) / 32'(NUM_ENGINES) : 32'd0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) state <= CTRL_IDLE;
    else begin
      unique case (state)
        CTRL_IDLE: if (ap_start) state <= CTRL_RUN;
        CTRL_RUN:  if (rd_busy == '0 && f_valid == '0) state <= CTRL_DONE;
        CTRL_DONE: if (ap_continue) state <= CTRL_IDLE;
        default:   state <= CTRL_IDLE;
      endcase
    end
  end

  for (genvar p = 0; p < NRD; p++) begin : g_port
    axi_burst_reader #(.ADDR_W(ADDR_W), .MAX_BURST(MAX_BURST)) u_rd (
      .clk, .rst_n,
      .start     (start_rd),
      .base      (base_addr[p]),
      .nbeats    (eng_elems[p / 4]),
      .busy      (rd_busy[p]),
      .m_araddr  (m_araddr[p]),
      .m_arlen   (m_arlen[p]),
      .m_arvalid (m_arvalid[p]),
      .m_arready (m_arready[p]),
      .m_rdata   (m_rdata[p]),
      .m_rlast   (m_rlast[p]),
      .m_rvalid  (m_rvalid[p]),
      .m_rready  (m_rready[p]),
      .out_valid (rd_valid[p]),
      .out_ready (rd_ready[p]),
      .out_data  (rd_data[p])
    );
    stream_fifo #(.W(512), .DEPTH(FIFO_DEPTH)) u_fifo (
      .clk, .rst_n,
      .in_valid  (rd_valid[p]),
      .in_ready  (rd_ready[p]),
      .in_data   (rd_data[p]),
      .out_valid (f_valid[p]),
      .out_ready (f_ready[p]),
      .out_data  (f_data[p])
    );
  end

  for (genvar k = 0; k < NUM_ENGINES; k++) begin : g_eng
    localparam int PV = 4 * k;       // elvel low, elvel high
    localparam int PC = 4 * k + 2;   // elcod low, elcod high
    assign elvel_valid[k] = f_valid[PV] && f_valid[PV+1];
    assign elvel_data[k]  = {f_data[PV+1][64*HALF_VALS-1:0], f_data[PV][64*HALF_VALS-1:0]};
    assign f_ready[PV]    = elvel_valid[k] && elvel_ready[k];
    assign f_ready[PV+1]  = elvel_valid[k] && elvel_ready[k];
    assign elcod_valid[k] = f_valid[PC] && f_valid[PC+1];
    assign elcod_data[k]  = {f_data[PC+1][64*HALF_VALS-1:0], f_data[PC][64*HALF_VALS-1:0]};
    assign f_ready[PC]    = elcod_valid[k] && elcod_ready[k];
    assign f_ready[PC+1]  = elcod_valid[k] && elcod_ready[k];
  end
endmodule
