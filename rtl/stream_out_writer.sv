// stream_out_writer: the "Stream elrbu out" block, also the core of the eldtrho/elmurho one.
//
// Collects one result array of VALS binary64 values per element from every engine and writes
// them, in element order, densely packed into 512-bit beats, to one buffer in HBM2 through a
// single AXI4 write channel. The host then copies the buffer back and scatters the values into
// the global arrays.
//
// How it works: elements were dealt out round-robin (element e to engine e mod NUM_ENGINES), so
// the elements of one group, one per engine, are taken together in the cycle in which all the
// engines that own an element of the group have one ready; the last group of a chunk may be
// short. The group's values go to a beat_packer, whose beats go to a burst writer. The buffer
// then holds value j of element e at double index e*VALS+j; a chunk occupies
// ceil(n_elems*VALS/8) beats, the last one zero padded.
//
// Control follows the ap_ctrl_chain handshake: ap_start with n_elems and base_addr is taken
// when idle (ap_ready pulses then); ap_done rises once the last write response is back and is
// held until ap_continue. Reading all engines together, packing into 512-bit writes and one AXI4
// channel per variable follow the paper; the order and layout are this design's choices.
module stream_out_writer
  import alya_pkg::*;
#(
  parameter int NUM_ENGINES = 2,
  parameter int VALS        = 12,
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
  input  logic [ADDR_W-1:0]                       base_addr,
  input  logic [NUM_ENGINES-1:0]                  in_valid,
  output logic [NUM_ENGINES-1:0]                  in_ready,
  input  logic [NUM_ENGINES-1:0][VALS-1:0][63:0]  in_data,
  output logic [ADDR_W-1:0]                       m_awaddr,
  output logic [7:0]                              m_awlen,
  output logic                                    m_awvalid,
  input  logic                                    m_awready,
  output logic [511:0]                            m_wdata,
  output logic [63:0]                             m_wstrb,
  output logic                                    m_wlast,
  output logic                                    m_wvalid,
  input  logic                                    m_wready,
  input  logic                                    m_bvalid,
  output logic                                    m_bready
);
  localparam int IN_MAX = NUM_ENGINES * VALS;

  ctrl_state_e  state;
  logic [31:0]  n_q, e_q, group_n;
  logic         wr_busy, pk_empty, pk_in_valid, pk_in_ready, pk_out_valid, pk_out_ready, take;
  logic [511:0] pk_out_data;
  logic [NUM_ENGINES-1:0] need;

  assign ap_idle  = (state == CTRL_IDLE);
  assign ap_ready = ap_start && (state == CTRL_IDLE);
  assign ap_done  = (state == CTRL_DONE);

  always_comb begin
    group_n = ((n_q - e_q) > 32'(NUM_ENGINES)) ? 32'(NUM_ENGINES) : (n_q - e_q);
    for (int k = 0; k < NUM_ENGINES; k++) need[k] = (32'(k) < group_n);
  end

  assign pk_in_valid = (state == CTRL_RUN) && (e_q != n_q) && ((in_valid & need) == need);
  assign take        = pk_in_valid && pk_in_ready;
  assign in_ready    = take ? need : '0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= CTRL_IDLE;
      n_q   <= '0;
      e_q   <= '0;
    end else begin
      unique case (state)
        CTRL_IDLE: if (ap_start) begin
          state <= CTRL_RUN;
          n_q   <= n_elems;
          e_q   <= '0;
        end
        CTRL_RUN: begin
          if (take) e_q <= e_q + group_n;
          if (e_q == n_q && pk_empty && !wr_busy) state <= CTRL_DONE;
        end
        CTRL_DONE: if (ap_continue) state <= CTRL_IDLE;
        default:   state <= CTRL_IDLE;
      endcase
    end
  end

  beat_packer #(.IN_MAX(IN_MAX)) u_pack (
    .clk, .rst_n,
    .in_valid  (pk_in_valid),
    .in_ready  (pk_in_ready),
    .in_data   (in_data),
    .in_n      (8'(group_n * 32'(VALS))),
    .flush     ((state == CTRL_RUN) && (e_q == n_q)),
    .out_valid (pk_out_valid),
    .out_ready (pk_out_ready),
    .out_data  (pk_out_data),
    .empty     (pk_empty)
  );

  axi_burst_writer #(.ADDR_W(ADDR_W), .MAX_BURST(MAX_BURST)) u_wr (
    .clk, .rst_n,
    .start     (ap_ready),
    .base      (base_addr),
    .nbeats    ((n_elems * 32'(VALS) + 32'd7) / 32'd8),
    .busy      (wr_busy),
    .in_valid  (pk_out_valid),
    .in_ready  (pk_out_ready),
    .in_data   (pk_out_data),
    .m_awaddr, .m_awlen, .m_awvalid, .m_awready,
    .m_wdata, .m_wstrb, .m_wlast, .m_wvalid, .m_wready,
    .m_bvalid, .m_bready
  );
endmodule
