// axi_burst_writer: writes a stream of 512-bit beats to a contiguous buffer over AXI4.
//
// Started with a byte address and a beat count, it issues INCR write bursts of up to MAX_BURST
// beats on the address channel independently of the data, sends the beats it is given on the
// write-data channel with wlast closing each burst, and counts the write responses. `busy` is
// high from the start until the response of the last burst has arrived, so the caller knows the
// data is in memory. All byte strobes are set. As for the reader, a single ID, 64-byte beats
// and 4 KiB aligned buffers are assumed.
module axi_burst_writer #(
  parameter int ADDR_W    = 64,
  parameter int MAX_BURST = 64
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [ADDR_W-1:0] base,
  input  logic [31:0]       nbeats,
  output logic              busy,
  // beat stream
  input  logic              in_valid,
  output logic              in_ready,
  input  logic [511:0]      in_data,
  // AXI4 write address / data / response
  output logic [ADDR_W-1:0] m_awaddr,
  output logic [7:0]        m_awlen,
  output logic              m_awvalid,
  input  logic              m_awready,
  output logic [511:0]      m_wdata,
  output logic [63:0]       m_wstrb,
  output logic              m_wlast,
  output logic              m_wvalid,
  input  logic              m_wready,
  input  logic              m_bvalid,
  output logic              m_bready
);
  localparam int BW = $clog2(MAX_BURST);

  logic [31:0]       issue_rem, wr_rem, resp_rem, blen;
  logic [ADDR_W-1:0] next_addr;
  logic [BW-1:0]     beat_in_burst;

  assign blen      = (issue_rem > 32'(MAX_BURST)) ? 32'(MAX_BURST) : issue_rem;
  assign m_awaddr  = next_addr;
  assign m_awlen   = 8'(blen - 32'd1);
  assign m_awvalid = (issue_rem != 0);
  assign m_wvalid  = in_valid && (wr_rem != 0);
  assign m_wdata   = in_data;
  assign m_wstrb   = '1;
  assign m_wlast   = (beat_in_burst == BW'(MAX_BURST - 1)) || (wr_rem == 32'd1);
  assign in_ready  = m_wready && (wr_rem != 0);
  assign m_bready  = 1'b1;
  assign busy      = (issue_rem != 0) || (wr_rem != 0) || (resp_rem != 0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      issue_rem     <= '0;
      wr_rem        <= '0;
      resp_rem      <= '0;
      next_addr     <= '0;
      beat_in_burst <= '0;
    end else if (start && !busy) begin
      issue_rem     <= nbeats;
      wr_rem        <= nbeats;
      resp_rem      <= (nbeats + 32'(MAX_BURST - 1)) / 32'(MAX_BURST);
      next_addr     <= base;
      beat_in_burst <= '0;
    end else begin
      if (m_awvalid && m_awready) begin
        issue_rem <= issue_rem - blen;
        next_addr <= next_addr + ADDR_W'(blen * 32'(64));
      end
      if (m_wvalid && m_wready) begin
        wr_rem        <= wr_rem - 32'd1;
        beat_in_burst <= m_wlast ? '0 : beat_in_burst + 1'b1;
      end
      if (m_bvalid && resp_rem != 0) resp_rem <= resp_rem - 32'd1;
    end
  end
endmodule
