// axi_burst_reader: reads a contiguous buffer of 512-bit beats over an AXI4 read channel.
//
// Started with a byte address and a beat count, it issues INCR read bursts of up to MAX_BURST
// beats (the last one shorter), as many as the memory accepts, and streams the returned beats
// out in order through a valid/ready port; rready is the consumer's ready, so a slow consumer
// back-pressures the memory. `busy` stays high from the start until the last beat has been
// handed on. Long contiguous bursts are how the streaming blocks avoid paying a request cost
// for every access. Only the AXI4 signals this design needs are present: a single ID, 64-byte
// beats (size 6) and INCR bursts are implied. Buffers must be 4 KiB aligned so that no burst
// crosses a 4 KiB boundary (MAX_BURST*64 <= 4096).
module axi_burst_reader #(
  parameter int ADDR_W    = 64,
  parameter int MAX_BURST = 64
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [ADDR_W-1:0] base,
  input  logic [31:0]       nbeats,
  output logic              busy,
  // AXI4 read address / data
  output logic [ADDR_W-1:0] m_araddr,
  output logic [7:0]        m_arlen,
  output logic              m_arvalid,
  input  logic              m_arready,
  input  logic [511:0]      m_rdata,
  input  logic              m_rlast,
  input  logic              m_rvalid,
  output logic              m_rready,
  // beat stream
  output logic              out_valid,
  input  logic              out_ready,
  output logic [511:0]      out_data
);
  logic [31:0]       issue_rem, recv_rem;
  logic [ADDR_W-1:0] next_addr;
  logic [31:0]       blen;

  assign blen      = (issue_rem > 32'(MAX_BURST)) ? 32'(MAX_BURST) : issue_rem;
  assign m_araddr  = next_addr;
  assign m_arlen   = 8'(blen - 32'd1);
  assign m_arvalid = (issue_rem != 0);
  assign out_valid = m_rvalid && (recv_rem != 0);
  assign out_data  = m_rdata;
  assign m_rready  = out_ready && (recv_rem != 0);
  assign busy      = (issue_rem != 0) || (recv_rem != 0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      issue_rem <= '0;
      recv_rem  <= '0;
      next_addr <= '0;
    end else if (start && !busy) begin
      issue_rem <= nbeats;
      recv_rem  <= nbeats;
      next_addr <= base;
    end else begin
      if (m_arvalid && m_arready) begin
        issue_rem <= issue_rem - blen;
        next_addr <= next_addr + ADDR_W'(blen * 32'(64));
      end
      if (m_rvalid && m_rready) recv_rem <= recv_rem - 32'd1;
    end
  end

  a_no_4k_cross: assert property (@(posedge clk) disable iff (!rst_n)
      m_arvalid |-> ((next_addr[11:0] + 13'(blen * 32'(64))) <= 13'h1000))
    else $error("axi_burst_reader: burst crosses a 4 KiB boundary");
  a_rlast: assert property (@(posedge clk) disable iff (!rst_n)
      (m_rvalid && m_rready && recv_rem == 32'd1) |-> m_rlast)
    else $error("axi_burst_reader: last beat without rlast");
endmodule
