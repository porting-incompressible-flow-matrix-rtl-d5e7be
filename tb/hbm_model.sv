// hbm_model: behavioural model of the HBM2 memory as seen through AXI4 (testbench only).
//
// Not synthesizable and not a model of HBM2 timing: a shared sparse memory of 512-bit beats,
// addressed in bytes, behind NRD read ports and NWR write ports. Each port accepts INCR bursts;
// a read burst returns its beats in order starting LATENCY cycles after the address was
// accepted; write data is taken only for an accepted write address and the response follows
// the burst's last beat after LATENCY cycles. With STALL_PCT above zero, arready, rvalid,
// awready and wready drop at random, so the masters see back-pressure. The testbench reads and
// writes the memory directly through the mem array. Stall counts are kept for coverage.
module hbm_model #(
  parameter int NRD       = 1,
  parameter int NWR       = 1,
  parameter int LATENCY   = 20,
  parameter int STALL_PCT = 0
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic [NRD-1:0][63:0]   araddr,
  input  logic [NRD-1:0][7:0]    arlen,
  input  logic [NRD-1:0]         arvalid,
  output logic [NRD-1:0]         arready,
  output logic [NRD-1:0][511:0]  rdata,
  output logic [NRD-1:0]         rlast,
  output logic [NRD-1:0]         rvalid,
  input  logic [NRD-1:0]         rready,
  input  logic [NWR-1:0][63:0]   awaddr,
  input  logic [NWR-1:0][7:0]    awlen,
  input  logic [NWR-1:0]         awvalid,
  output logic [NWR-1:0]         awready,
  input  logic [NWR-1:0][511:0]  wdata,
  input  logic [NWR-1:0]         wlast,
  input  logic [NWR-1:0]         wvalid,
  output logic [NWR-1:0]         wready,
  output logic [NWR-1:0]         bvalid,
  input  logic [NWR-1:0]         bready
);
  logic [511:0] mem [longint];
  longint cycle = 0;
  int unsigned stalls = 0;
  int unsigned bursts_read = 0, bursts_written = 0;

  // per read port: queue of bursts {start cycle, address, beats}
  longint rq_time [NRD][$];
  longint rq_addr [NRD][$];
  int     rq_left [NRD][$];
  // per write port
  longint wq_addr [NWR][$];
  int     wq_left [NWR][$];
  longint bq_time [NWR][$];

  function automatic logic [511:0] rd(longint a);
    if (mem.exists(a >> 6)) return mem[a >> 6];
    return '0;
  endfunction

  function automatic bit stall();
    return (STALL_PCT > 0) && (($urandom % 100) < STALL_PCT);
  endfunction

  logic [NRD-1:0] r_hold = '0;   // rvalid offered but not taken: must stay up (AXI rule)

  always_ff @(posedge clk) cycle <= cycle + 1;
  always_ff @(posedge clk) r_hold <= rvalid & ~rready;

  // drive outputs away from the clock edge
  always @(negedge clk) begin
    for (int p = 0; p < NRD; p++) begin
      arready[p] = !stall();
      if (rq_time[p].size() > 0 && rq_time[p][0] <= cycle && (r_hold[p] || !stall())) begin
        rvalid[p] = 1'b1;
        rdata[p]  = rd(rq_addr[p][0]);
        rlast[p]  = (rq_left[p][0] == 1);
      end else begin
        rvalid[p] = 1'b0;
        rdata[p]  = '0;
        rlast[p]  = 1'b0;
      end
    end
    for (int p = 0; p < NWR; p++) begin
      awready[p] = !stall();
      wready[p]  = (wq_addr[p].size() > 0) && !stall();
      bvalid[p]  = (bq_time[p].size() > 0) && (bq_time[p][0] <= cycle);
    end
  end

  always @(posedge clk) begin
    if (!rst_n) begin
      for (int p = 0; p < NRD; p++) begin rq_time[p].delete(); rq_addr[p].delete(); rq_left[p].delete(); end
      for (int p = 0; p < NWR; p++) begin wq_addr[p].delete(); wq_left[p].delete(); bq_time[p].delete(); end
    end else begin
      for (int p = 0; p < NRD; p++) begin
        if (rvalid[p] && rready[p]) begin
          rq_addr[p][0] = rq_addr[p][0] + 64;
          rq_left[p][0] = rq_left[p][0] - 1;
          if (rq_left[p][0] == 0) begin
            void'(rq_time[p].pop_front()); void'(rq_addr[p].pop_front()); void'(rq_left[p].pop_front());
          end
        end else if (rvalid[p] || (rq_time[p].size() > 0 && rq_time[p][0] <= cycle)) stalls++;
        if (arvalid[p] && arready[p]) begin
          rq_time[p].push_back(cycle + LATENCY);
          rq_addr[p].push_back(longint'(araddr[p]));
          rq_left[p].push_back(int'(arlen[p]) + 1);
          bursts_read++;
        end
      end
      for (int p = 0; p < NWR; p++) begin
        if (bvalid[p] && bready[p]) void'(bq_time[p].pop_front());
        if (wvalid[p] && wready[p]) begin
          mem[wq_addr[p][0] >> 6] = wdata[p];
          wq_addr[p][0] = wq_addr[p][0] + 64;
          wq_left[p][0] = wq_left[p][0] - 1;
          if ((wq_left[p][0] == 0) != wlast[p]) $error("hbm_model: wlast mismatch on write port %0d", p);
          if (wq_left[p][0] == 0) begin
            void'(wq_addr[p].pop_front()); void'(wq_left[p].pop_front());
            bq_time[p].push_back(cycle + LATENCY);
          end
        end else if (wvalid[p]) stalls++;
        if (awvalid[p] && awready[p]) begin
          wq_addr[p].push_back(longint'(awaddr[p]));
          wq_left[p].push_back(int'(awlen[p]) + 1);
          bursts_written++;
        end
      end
    end
  end
endmodule
