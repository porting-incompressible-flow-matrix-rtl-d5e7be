// gauss_add: the "Add" stage that sums per-Gauss-point contributions into one per-element value.
//
// The convective and viscous stages emit one LANES-wide vector of binary64 contributions per
// Gauss point instead of accumulating in place, which would tie every addition to the result of
// the previous one and limit the loop to one iteration per adder latency. This stage takes those
// PGAUS vectors (one element's worth, one per cycle) and produces their lane-wise sum.
//
// How it works: the PGAUS vectors of an element are gathered in a buffer. When the buffer is
// full it is launched into a chain of PGAUS-1 pipelined adders per lane: adder k adds the running
// sum to vector k, which has been delayed by (k-1)*ADD_LATENCY cycles to meet it. The sum is
// therefore formed in Gauss point order, ((g0+g1)+g2)+g3, the order of the original loop, while
// a new element can be launched every PGAUS cycles, i.e. one Gauss point per cycle.
//
// Interface: valid/ready streams. Timing: the sum leaves (PGAUS-1)*ADD_LATENCY+1 cycles after the
// element's last vector was accepted (22 cycles for the defaults). A stalled output freezes the
// whole pipeline. That a separate stage does the accumulation follows the paper; the
// gathering buffer, the adder chain and the summation order are this design's choices.
module gauss_add #(
  parameter int LANES       = 12,
  parameter int PGAUS       = 4,
  parameter int ADD_LATENCY = 7
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       in_valid,
  output logic                       in_ready,
  input  logic [LANES-1:0][63:0]     in_data,
  output logic                       out_valid,
  input  logic                       out_ready,
  output logic [LANES-1:0][63:0]     out_data
);
  localparam int DEPTH = (PGAUS - 1) * ADD_LATENCY;
  localparam int CW    = $clog2(PGAUS + 1);

  logic [PGAUS-1:0][LANES-1:0][63:0] gbuf;
  logic [CW-1:0]                     cnt;
  logic                              full, en, fire, push;
  logic [DEPTH-1:0]                  vpipe;
  logic [PGAUS-1:0][LANES-1:0][63:0] acc;    // acc[k]: sum of g0..gk, valid ADD_LATENCY*k after launch
  logic [PGAUS-1:1][LANES-1:0][63:0] bdel;   // bdel[k]: gk delayed to meet acc[k-1]

  assign full     = (cnt == CW'(PGAUS));
  assign en       = !out_valid || out_ready;
  assign fire     = full && en;
  assign in_ready = !full || en;
  assign push     = in_valid && in_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt   <= '0;
      vpipe <= '0;
    end else begin
      cnt <= (fire ? CW'(0) : cnt) + CW'(push);
      if (en) vpipe <= {vpipe[DEPTH-2:0], fire};
    end
  end

  always_ff @(posedge clk) begin
    if (push) gbuf[fire ? 0 : cnt] <= in_data;
  end

  assign acc[0]  = gbuf[0];
  assign bdel[1] = gbuf[1];

  for (genvar k = 2; k < PGAUS; k++) begin : g_delay
    logic [(k-1)*ADD_LATENCY-1:0][LANES-1:0][63:0] sr;
    always_ff @(posedge clk) begin
      if (en) begin
        sr[0] <= gbuf[k];
        for (int i = 1; i < (k-1)*ADD_LATENCY; i++) sr[i] <= sr[i-1];
      end
    end
    assign bdel[k] = sr[(k-1)*ADD_LATENCY-1];
  end

  for (genvar k = 1; k < PGAUS; k++) begin : g_stage
    for (genvar l = 0; l < LANES; l++) begin : g_lane
      fp64_add #(.LATENCY(ADD_LATENCY)) u_add (
        .clk (clk), .en (en), .a (acc[k-1][l]), .b (bdel[k][l]), .sum (acc[k][l])
      );
    end
  end

  assign out_valid = vpipe[DEPTH-1];
  assign out_data  = acc[PGAUS-1];
endmodule
