// rhs_combine: the "Send convective and viscous to RHS" stage of an engine.
//
// Joins the two per-element streams coming from the convective and the viscous "Add" stages
// and adds them lane by lane into the element's right-hand side elrbu, which leaves the engine
// as result data. Both inputs are consumed together, in the same cycle, once both are valid;
// one element per cycle is accepted. Each lane is a pipelined binary64 adder, so elrbu appears
// ADD_LATENCY cycles after the pair was accepted; a stalled output freezes the pipeline.
// The paper names the stage and draws its two inputs; that it forms their sum is this design's
// reading of the algorithm, in which both the convective and the viscous routines add into elrbu.
module rhs_combine #(
  parameter int LANES       = 12,
  parameter int ADD_LATENCY = 7
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   conv_valid,
  output logic                   conv_ready,
  input  logic [LANES-1:0][63:0] conv_data,
  input  logic                   visc_valid,
  output logic                   visc_ready,
  input  logic [LANES-1:0][63:0] visc_data,
  output logic                   out_valid,
  input  logic                   out_ready,
  output logic [LANES-1:0][63:0] out_data
);
  logic                   en, fire;
  logic [ADD_LATENCY-1:0] vpipe;

  assign en         = !out_valid || out_ready;
  assign fire       = en && conv_valid && visc_valid;
  assign conv_ready = fire;
  assign visc_ready = fire;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  vpipe <= '0;
    else if (en) vpipe <= {vpipe[ADD_LATENCY-2:0], fire};
  end

  for (genvar l = 0; l < LANES; l++) begin : g_lane
    fp64_add #(.LATENCY(ADD_LATENCY)) u_add (
      .clk (clk), .en (en), .a (conv_data[l]), .b (visc_data[l]), .sum (out_data[l])
    );
  end

  assign out_valid = vpipe[ADD_LATENCY-1];
endmodule
