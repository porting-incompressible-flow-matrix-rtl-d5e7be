// assembly_engine: one matrix assembly engine, the nested dataflow region of the design.
//
// An engine takes a continuous stream of elements (elvel and elcod) and turns each into its
// results: the right-hand side contribution elrbu (12 values) and the per-node eldtrho and
// elmurho (4 values each). Inside, six computational stages (cartesian derivatives, Gauss point
// values, tau and tim, element matrices, convective term, viscous term) run concurrently and pass
// per-element and per-Gauss-point values to each other through FIFOs.
//
// This module holds the engine's streams and the stages whose working is known; the six
// computational stages are not in it and attach through the ports named after them:
//   elvel/elcod in  -> FIFO -> cd_elvel/cd_elcod out     (to the cartesian derivative stage)
//   cartd in -> FIFO -> replicate -> FIFOs -> tau out and gpv out
//                                  (its two consumers: tau-and-tim, Gauss point values)
//   conv_gp in -> FIFO -> gauss_add --\
//   visc_gp in -> FIFO -> gauss_add ----> rhs_combine -> FIFO -> elrbu out
//   dt in, mass in (from tau-and-tim) -> FIFOs -> eldtrho out, elmurho out
// The convective and viscous stages emit one 12-value contribution per Gauss point; the two
// gauss_add stages ("Add") sum the PGAUS contributions of an element, and rhs_combine ("Send
// convective and viscous to RHS") adds the two sums into elrbu. Every stream passes through a
// FIFO so no stream skips a stage. All streams use valid/ready.
// Timing: with all consumers ready, elrbu leaves 1 + 22 + 7 + 1 cycles after the element's
// last Gauss point contributions entered (FIFO, gauss_add, rhs_combine, FIFO).
// The stage order and the Add stages follow the paper's engine diagram; what the cartesian
// derivative stream carries is not given, so its width CARTD_W is a parameter (default 13
// doubles: 12 derivatives and a volume per Gauss point), this design's guess.
module assembly_engine
  import alya_pkg::*;
#(
  parameter int CARTD_W    = 13 * 64,
  parameter int FIFO_DEPTH = 16
) (
  input  logic               clk,
  input  logic               rst_n,
  // element input from the streaming input block
  input  logic               elvel_valid,
  output logic               elvel_ready,
  input  elem_vec_t          elvel_data,
  input  logic               elcod_valid,
  output logic               elcod_ready,
  input  elem_vec_t          elcod_data,
  // to / from the cartesian derivative stage
  output logic               cd_elvel_valid,
  input  logic               cd_elvel_ready,
  output elem_vec_t          cd_elvel_data,
  output logic               cd_elcod_valid,
  input  logic               cd_elcod_ready,
  output elem_vec_t          cd_elcod_data,
  input  logic               cartd_valid,
  output logic               cartd_ready,
  input  logic [CARTD_W-1:0] cartd_data,
  // replicated cartesian derivative stream to tau-and-tim and to Gauss point values
  output logic               tau_valid,
  input  logic               tau_ready,
  output logic [CARTD_W-1:0] tau_data,
  output logic               gpv_valid,
  input  logic               gpv_ready,
  output logic [CARTD_W-1:0] gpv_data,
  // per-Gauss-point contributions from the convective and viscous stages
  input  logic               conv_gp_valid,
  output logic               conv_gp_ready,
  input  elem_vec_t          conv_gp_data,
  input  logic               visc_gp_valid,
  output logic               visc_gp_ready,
  input  elem_vec_t          visc_gp_data,
  // per-element results of tau-and-tim
  input  logic               dt_valid,
  output logic               dt_ready,
  input  node_vec_t          dt_data,
  input  logic               mass_valid,
  output logic               mass_ready,
  input  node_vec_t          mass_data,
  // engine results
  output logic               elrbu_valid,
  input  logic               elrbu_ready,
  output elem_vec_t          elrbu_data,
  output logic               eldtrho_valid,
  input  logic               eldtrho_ready,
  output node_vec_t          eldtrho_data,
  output logic               elmurho_valid,
  input  logic               elmurho_ready,
  output node_vec_t          elmurho_data
);
  localparam int EW = $bits(elem_vec_t);
  localparam int NW = $bits(node_vec_t);

  // element input to the first stage
  stream_fifo #(.W(EW), .DEPTH(FIFO_DEPTH)) u_f_elvel (.clk, .rst_n,
    .in_valid (elvel_valid), .in_ready (elvel_ready), .in_data (elvel_data),
    .out_valid (cd_elvel_valid), .out_ready (cd_elvel_ready), .out_data (cd_elvel_data));
  stream_fifo #(.W(EW), .DEPTH(FIFO_DEPTH)) u_f_elcod (.clk, .rst_n,
    .in_valid (elcod_valid), .in_ready (elcod_ready), .in_data (elcod_data),
    .out_valid (cd_elcod_valid), .out_ready (cd_elcod_ready), .out_data (cd_elcod_data));

  // fan-out of the cartesian derivative stream
  logic                    cdq_valid, cdq_ready;
  logic [CARTD_W-1:0]      cdq_data;
  logic [1:0]              rep_valid, rep_ready;
  logic [1:0][CARTD_W-1:0] rep_data;

  stream_fifo #(.W(CARTD_W), .DEPTH(FIFO_DEPTH)) u_f_cartd (.clk, .rst_n,
    .in_valid (cartd_valid), .in_ready (cartd_ready), .in_data (cartd_data),
    .out_valid (cdq_valid), .out_ready (cdq_ready), .out_data (cdq_data));
  stream_replicate #(.W(CARTD_W), .N_OUT(2)) u_rep (.clk, .rst_n,
    .in_valid (cdq_valid), .in_ready (cdq_ready), .in_data (cdq_data),
    .out_valid (rep_valid), .out_ready (rep_ready), .out_data (rep_data));
  stream_fifo #(.W(CARTD_W), .DEPTH(FIFO_DEPTH)) u_f_tau (.clk, .rst_n,
    .in_valid (rep_valid[0]), .in_ready (rep_ready[0]), .in_data (rep_data[0]),
    .out_valid (tau_valid), .out_ready (tau_ready), .out_data (tau_data));
  stream_fifo #(.W(CARTD_W), .DEPTH(FIFO_DEPTH)) u_f_gpv (.clk, .rst_n,
    .in_valid (rep_valid[1]), .in_ready (rep_ready[1]), .in_data (rep_data[1]),
    .out_valid (gpv_valid), .out_ready (gpv_ready), .out_data (gpv_data));

  // convective and viscous accumulation
  logic      cgq_valid, cgq_ready, vgq_valid, vgq_ready;
  elem_vec_t cgq_data, vgq_data;
  logic      csum_valid, csum_ready, vsum_valid, vsum_ready, rbu_valid, rbu_ready;
  elem_vec_t csum_data, vsum_data, rbu_data;

  stream_fifo #(.W(EW), .DEPTH(FIFO_DEPTH)) u_f_conv (.clk, .rst_n,
    .in_valid (conv_gp_valid), .in_ready (conv_gp_ready), .in_data (conv_gp_data),
    .out_valid (cgq_valid), .out_ready (cgq_ready), .out_data (cgq_data));
  stream_fifo #(.W(EW), .DEPTH(FIFO_DEPTH)) u_f_visc (.clk, .rst_n,
    .in_valid (visc_gp_valid), .in_ready (visc_gp_ready), .in_data (visc_gp_data),
    .out_valid (vgq_valid), .out_ready (vgq_ready), .out_data (vgq_data));

  gauss_add #(.LANES(ELEM_VALS), .PGAUS(PGAUS), .ADD_LATENCY(FP_ADD_LATENCY)) u_add_conv (.clk, .rst_n,
    .in_valid (cgq_valid), .in_ready (cgq_ready), .in_data (cgq_data),
    .out_valid (csum_valid), .out_ready (csum_ready), .out_data (csum_data));
  gauss_add #(.LANES(ELEM_VALS), .PGAUS(PGAUS), .ADD_LATENCY(FP_ADD_LATENCY)) u_add_visc (.clk, .rst_n,
    .in_valid (vgq_valid), .in_ready (vgq_ready), .in_data (vgq_data),
    .out_valid (vsum_valid), .out_ready (vsum_ready), .out_data (vsum_data));

  rhs_combine #(.LANES(ELEM_VALS), .ADD_LATENCY(FP_ADD_LATENCY)) u_rhs (.clk, .rst_n,
    .conv_valid (csum_valid), .conv_ready (csum_ready), .conv_data (csum_data),
    .visc_valid (vsum_valid), .visc_ready (vsum_ready), .visc_data (vsum_data),
    .out_valid (rbu_valid), .out_ready (rbu_ready), .out_data (rbu_data));

  stream_fifo #(.W(EW), .DEPTH(FIFO_DEPTH)) u_f_rbu (.clk, .rst_n,
    .in_valid (rbu_valid), .in_ready (rbu_ready), .in_data (rbu_data),
    .out_valid (elrbu_valid), .out_ready (elrbu_ready), .out_data (elrbu_data));

  // tau-and-tim results
  stream_fifo #(.W(NW), .DEPTH(FIFO_DEPTH)) u_f_dt (.clk, .rst_n,
    .in_valid (dt_valid), .in_ready (dt_ready), .in_data (dt_data),
    .out_valid (eldtrho_valid), .out_ready (eldtrho_ready), .out_data (eldtrho_data));
  stream_fifo #(.W(NW), .DEPTH(FIFO_DEPTH)) u_f_mass (.clk, .rst_n,
    .in_valid (mass_valid), .in_ready (mass_ready), .in_data (mass_data),
    .out_valid (elmurho_valid), .out_ready (elmurho_ready), .out_data (elmurho_data));
endmodule
