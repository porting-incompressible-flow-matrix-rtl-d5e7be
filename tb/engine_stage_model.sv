// engine_stage_model: behavioural stand-in for the six computational stages of one engine
// (testbench only, not synthesizable).
//
// The real stages evaluate Alya's finite-element formulas, which this RTL does not contain.
// This model only has to produce streams of the right shape and timing so the rest of the
// engine can be exercised: for every element (elvel and elcod taken together) it emits PGAUS
// cartesian-derivative records, PGAUS convective and PGAUS viscous 12-value contributions and
// one eldtrho and one elmurho 4-value record, using simple placeholder formulas (with exact power-of-two products, so the result cannot depend on how the simulator compiles them) that the
// testbench repeats (stage_* functions below). It consumes the two replicated copies of the
// derivative stream and counts any word that differs from what it sent. STALL_PCT makes it
// refuse input and output at random, so back-pressure reaches the FIFOs and streaming blocks.
module engine_stage_model
  import alya_pkg::*;
#(
  parameter int CARTD_W   = 13 * 64,
  parameter int STALL_PCT = 0
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               cd_elvel_valid,
  output logic               cd_elvel_ready,
  input  elem_vec_t          cd_elvel_data,
  input  logic               cd_elcod_valid,
  output logic               cd_elcod_ready,
  input  elem_vec_t          cd_elcod_data,
  output logic               cartd_valid,
  input  logic               cartd_ready,
  output logic [CARTD_W-1:0] cartd_data,
  input  logic               tau_valid,
  output logic               tau_ready,
  input  logic [CARTD_W-1:0] tau_data,
  input  logic               gpv_valid,
  output logic               gpv_ready,
  input  logic [CARTD_W-1:0] gpv_data,
  output logic               conv_gp_valid,
  input  logic               conv_gp_ready,
  output elem_vec_t          conv_gp_data,
  output logic               visc_gp_valid,
  input  logic               visc_gp_ready,
  output elem_vec_t          visc_gp_data,
  output logic               dt_valid,
  input  logic               dt_ready,
  output node_vec_t          dt_data,
  output logic               mass_valid,
  input  logic               mass_ready,
  output node_vec_t          mass_data
);
  logic [CARTD_W-1:0] cdq[$], tauq[$], gpvq[$];
  elem_vec_t          convq[$], viscq[$];
  node_vec_t          dtq[$], massq[$];
  int unsigned        copy_errors = 0, elements = 0;

  // an output offered but not taken must stay valid
  logic h_cd = 0, h_conv = 0, h_visc = 0, h_dt = 0, h_mass = 0;
  always @(posedge clk) begin
    h_cd   <= cartd_valid && !cartd_ready;
    h_conv <= conv_gp_valid && !conv_gp_ready;
    h_visc <= visc_gp_valid && !visc_gp_ready;
    h_dt   <= dt_valid && !dt_ready;
    h_mass <= mass_valid && !mass_ready;
  end

  function automatic bit go();
    return (STALL_PCT == 0) || (($urandom % 100) >= STALL_PCT);
  endfunction

  always @(negedge clk) begin
    cd_elvel_ready = rst_n && cd_elvel_valid && cd_elcod_valid && convq.size() < 8 && go();
    cd_elcod_ready = cd_elvel_ready;
    tau_ready = go();
    gpv_ready = go();
    cartd_valid   = cdq.size() > 0   && (h_cd || go()); if (cdq.size() > 0)   cartd_data   = cdq[0];
    conv_gp_valid = convq.size() > 0 && (h_conv || go()); if (convq.size() > 0) conv_gp_data = convq[0];
    visc_gp_valid = viscq.size() > 0 && (h_visc || go()); if (viscq.size() > 0) visc_gp_data = viscq[0];
    dt_valid      = dtq.size() > 0   && (h_dt || go()); if (dtq.size() > 0)   dt_data      = dtq[0];
    mass_valid    = massq.size() > 0 && (h_mass || go()); if (massq.size() > 0) mass_data    = massq[0];
  end

  always @(posedge clk) begin
    if (!rst_n) begin
      cdq.delete(); tauq.delete(); gpvq.delete(); convq.delete(); viscq.delete(); dtq.delete(); massq.delete();
    end else begin
      if (cartd_valid && cartd_ready)     void'(cdq.pop_front());
      if (conv_gp_valid && conv_gp_ready) void'(convq.pop_front());
      if (visc_gp_valid && visc_gp_ready) void'(viscq.pop_front());
      if (dt_valid && dt_ready)           void'(dtq.pop_front());
      if (mass_valid && mass_ready)       void'(massq.pop_front());
      if (tau_valid && tau_ready) begin
        if (tauq.size() == 0 || tau_data != tauq[0]) copy_errors++;
        if (tauq.size() > 0) void'(tauq.pop_front());
      end
      if (gpv_valid && gpv_ready) begin
        if (gpvq.size() == 0 || gpv_data != gpvq[0]) copy_errors++;
        if (gpvq.size() > 0) void'(gpvq.pop_front());
      end
      if (cd_elvel_valid && cd_elvel_ready) begin
        for (int g = 0; g < PGAUS; g++) begin
          logic [CARTD_W-1:0] c;
          c = '0;
          for (int j = 0; j < ELEM_VALS; j++) c[64*j +: 64] = $realtobits($bitstoreal(cd_elcod_data[j]) * real'(g + 1));
          cdq.push_back(c); tauq.push_back(c); gpvq.push_back(c);
          convq.push_back(stage_conv(cd_elvel_data, g));
          viscq.push_back(stage_visc(cd_elcod_data, g));
        end
        dtq.push_back(stage_dt(cd_elvel_data));
        massq.push_back(stage_mass(cd_elcod_data));
        elements++;
      end
    end
  end

  // placeholder formulas, repeated by the testbench's reference model
  function automatic elem_vec_t stage_conv(elem_vec_t v, int g);
    for (int j = 0; j < ELEM_VALS; j++) stage_conv[j] = $realtobits($bitstoreal(v[j]) * real'(1 << g) + 0.5);
  endfunction
  function automatic elem_vec_t stage_visc(elem_vec_t c, int g);
    for (int j = 0; j < ELEM_VALS; j++) stage_visc[j] = $realtobits($bitstoreal(c[j]) - real'(g) * 0.25);
  endfunction
  function automatic node_vec_t stage_dt(elem_vec_t v);
    for (int n = 0; n < PNODE; n++) stage_dt[n] = $realtobits($bitstoreal(v[3*n]) * 2.0);
  endfunction
  function automatic node_vec_t stage_mass(elem_vec_t c);
    for (int n = 0; n < PNODE; n++) stage_mass[n] = $realtobits($bitstoreal(c[3*n+1]) + 1.0);
  endfunction
endmodule
