// tb_assembly_engine: drives every input stream of one engine with random pacing and random
// consumer back-pressure, and checks: elvel/elcod reach the cartesian-derivative ports in
// order; the cartesian-derivative stream reaches both of its consumers complete and in order;
// elrbu of each element equals the Gauss-point-ordered sum of its convective contributions plus
// that of its viscous contributions; eldtrho/elmurho pass through in order. It also checks the
// latency of elrbu with everything ready (31 cycles after the last contributions).
module tb_assembly_engine;
  import alya_pkg::*;
  localparam int CW = 13 * 64, NEL = 40;
  logic clk = 0, rst_n = 0;
  logic elvel_valid, elvel_ready, elcod_valid, elcod_ready;
  elem_vec_t elvel_data, elcod_data, cd_elvel_data, cd_elcod_data;
  logic cd_elvel_valid, cd_elvel_ready, cd_elcod_valid, cd_elcod_ready;
  logic cartd_valid, cartd_ready, tau_valid, tau_ready, gpv_valid, gpv_ready;
  logic [CW-1:0] cartd_data, tau_data, gpv_data;
  logic conv_gp_valid, conv_gp_ready, visc_gp_valid, visc_gp_ready;
  elem_vec_t conv_gp_data, visc_gp_data, elrbu_data;
  logic dt_valid, dt_ready, mass_valid, mass_ready;
  node_vec_t dt_data, mass_data, eldtrho_data, elmurho_data;
  logic elrbu_valid, elrbu_ready, eldtrho_valid, eldtrho_ready, elmurho_valid, elmurho_ready;
  int checks = 0, failures = 0;
  bit rnd = 0;
  // source counters and sink counters
  int s_vel = 0, s_cod = 0, s_cd = 0, s_conv = 0, s_visc = 0, s_dt = 0, s_mass = 0;
  int r_vel = 0, r_cod = 0, r_tau = 0, r_gpv = 0, r_rbu = 0, r_dt = 0, r_mass = 0;
  int cyc = 0, t_last_in = 0, t_out = 0;

  assembly_engine dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  function automatic logic [63:0] d(int tag, int i, int j);
    return $realtobits(real'(tag) * 1.0e4 + real'(i) * 3.5 + real'(j) * 0.0625 - 20.0);
  endfunction
  function automatic elem_vec_t ev(int tag, int i);
    for (int j = 0; j < ELEM_VALS; j++) ev[j] = d(tag, i, j);
  endfunction
  function automatic node_vec_t nv(int tag, int i);
    for (int j = 0; j < PNODE; j++) nv[j] = d(tag, i, j);
  endfunction
  function automatic logic [CW-1:0] cv(int i);
    for (int j = 0; j < 13; j++) cv[64*j +: 64] = d(9, i, j);
  endfunction
  function automatic elem_vec_t rbu(int e);
    real c, v;
    for (int j = 0; j < ELEM_VALS; j++) begin
      c = $bitstoreal(d(3, 4 * e, j));
      v = $bitstoreal(d(4, 4 * e, j));
      for (int g = 1; g < PGAUS; g++) begin
        c = c + $bitstoreal(d(3, 4 * e + g, j));
        v = v + $bitstoreal(d(4, 4 * e + g, j));
      end
      rbu[j] = $realtobits(c + v);
    end
  endfunction

  function automatic bit go(); return !rnd || ($urandom % 3) != 0; endfunction

  // sources: present item n until taken
  always @(negedge clk) if (rst_n) begin
    elvel_valid   = s_vel  < NEL         && (elvel_valid   || go()); elvel_data   = ev(1, s_vel);
    elcod_valid   = s_cod  < NEL         && (elcod_valid   || go()); elcod_data   = ev(2, s_cod);
    cartd_valid   = s_cd   < NEL * PGAUS && (cartd_valid   || go()); cartd_data   = cv(s_cd);
    conv_gp_valid = s_conv < NEL * PGAUS && (conv_gp_valid || go()); conv_gp_data = ev(3, s_conv);
    visc_gp_valid = s_visc < NEL * PGAUS && (visc_gp_valid || go()); visc_gp_data = ev(4, s_visc);
    dt_valid      = s_dt   < NEL         && (dt_valid      || go()); dt_data      = nv(5, s_dt);
    mass_valid    = s_mass < NEL         && (mass_valid    || go()); mass_data    = nv(6, s_mass);
    cd_elvel_ready = go(); cd_elcod_ready = go(); tau_ready = go(); gpv_ready = !rnd || ($urandom % 5) == 0;
    elrbu_ready = go(); eldtrho_ready = go(); elmurho_ready = go();
  end

  always @(posedge clk) if (rst_n) begin
    if (elvel_valid && elvel_ready) s_vel++;
    if (elcod_valid && elcod_ready) s_cod++;
    if (cartd_valid && cartd_ready) s_cd++;
    if (conv_gp_valid && conv_gp_ready) s_conv++;
    if (visc_gp_valid && visc_gp_ready) begin s_visc++; t_last_in = cyc; end
    if (dt_valid && dt_ready) s_dt++;
    if (mass_valid && mass_ready) s_mass++;
    if (cd_elvel_valid && cd_elvel_ready) begin check(cd_elvel_data == ev(1, r_vel), "elvel order"); r_vel++; end
    if (cd_elcod_valid && cd_elcod_ready) begin check(cd_elcod_data == ev(2, r_cod), "elcod order"); r_cod++; end
    if (tau_valid && tau_ready) begin check(tau_data == cv(r_tau), "tau copy"); r_tau++; end
    if (gpv_valid && gpv_ready) begin check(gpv_data == cv(r_gpv), "gpv copy"); r_gpv++; end
    if (elrbu_valid && elrbu_ready) begin
      check(elrbu_data == rbu(r_rbu), $sformatf("elrbu of element %0d", r_rbu));
      r_rbu++; t_out = cyc;
    end
    if (eldtrho_valid && eldtrho_ready) begin check(eldtrho_data == nv(5, r_dt), "eldtrho"); r_dt++; end
    if (elmurho_valid && elmurho_ready) begin check(elmurho_data == nv(6, r_mass), "elmurho"); r_mass++; end
  end

  task automatic reset_counts();
    s_vel = 0; s_cod = 0; s_cd = 0; s_conv = 0; s_visc = 0; s_dt = 0; s_mass = 0;
    r_vel = 0; r_cod = 0; r_tau = 0; r_gpv = 0; r_rbu = 0; r_dt = 0; r_mass = 0;
  endtask

  initial begin
    {elvel_valid, elcod_valid, cartd_valid, conv_gp_valid, visc_gp_valid, dt_valid, mass_valid} = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // phase 1: everything ready, full rate
    repeat (NEL * PGAUS + 80) @(negedge clk);
    check(r_rbu == NEL && r_vel == NEL && r_tau == NEL * PGAUS && r_gpv == NEL * PGAUS && r_dt == NEL && r_mass == NEL,
          $sformatf("phase 1 counts rbu=%0d vel=%0d tau=%0d gpv=%0d", r_rbu, r_vel, r_tau, r_gpv));
    check(t_out - t_last_in == 31, $sformatf("elrbu latency %0d cycles, expected 31", t_out - t_last_in));
    // phase 2: random pacing and back-pressure
    @(negedge clk);
    reset_counts(); rnd = 1;
    repeat (3000) @(negedge clk);
    check(r_rbu == NEL && r_vel == NEL && r_cod == NEL && r_tau == NEL * PGAUS && r_gpv == NEL * PGAUS && r_dt == NEL && r_mass == NEL,
          $sformatf("phase 2 counts rbu=%0d vel=%0d tau=%0d gpv=%0d", r_rbu, r_vel, r_tau, r_gpv));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
