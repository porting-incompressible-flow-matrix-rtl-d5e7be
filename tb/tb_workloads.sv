// tb_workloads: runs the element counts of the evaluated meshes through the whole design, with
// every parameter of the top at its default (two engines), and checks both results and rate.
//
// Four meshes are run back to back: Cylinder 2D (1200 elements, 1280 nodal points), Venturi 2D
// (4200, 4371), Elbow (26410, 5682) and Sphere 100K (100000, 15768). The two largest meshes
// (16.7 and 32.7 million elements) differ only in size and would take hours to simulate. The element and point counts are those of the
// benchmark meshes; the connectivity and the nodal values are random, since only the sizes
// matter to the hardware. The host side is the same as in tb_alya_fpga_top: the testbench
// splits each mesh into chunks of at most 8192 elements (this testbench's choice), gathers
// elvel/elcod into HBM2, runs the three streaming blocks per chunk with the input of the next
// chunk overlapping the output of the current one, and scatters the results into the global
// arrays, which are compared bit for bit with a direct computation.
// Memory and the computational-stage stand-in never stall here, so the run time shows the
// design's own rate: each engine's Add stage takes one Gauss point per cycle, so a mesh of
// n elements needs at least n*PGAUS/NUM_ENGINES cycles; the testbench checks that it takes no
// more than that plus a fixed allowance per chunk for filling and draining the pipelines.
module tb_workloads;
  import alya_pkg::*;
  localparam int NE = 2, NRD = 4 * NE, CW = 13 * 64;
  localparam int NWL = 4, MAXCHUNK = 8192, MAXC = 13, CHUNK_ALLOW = 200;
  localparam string WL_NAME [NWL] = '{"Cylinder 2D", "Venturi 2D", "Elbow", "Sphere 100K"};
  localparam int WL_NELEM [NWL] = '{1200, 4200, 26410, 100000};
  localparam int WL_NPOIN [NWL] = '{1280, 4371, 5682, 15768};
  localparam int NPOIN = 15768, NELEM = 100000;   // array sizes: the largest mesh
  int npoin, nelem, nchunk, wl;
  int chunk_n [MAXC];
  int exp_elems [NE];

  logic clk = 0, rst_n = 0;
  logic in_ap_start, in_ap_ready, in_ap_done, in_ap_idle, in_ap_continue;
  logic [31:0] in_n_elems;
  logic [NRD-1:0][63:0] in_base_addr;
  logic rbu_ap_start, rbu_ap_ready, rbu_ap_done, rbu_ap_idle, rbu_ap_continue;
  logic [31:0] rbu_n_elems;
  logic [63:0] rbu_base_addr;
  logic dtm_ap_start, dtm_ap_ready, dtm_ap_done, dtm_ap_idle, dtm_ap_continue;
  logic [31:0] dtm_n_elems;
  logic [63:0] dtm_dt_base_addr, dtm_mass_base_addr;
  logic [NRD-1:0][63:0] m_rd_araddr;
  logic [NRD-1:0][7:0] m_rd_arlen;
  logic [NRD-1:0] m_rd_arvalid, m_rd_arready, m_rd_rlast, m_rd_rvalid, m_rd_rready;
  logic [NRD-1:0][511:0] m_rd_rdata;
  logic [2:0][63:0] m_wr_awaddr;
  logic [2:0][7:0] m_wr_awlen;
  logic [2:0] m_wr_awvalid, m_wr_awready, m_wr_wlast, m_wr_wvalid, m_wr_wready, m_wr_bvalid, m_wr_bready;
  logic [2:0][511:0] m_wr_wdata;
  logic [2:0][63:0] m_wr_wstrb;
  logic [NE-1:0] eng_cd_elvel_valid, eng_cd_elvel_ready, eng_cd_elcod_valid, eng_cd_elcod_ready;
  elem_vec_t [NE-1:0] eng_cd_elvel_data, eng_cd_elcod_data;
  logic [NE-1:0] eng_cartd_valid, eng_cartd_ready, eng_tau_valid, eng_tau_ready, eng_gpv_valid, eng_gpv_ready;
  logic [NE-1:0][CW-1:0] eng_cartd_data, eng_tau_data, eng_gpv_data;
  logic [NE-1:0] eng_conv_gp_valid, eng_conv_gp_ready, eng_visc_gp_valid, eng_visc_gp_ready;
  elem_vec_t [NE-1:0] eng_conv_gp_data, eng_visc_gp_data;
  logic [NE-1:0] eng_dt_valid, eng_dt_ready, eng_mass_valid, eng_mass_ready;
  node_vec_t [NE-1:0] eng_dt_data, eng_mass_data;

  int checks = 0, failures = 0;

  alya_fpga_top dut (.*);

  hbm_model #(.NRD(NRD), .NWR(3), .LATENCY(30), .STALL_PCT(0)) u_hbm (
    .clk, .rst_n,
    .araddr (m_rd_araddr), .arlen (m_rd_arlen), .arvalid (m_rd_arvalid), .arready (m_rd_arready),
    .rdata (m_rd_rdata), .rlast (m_rd_rlast), .rvalid (m_rd_rvalid), .rready (m_rd_rready),
    .awaddr (m_wr_awaddr), .awlen (m_wr_awlen), .awvalid (m_wr_awvalid), .awready (m_wr_awready),
    .wdata (m_wr_wdata), .wlast (m_wr_wlast), .wvalid (m_wr_wvalid), .wready (m_wr_wready),
    .bvalid (m_wr_bvalid), .bready (m_wr_bready));

  for (genvar k = 0; k < NE; k++) begin : g_stage
    engine_stage_model #(.CARTD_W(CW), .STALL_PCT(0)) u_model (
      .clk, .rst_n,
      .cd_elvel_valid (eng_cd_elvel_valid[k]), .cd_elvel_ready (eng_cd_elvel_ready[k]), .cd_elvel_data (eng_cd_elvel_data[k]),
      .cd_elcod_valid (eng_cd_elcod_valid[k]), .cd_elcod_ready (eng_cd_elcod_ready[k]), .cd_elcod_data (eng_cd_elcod_data[k]),
      .cartd_valid (eng_cartd_valid[k]), .cartd_ready (eng_cartd_ready[k]), .cartd_data (eng_cartd_data[k]),
      .tau_valid (eng_tau_valid[k]), .tau_ready (eng_tau_ready[k]), .tau_data (eng_tau_data[k]),
      .gpv_valid (eng_gpv_valid[k]), .gpv_ready (eng_gpv_ready[k]), .gpv_data (eng_gpv_data[k]),
      .conv_gp_valid (eng_conv_gp_valid[k]), .conv_gp_ready (eng_conv_gp_ready[k]), .conv_gp_data (eng_conv_gp_data[k]),
      .visc_gp_valid (eng_visc_gp_valid[k]), .visc_gp_ready (eng_visc_gp_ready[k]), .visc_gp_data (eng_visc_gp_data[k]),
      .dt_valid (eng_dt_valid[k]), .dt_ready (eng_dt_ready[k]), .dt_data (eng_dt_data[k]),
      .mass_valid (eng_mass_valid[k]), .mass_ready (eng_mass_ready[k]), .mass_data (eng_mass_data[k]));
  end

  always #5 clk = ~clk;

  initial begin
    repeat (1000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", msg); end
  endtask

  // ---------------------------------------------------------------- mesh and host arrays
  real veloc [NUM_DIMS][NPOIN];
  real coord [NUM_DIMS][NPOIN];
  int  lnods [NELEM][PNODE];
  real rhsid [NUM_DIMS][NPOIN], dt_rho [NPOIN], mass_rho [NPOIN];
  real r_rhsid [NUM_DIMS][NPOIN], r_dt_rho [NPOIN], r_mass_rho [NPOIN];
  int  chunk_first [MAXC];

  function automatic longint in_base(int c, int p);
    return 64'h1_0000_0000 + 64'(c + MAXC * wl) * 64'h1000_0000 + 64'(p) * 64'h100_0000;
  endfunction
  function automatic longint out_base(int v, int c);
    return 64'h100_0000_0000 + 64'(v) * 64'h10_0000_0000 + 64'(c + MAXC * wl) * 64'h100_0000;
  endfunction

  function automatic elem_vec_t gather(int e, bit cod);
    for (int n = 0; n < PNODE; n++)
      for (int d = 0; d < NUM_DIMS; d++)
        gather[n * NUM_DIMS + d] = $realtobits(cod ? coord[d][lnods[e][n]] : veloc[d][lnods[e][n]]);
  endfunction

  // calculate_transients on the host: fill the per-port buffers of chunk c
  task automatic load_chunk(int c);
    for (int i = 0; i < chunk_n[c]; i++) begin
      int e, k, l;
      elem_vec_t v [2];
      e = chunk_first[c] + i; k = i % NE; l = i / NE;
      v[0] = gather(e, 0); v[1] = gather(e, 1);
      for (int var_ = 0; var_ < 2; var_++)
        for (int h = 0; h < 2; h++) begin
          logic [511:0] beat;
          beat = '0;
          beat[64*HALF_VALS-1:0] = v[var_][h*HALF_VALS +: HALF_VALS];
          u_hbm.mem[(in_base(c, 4*k + 2*var_ + h) >> 6) + l] = beat;
        end
    end
  endtask

  function automatic logic [63:0] out_val(int v, int c, int idx);
    logic [511:0] beat;
    beat = u_hbm.mem[(out_base(v, c) >> 6) + idx / 8];
    return beat[64 * (idx % 8) +: 64];
  endfunction

  // one rounded double operation per call, so the reference is evaluated step by step
  function automatic logic [63:0] fadd(logic [63:0] x, logic [63:0] y);
    return $realtobits($bitstoreal(x) + $bitstoreal(y));
  endfunction
  function automatic logic [63:0] fmul(logic [63:0] x, real y);
    return $realtobits($bitstoreal(x) * y);
  endfunction

  function automatic logic [63:0] ref_rbu(int e, int j);
    elem_vec_t v, cd;
    logic [63:0] cs, vs;
    v = gather(e, 0); cd = gather(e, 1);
    cs = fadd(v[j], $realtobits(0.5));
    vs = cd[j];
    for (int g = 1; g < PGAUS; g++) begin
      cs = fadd(cs, fadd(fmul(v[j], real'(1 << g)), $realtobits(0.5)));
      vs = fadd(vs, fadd(cd[j], $realtobits(-real'(g) * 0.25)));
    end
    return fadd(cs, vs);
  endfunction

  // perform_assembly_in_global_system on the host for chunk c
  task automatic scatter_chunk(int c);
    for (int i = 0; i < chunk_n[c]; i++) begin
      int e;
      bit ok;
      e = chunk_first[c] + i;
      ok = 1;
      for (int j = 0; j < ELEM_VALS; j++) begin
        if (out_val(0, c, i * ELEM_VALS + j) != ref_rbu(e, j)) begin
          ok = 0;
        end
      end
      check(ok, $sformatf("elrbu of element %0d in HBM2", e));
      for (int n = 0; n < PNODE; n++) begin
        int ip;
        ip = lnods[e][n];
        for (int d = 0; d < NUM_DIMS; d++)
          rhsid[d][ip] = rhsid[d][ip] + $bitstoreal(out_val(0, c, i * ELEM_VALS + n * NUM_DIMS + d));
        dt_rho[ip]   = dt_rho[ip]   + $bitstoreal(out_val(1, c, i * PNODE + n));
        mass_rho[ip] = mass_rho[ip] + $bitstoreal(out_val(2, c, i * PNODE + n));
      end
    end
  endtask

  // direct reference: same placeholder stage formulas, same order of additions
  task automatic reference();
    for (int e = 0; e < nelem; e++) begin
      elem_vec_t v, cd;
      v = gather(e, 0); cd = gather(e, 1);
      for (int n = 0; n < PNODE; n++) begin
        int ip;
        ip = lnods[e][n];
        for (int d = 0; d < NUM_DIMS; d++)
          r_rhsid[d][ip] = $bitstoreal(fadd($realtobits(r_rhsid[d][ip]), ref_rbu(e, n * NUM_DIMS + d)));
        r_dt_rho[ip]   = $bitstoreal(fadd($realtobits(r_dt_rho[ip]), fmul(v[3*n], 2.0)));
        r_mass_rho[ip] = $bitstoreal(fadd($realtobits(r_mass_rho[ip]), fadd(cd[3*n+1], $realtobits(1.0))));
      end
    end
  endtask

  // ---------------------------------------------------------------- host threads
  task automatic input_thread();
    for (int c = 0; c < nchunk; c++) begin
      load_chunk(c);
      @(negedge clk);
      in_n_elems = chunk_n[c];
      for (int p = 0; p < NRD; p++) in_base_addr[p] = in_base(c, p);
      in_ap_start = 1;
      do @(negedge clk); while (!in_ap_done);
      in_ap_start = 0;
      repeat ($urandom % 4) @(negedge clk);
      in_ap_continue = 1;
      @(negedge clk); in_ap_continue = 0;
    end
  endtask

  task automatic output_thread();
    for (int c = 0; c < nchunk; c++) begin
      @(negedge clk);
      rbu_n_elems = chunk_n[c]; rbu_base_addr = out_base(0, c);
      dtm_n_elems = chunk_n[c]; dtm_dt_base_addr = out_base(1, c); dtm_mass_base_addr = out_base(2, c);
      rbu_ap_start = 1; dtm_ap_start = 1;
      @(negedge clk);
      rbu_ap_start = 0; dtm_ap_start = 0;
      while (!(rbu_ap_done && dtm_ap_done)) @(negedge clk);
      scatter_chunk(c);
      rbu_ap_continue = 1; dtm_ap_continue = 1;
      @(negedge clk);
      rbu_ap_continue = 0; dtm_ap_continue = 0;
    end
  endtask

  initial begin
    int t0, cycles, lo;
    {in_ap_start, in_ap_continue, rbu_ap_start, rbu_ap_continue, dtm_ap_start, dtm_ap_continue} = '0;
    in_n_elems = 0; rbu_n_elems = 0; dtm_n_elems = 0; in_base_addr = '0;
    rbu_base_addr = 0; dtm_dt_base_addr = 0; dtm_mass_base_addr = 0;
    exp_elems = '{default: 0};
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (wl = 0; wl < NWL; wl++) begin
      npoin = WL_NPOIN[wl]; nelem = WL_NELEM[wl];
      nchunk = (nelem + MAXCHUNK - 1) / MAXCHUNK;
      for (int c = 0; c < nchunk; c++) begin
        chunk_n[c] = (c < nchunk - 1) ? MAXCHUNK : nelem - MAXCHUNK * (nchunk - 1);
        for (int k = 0; k < NE; k++) exp_elems[k] += (chunk_n[c] + NE - 1 - k) / NE;
      end
      for (int p = 0; p < npoin; p++) begin
        for (int d = 0; d < NUM_DIMS; d++) begin
          veloc[d][p] = (real'($urandom % 20000) - 10000.0) / 977.0;
          coord[d][p] = real'($urandom % 100000) / 313.0;
          rhsid[d][p] = 0.0; r_rhsid[d][p] = 0.0;
        end
        dt_rho[p] = 0.0; mass_rho[p] = 0.0; r_dt_rho[p] = 0.0; r_mass_rho[p] = 0.0;
      end
      for (int e = 0; e < nelem; e++)
        for (int n = 0; n < PNODE; n++) lnods[e][n] = int'($urandom % npoin);
      chunk_first[0] = 0;
      for (int c = 1; c < nchunk; c++) chunk_first[c] = chunk_first[c-1] + chunk_n[c-1];

      @(negedge clk);
      t0 = $time;
      fork
        input_thread();
        output_thread();
      join
      cycles = int'(($time - t0) / 10);
      lo = nelem * PGAUS / NE;
      $display("%s: %0d elements, %0d points, %0d chunk(s), %0d cycles (Add-stage bound %0d)",
               WL_NAME[wl], nelem, npoin, nchunk, cycles, lo);
      check(cycles >= lo && cycles <= lo + CHUNK_ALLOW * nchunk, $sformatf("%s run time", WL_NAME[wl]));

      reference();
      for (int p = 0; p < npoin; p++) begin
        bit ok;
        ok = 1;
        for (int d = 0; d < NUM_DIMS; d++) ok &= ($realtobits(rhsid[d][p]) == $realtobits(r_rhsid[d][p]));
        check(ok, $sformatf("%s rhsid of point %0d", WL_NAME[wl], p));
        check($realtobits(dt_rho[p]) == $realtobits(r_dt_rho[p]), $sformatf("%s dt_rho of point %0d", WL_NAME[wl], p));
        check($realtobits(mass_rho[p]) == $realtobits(r_mass_rho[p]), $sformatf("%s mass_rho of point %0d", WL_NAME[wl], p));
      end
    end
    check(g_stage[0].u_model.copy_errors == 0 && g_stage[1].u_model.copy_errors == 0, "replicated derivative streams intact");
    check(g_stage[0].u_model.elements == exp_elems[0] && g_stage[1].u_model.elements == exp_elems[1], "elements per engine");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
