// tb_alya_fpga_top: end-to-end run of the streamed matrix assembly with every parameter of the
// top at its default (two engines).
//
// The testbench plays the host: it builds a small random mesh (nodal velocities and coordinates,
// and a connectivity table lnods), splits the elements into chunks, and for each chunk gathers
// elvel/elcod into the HBM2 buffers in the layout stream_in expects, starts the three streaming
// blocks, waits for their done, and then scatters the results back from HBM2 into the global
// arrays rhsid, dt_rho and mass_rho. The input of chunk c+1 is started as soon as the input
// block has finished chunk c, overlapping the output of chunk c, as ap_ctrl_chain allows.
// A behavioural stand-in (engine_stage_model) replaces the engines' computational stages.
// The global arrays are compared bit for bit with a direct computation over all elements,
// done in the same order of double operations. The testbench also counts the mechanisms of the
// design and fails if one never occurred: memory stalls, full-length bursts, back-pressure from
// the engines into the input block, Add-stage back-pressure, a replicated word taken by one
// consumer before the other, short last groups and partial last beats, done held until
// continue, and chunks overlapped.
module tb_alya_fpga_top;
  import alya_pkg::*;
  localparam int NE = 2, NRD = 4 * NE, CW = 13 * 64;
  localparam int NPOIN = 700, NCHUNK = 5;
  localparam int CHUNK_N [NCHUNK] = '{301, 150, 77, 2, 1};
  localparam int NELEM = 531;

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

  hbm_model #(.NRD(NRD), .NWR(3), .LATENCY(30), .STALL_PCT(10)) u_hbm (
    .clk, .rst_n,
    .araddr (m_rd_araddr), .arlen (m_rd_arlen), .arvalid (m_rd_arvalid), .arready (m_rd_arready),
    .rdata (m_rd_rdata), .rlast (m_rd_rlast), .rvalid (m_rd_rvalid), .rready (m_rd_rready),
    .awaddr (m_wr_awaddr), .awlen (m_wr_awlen), .awvalid (m_wr_awvalid), .awready (m_wr_awready),
    .wdata (m_wr_wdata), .wlast (m_wr_wlast), .wvalid (m_wr_wvalid), .wready (m_wr_wready),
    .bvalid (m_wr_bvalid), .bready (m_wr_bready));

  for (genvar k = 0; k < NE; k++) begin : g_stage
    engine_stage_model #(.CARTD_W(CW), .STALL_PCT(20)) u_model (
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
    repeat (300000) @(posedge clk);
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
  int  chunk_first [NCHUNK];

  function automatic longint in_base(int c, int p);
    return 64'h1000_0000 + 64'(c) * 64'h10_0000 + 64'(p) * 64'h1_0000;
  endfunction
  function automatic longint out_base(int v, int c);
    return 64'h4000_0000 + 64'(v) * 64'h1000_0000 + 64'(c) * 64'h10_0000;
  endfunction

  function automatic elem_vec_t gather(int e, bit cod);
    for (int n = 0; n < PNODE; n++)
      for (int d = 0; d < NUM_DIMS; d++)
        gather[n * NUM_DIMS + d] = $realtobits(cod ? coord[d][lnods[e][n]] : veloc[d][lnods[e][n]]);
  endfunction

  // calculate_transients on the host: fill the per-port buffers of chunk c
  task automatic load_chunk(int c);
    for (int i = 0; i < CHUNK_N[c]; i++) begin
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
    for (int i = 0; i < CHUNK_N[c]; i++) begin
      int e;
      bit ok;
      e = chunk_first[c] + i;
      ok = 1;
      for (int j = 0; j < ELEM_VALS; j++) begin
        if (out_val(0, c, i * ELEM_VALS + j) != ref_rbu(e, j)) begin
          ok = 0;
          $display("element %0d value %0d: got %h expected %h (elvel %h elcod %h)", e, j, out_val(0, c, i * ELEM_VALS + j), ref_rbu(e, j), gather(e, 0)[j], gather(e, 1)[j]);
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
    for (int e = 0; e < NELEM; e++) begin
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

  // ---------------------------------------------------------------- mechanism counters
  int n_mem_stall, n_full_burst, n_in_backpressure, n_add_backpressure, n_rep_split;
  int n_short_group, n_partial_beat, n_done_held, n_overlap;
  always @(posedge clk) if (rst_n) begin
    for (int p = 0; p < NRD; p++) if (m_rd_arvalid[p] && m_rd_arready[p] && m_rd_arlen[p] == 8'd63) n_full_burst++;
    if ((dut.elvel_valid & ~dut.elvel_ready) != '0) n_in_backpressure++;
    if (dut.g_engine[0].u_engine.csum_valid && !dut.g_engine[0].u_engine.csum_ready) n_add_backpressure++;
    if (dut.g_engine[0].u_engine.u_rep.taken != '0 || dut.g_engine[1].u_engine.u_rep.taken != '0) n_rep_split++;
    if (in_ap_done && !in_ap_continue) n_done_held++;
    if (in_ap_start && in_ap_ready && !rbu_ap_idle) n_overlap++;
  end

  // ---------------------------------------------------------------- host threads
  task automatic input_thread();
    for (int c = 0; c < NCHUNK; c++) begin
      load_chunk(c);
      @(negedge clk);
      in_n_elems = CHUNK_N[c];
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
    for (int c = 0; c < NCHUNK; c++) begin
      @(negedge clk);
      rbu_n_elems = CHUNK_N[c]; rbu_base_addr = out_base(0, c);
      dtm_n_elems = CHUNK_N[c]; dtm_dt_base_addr = out_base(1, c); dtm_mass_base_addr = out_base(2, c);
      rbu_ap_start = 1; dtm_ap_start = 1;
      @(negedge clk);
      rbu_ap_start = 0; dtm_ap_start = 0;
      while (!(rbu_ap_done && dtm_ap_done)) @(negedge clk);
      if (CHUNK_N[c] % NE != 0) n_short_group++;
      if ((CHUNK_N[c] * PNODE) % 8 != 0 || (CHUNK_N[c] * ELEM_VALS) % 8 != 0) n_partial_beat++;
      scatter_chunk(c);
      rbu_ap_continue = 1; dtm_ap_continue = 1;
      @(negedge clk);
      rbu_ap_continue = 0; dtm_ap_continue = 0;
    end
  endtask

  initial begin
    int t0;
    {in_ap_start, in_ap_continue, rbu_ap_start, rbu_ap_continue, dtm_ap_start, dtm_ap_continue} = '0;
    in_n_elems = 0; rbu_n_elems = 0; dtm_n_elems = 0; in_base_addr = '0;
    rbu_base_addr = 0; dtm_dt_base_addr = 0; dtm_mass_base_addr = 0;
    {n_mem_stall, n_full_burst, n_in_backpressure, n_add_backpressure, n_rep_split} = '0;
    {n_short_group, n_partial_beat, n_done_held, n_overlap} = '0;
    for (int p = 0; p < NPOIN; p++) begin
      for (int d = 0; d < NUM_DIMS; d++) begin
        veloc[d][p] = (real'($urandom % 20000) - 10000.0) / 977.0;
        coord[d][p] = real'($urandom % 100000) / 313.0;
        rhsid[d][p] = 0.0; r_rhsid[d][p] = 0.0;
      end
      dt_rho[p] = 0.0; mass_rho[p] = 0.0; r_dt_rho[p] = 0.0; r_mass_rho[p] = 0.0;
    end
    for (int e = 0; e < NELEM; e++)
      for (int n = 0; n < PNODE; n++) lnods[e][n] = int'($urandom % NPOIN);
    chunk_first[0] = 0;
    for (int c = 1; c < NCHUNK; c++) chunk_first[c] = chunk_first[c-1] + CHUNK_N[c-1];
    check(chunk_first[NCHUNK-1] + CHUNK_N[NCHUNK-1] == NELEM, "chunk sizes add up");

    repeat (3) @(posedge clk);
    rst_n = 1;
    t0 = $time;
    fork
      input_thread();
      output_thread();
    join
    $display("run: %0d elements in %0d cycles", NELEM, ($time - t0) / 10);

    reference();
    for (int p = 0; p < NPOIN; p++) begin
      bit ok;
      ok = 1;
      for (int d = 0; d < NUM_DIMS; d++) ok &= ($realtobits(rhsid[d][p]) == $realtobits(r_rhsid[d][p]));
      check(ok, $sformatf("rhsid of point %0d", p));
      check($realtobits(dt_rho[p]) == $realtobits(r_dt_rho[p]), $sformatf("dt_rho of point %0d", p));
      check($realtobits(mass_rho[p]) == $realtobits(r_mass_rho[p]), $sformatf("mass_rho of point %0d", p));
    end
    check(g_stage[0].u_model.copy_errors == 0 && g_stage[1].u_model.copy_errors == 0, "replicated derivative streams intact");
    check(g_stage[0].u_model.elements == 267 && g_stage[1].u_model.elements == 264, "elements per engine (151+75+39+1+1, 150+75+38+1)");
    n_mem_stall = u_hbm.stalls;
    $display("mechanisms: mem_stall=%0d full_burst=%0d in_backpressure=%0d add_backpressure=%0d rep_split=%0d",
             n_mem_stall, n_full_burst, n_in_backpressure, n_add_backpressure, n_rep_split);
    $display("mechanisms: short_group=%0d partial_beat=%0d done_held=%0d overlap=%0d",
             n_short_group, n_partial_beat, n_done_held, n_overlap);
    check(n_mem_stall > 0, "memory stall occurred");
    check(n_full_burst > 0, "full-length burst occurred");
    check(n_in_backpressure > 0, "engine back-pressure into the input block occurred");
    check(n_add_backpressure > 0, "Add-stage back-pressure occurred");
    check(n_rep_split > 0, "replicated word taken by one consumer first");
    check(n_short_group > 0, "short last group occurred");
    check(n_partial_beat > 0, "partial last beat occurred");
    check(n_done_held > 0, "done held until continue");
    check(n_overlap > 0, "chunks overlapped");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
