// tb_stream_in: lays out chunks of elements in a model HBM2 the way the host does (each
// engine's elvel and elcod split into low and high halves, one 512-bit beat per element, with
// garbage in the padding) and checks that every engine receives exactly its elements
// (e mod NUM_ENGINES), in order, with all 12 values of each variable right. With the engines
// always ready it also checks the rate: one element per cycle per engine, no gaps. Further
// chunks use random engine back-pressure and a chunk of one element, and check the
// ap_ctrl_chain handshake (done held until continue).
module tb_stream_in;
  import alya_pkg::*;
  localparam int NE = 2, NRD = 4 * NE, MB = 8;
  logic clk = 0, rst_n = 0;
  logic ap_start, ap_ready, ap_done, ap_idle, ap_continue;
  logic [31:0] n_elems;
  logic [NRD-1:0][63:0] base_addr, m_araddr;
  logic [NRD-1:0][7:0] m_arlen;
  logic [NRD-1:0] m_arvalid, m_arready, m_rlast, m_rvalid, m_rready;
  logic [NRD-1:0][511:0] m_rdata;
  logic [NE-1:0] elvel_valid, elvel_ready, elcod_valid, elcod_ready;
  elem_vec_t [NE-1:0] elvel_data, elcod_data;
  logic [0:0][63:0] awaddr = '0; logic [0:0][7:0] awlen = '0; logic [0:0] awvalid = '0, awready, wlast = '0, wvalid = '0, wready, bvalid, bready = '1;
  logic [0:0][511:0] wdata = '0;
  int checks = 0, failures = 0;
  int stall_pct = 0;
  int got_v [NE], got_c [NE];
  int first_t [NE], last_t [NE];
  int cyc = 0;
  int chunk = 0;

  stream_in #(.NUM_ENGINES(NE), .MAX_BURST(MB)) dut (.*);
  hbm_model #(.NRD(NRD), .NWR(1), .LATENCY(20), .STALL_PCT(0)) u_hbm (
    .clk, .rst_n, .araddr (m_araddr), .arlen (m_arlen), .arvalid (m_arvalid), .arready (m_arready),
    .rdata (m_rdata), .rlast (m_rlast), .rvalid (m_rvalid), .rready (m_rready),
    .awaddr, .awlen, .awvalid, .awready, .wdata, .wlast, .wvalid, .wready, .bvalid, .bready);

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

  function automatic real val(int c, int e, int v, int j);
    return real'(c) * 1.0e7 + real'(e) * 100.0 + real'(v) * 50.0 + real'(j) + 0.25;
  endfunction

  // host side: gather a chunk into the per-port buffers
  task automatic load_chunk(int c, int n);
    for (int p = 0; p < NRD; p++) base_addr[p] = 64'h0010_0000 * (p + 1) + 64'h4000 * c;
    for (int e = 0; e < n; e++) begin
      int k, i;
      k = e % NE; i = e / NE;
      for (int v = 0; v < 2; v++)
        for (int h = 0; h < 2; h++) begin
          logic [511:0] beat;
          beat = {8{64'hDEAD_BEEF_0BAD_F00D}};
          for (int j = 0; j < HALF_VALS; j++) beat[64*j +: 64] = $realtobits(val(c, e, v, h * HALF_VALS + j));
          u_hbm.mem[(base_addr[4*k + 2*v + h] + 64'(i) * 64) >> 6] = beat;
        end
    end
  endtask

  always @(posedge clk) if (rst_n) begin
    for (int k = 0; k < NE; k++) begin
      if (elvel_valid[k] && elvel_ready[k]) begin
        int e;
        bit ok;
        e = got_v[k] * NE + k; ok = 1;
        for (int j = 0; j < ELEM_VALS; j++) ok &= (elvel_data[k][j] == $realtobits(val(chunk, e, 0, j)));
        check(ok, $sformatf("chunk %0d engine %0d elvel of element %0d", chunk, k, e));
        if (got_v[k] == 0) first_t[k] = cyc;
        last_t[k] = cyc;
        got_v[k]++;
      end
      if (elcod_valid[k] && elcod_ready[k]) begin
        int e;
        bit ok;
        e = got_c[k] * NE + k; ok = 1;
        for (int j = 0; j < ELEM_VALS; j++) ok &= (elcod_data[k][j] == $realtobits(val(chunk, e, 1, j)));
        check(ok, $sformatf("chunk %0d engine %0d elcod of element %0d", chunk, k, e));
        got_c[k]++;
      end
    end
  end

  task automatic run_chunk(int c, int n, bit random_ready);
    int t;
    chunk = c;
    for (int k = 0; k < NE; k++) begin got_v[k] = 0; got_c[k] = 0; end
    load_chunk(c, n);
    @(negedge clk);
    check(ap_idle, "idle before start");
    n_elems = n; ap_start = 1;
    #1 check(ap_ready, "ap_ready with ap_start when idle");
    @(negedge clk); ap_start = 0;
    t = 0;
    while (!ap_done && t < 5000) begin
      @(negedge clk); t++;
      elvel_ready = random_ready ? NE'($urandom) : '1;
      elcod_ready = random_ready ? NE'($urandom) : '1;
    end
    elvel_ready = '1; elcod_ready = '1;
    for (int k = 0; k < NE; k++) begin
      int exp_n;
      exp_n = (n > k) ? (n - k + NE - 1) / NE : 0;
      check(got_v[k] == exp_n && got_c[k] == exp_n, $sformatf("chunk %0d engine %0d got %0d/%0d of %0d", c, k, got_v[k], got_c[k], exp_n));
      if (!random_ready && exp_n > 1)
        check(last_t[k] - first_t[k] == exp_n - 1, $sformatf("engine %0d: %0d elements over %0d cycles", k, exp_n, last_t[k] - first_t[k] + 1));
    end
    repeat (3) @(negedge clk);
    check(ap_done && !ap_idle, "done held until continue");
    ap_continue = 1;
    @(negedge clk); ap_continue = 0;
    check(ap_idle && !ap_done, "idle after continue");
  endtask

  initial begin
    ap_start = 0; ap_continue = 0; n_elems = 0; base_addr = '0;
    elvel_ready = '1; elcod_ready = '1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_chunk(0, 101, 0);    // full rate, several bursts per port
    run_chunk(1, 37, 1);     // random engine back-pressure
    run_chunk(2, 1, 0);      // one element: engine 1 idle
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
