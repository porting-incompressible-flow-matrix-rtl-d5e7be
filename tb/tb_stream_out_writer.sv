// tb_stream_out_writer: the engines offer their results (element e from engine e mod NE) with
// random gaps, the model HBM2 stalls at random, and after ap_done the buffer is read back:
// value j of element e must sit at double index e*VALS+j, the rest of the last beat must be
// zero, and nothing may be written past the chunk. Chunks are sized to give a short last
// group (fewer elements than engines), a partial last beat and several bursts; the ap_done /
// ap_continue handshake is checked.
module tb_stream_out_writer;
  import alya_pkg::*;
  localparam int NE = 2, VALS = 12, MB = 4;
  logic clk = 0, rst_n = 0;
  logic ap_start, ap_ready, ap_done, ap_idle, ap_continue;
  logic [31:0] n_elems;
  logic [63:0] base_addr;
  logic [NE-1:0] in_valid, in_ready;
  logic [NE-1:0][VALS-1:0][63:0] in_data;
  logic [63:0] m_awaddr; logic [7:0] m_awlen; logic m_awvalid, m_awready;
  logic [511:0] m_wdata; logic [63:0] m_wstrb; logic m_wlast, m_wvalid, m_wready, m_bvalid, m_bready;
  logic [0:0][63:0] araddr = '0; logic [0:0][7:0] arlen = '0; logic [0:0] arvalid = '0, arready, rlast, rvalid, rready = '0;
  logic [0:0][511:0] rdata;
  int checks = 0, failures = 0;
  int sent [NE];
  int chunk = 0, n_cur = 0;

  stream_out_writer #(.NUM_ENGINES(NE), .VALS(VALS), .MAX_BURST(MB)) dut (.*);
  hbm_model #(.NRD(1), .NWR(1), .LATENCY(15), .STALL_PCT(30)) u_hbm (
    .clk, .rst_n, .araddr, .arlen, .arvalid, .arready, .rdata, .rlast, .rvalid, .rready,
    .awaddr (m_awaddr), .awlen (m_awlen), .awvalid (m_awvalid), .awready (m_awready),
    .wdata (m_wdata), .wlast (m_wlast), .wvalid (m_wvalid), .wready (m_wready),
    .bvalid (m_bvalid), .bready (m_bready));

  always #5 clk = ~clk;

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

  function automatic logic [63:0] val(int c, int e, int j);
    return $realtobits(real'(c) * 1.0e6 + real'(e) * 16.0 + real'(j) + 0.5);
  endfunction

  // engine models: offer the next element with random gaps
  always @(negedge clk) begin
    for (int k = 0; k < NE; k++) begin
      int e;
      e = sent[k] * NE + k;
      if (!in_valid[k] && e < n_cur && ($urandom % 3) != 0) begin
        in_valid[k] = 1;
        for (int j = 0; j < VALS; j++) in_data[k][j] = val(chunk, e, j);
      end
    end
  end
  always @(posedge clk) begin
    for (int k = 0; k < NE; k++)
      if (in_valid[k] && in_ready[k]) begin
        sent[k]++;
        in_valid[k] <= 0;
      end
  end

  task automatic run_chunk(int c, int n);
    int t, nb;
    logic [63:0] base;
    base = 64'h0020_0000 + 64'h1_0000 * c;
    nb = (n * VALS + 7) / 8;
    u_hbm.mem[(base >> 6) + nb] = {8{64'h1234_5678_9ABC_DEF0}};   // guard beat past the chunk
    chunk = c;
    for (int k = 0; k < NE; k++) sent[k] = 0;
    @(negedge clk);
    n_elems = n; base_addr = base; ap_start = 1;
    #1 check(ap_ready, "ap_ready when idle");
    @(negedge clk); ap_start = 0;
    n_cur = n;
    t = 0;
    while (!ap_done && t < 20000) begin @(negedge clk); t++; end
    check(ap_done, "ap_done");
    for (int b = 0; b < nb; b++) begin
      logic [511:0] beat;
      bit ok;
      beat = u_hbm.mem[(base >> 6) + b];
      ok = 1;
      for (int i = 0; i < 8; i++) begin
        int idx;
        idx = b * 8 + i;
        if (idx < n * VALS) ok &= (beat[64*i +: 64] == val(c, idx / VALS, idx % VALS));
        else ok &= (beat[64*i +: 64] == 64'd0);
      end
      check(ok, $sformatf("chunk %0d beat %0d", c, b));
    end
    check(u_hbm.mem[(base >> 6) + nb] == {8{64'h1234_5678_9ABC_DEF0}}, "no write past the chunk");
    repeat (2) @(negedge clk);
    check(ap_done && !ap_idle, "done held until continue");
    ap_continue = 1;
    @(negedge clk); ap_continue = 0; n_cur = 0;
    check(ap_idle, "idle after continue");
  endtask

  initial begin
    ap_start = 0; ap_continue = 0; n_elems = 0; base_addr = 0;
    in_valid = '0; in_data = '0;
    for (int k = 0; k < NE; k++) sent[k] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_chunk(0, 25);   // short last group, partial last beat, 38 beats in bursts of 4
    run_chunk(1, 4);    // 6 beats exactly
    run_chunk(2, 1);    // a single element
    check(u_hbm.stalls > 0, "memory back-pressure occurred");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
