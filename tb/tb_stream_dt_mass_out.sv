// tb_stream_dt_mass_out: engines offer eldtrho and elmurho (4 values per element each) with
// independent random gaps; the block must write both arrays, each densely packed in element
// order into its own buffer over its own write channel, and raise ap_done only when both are
// complete. The memory stalls at random. Buffers are read back and compared value by value.
module tb_stream_dt_mass_out;
  import alya_pkg::*;
  localparam int NE = 2, VALS = 4, MB = 4;
  logic clk = 0, rst_n = 0;
  logic ap_start, ap_ready, ap_done, ap_idle, ap_continue;
  logic [31:0] n_elems;
  logic [63:0] dt_base_addr, mass_base_addr;
  logic [NE-1:0] dt_valid, dt_ready, mass_valid, mass_ready;
  logic [NE-1:0][VALS-1:0][63:0] dt_data, mass_data;
  logic [1:0][63:0] awaddr; logic [1:0][7:0] awlen; logic [1:0] awvalid, awready, wlast, wvalid, wready, bvalid, bready;
  logic [1:0][511:0] wdata; logic [1:0][63:0] wstrb;
  logic [0:0][63:0] araddr = '0; logic [0:0][7:0] arlen = '0; logic [0:0] arvalid = '0, arready, rlast, rvalid, rready = '0;
  logic [0:0][511:0] rdata;
  int checks = 0, failures = 0;
  int sent [2][NE];
  int n_cur = 0;

  stream_dt_mass_out #(.NUM_ENGINES(NE), .VALS(VALS), .MAX_BURST(MB)) dut (
    .clk, .rst_n, .ap_start, .ap_ready, .ap_done, .ap_idle, .ap_continue, .n_elems,
    .dt_base_addr, .mass_base_addr, .dt_valid, .dt_ready, .dt_data, .mass_valid, .mass_ready, .mass_data,
    .m_dt_awaddr (awaddr[0]), .m_dt_awlen (awlen[0]), .m_dt_awvalid (awvalid[0]), .m_dt_awready (awready[0]),
    .m_dt_wdata (wdata[0]), .m_dt_wstrb (wstrb[0]), .m_dt_wlast (wlast[0]), .m_dt_wvalid (wvalid[0]),
    .m_dt_wready (wready[0]), .m_dt_bvalid (bvalid[0]), .m_dt_bready (bready[0]),
    .m_mass_awaddr (awaddr[1]), .m_mass_awlen (awlen[1]), .m_mass_awvalid (awvalid[1]), .m_mass_awready (awready[1]),
    .m_mass_wdata (wdata[1]), .m_mass_wstrb (wstrb[1]), .m_mass_wlast (wlast[1]), .m_mass_wvalid (wvalid[1]),
    .m_mass_wready (wready[1]), .m_mass_bvalid (bvalid[1]), .m_mass_bready (bready[1]));
  hbm_model #(.NRD(1), .NWR(2), .LATENCY(12), .STALL_PCT(25)) u_hbm (
    .clk, .rst_n, .araddr, .arlen, .arvalid, .arready, .rdata, .rlast, .rvalid, .rready,
    .awaddr, .awlen, .awvalid, .awready, .wdata, .wlast, .wvalid, .wready, .bvalid, .bready);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  function automatic logic [63:0] val(int v, int e, int j);
    return $realtobits(real'(v) * 1.0e5 + real'(e) * 8.0 + real'(j) + 0.125);
  endfunction

  always @(negedge clk) begin
    for (int k = 0; k < NE; k++) begin
      int e;
      e = sent[0][k] * NE + k;
      if (!dt_valid[k] && e < n_cur && ($urandom % 2) != 0) begin
        dt_valid[k] = 1;
        for (int j = 0; j < VALS; j++) dt_data[k][j] = val(0, e, j);
      end
      e = sent[1][k] * NE + k;
      if (!mass_valid[k] && e < n_cur && ($urandom % 4) == 0) begin
        mass_valid[k] = 1;
        for (int j = 0; j < VALS; j++) mass_data[k][j] = val(1, e, j);
      end
    end
  end
  always @(posedge clk) begin
    for (int k = 0; k < NE; k++) begin
      if (dt_valid[k] && dt_ready[k]) begin sent[0][k]++; dt_valid[k] <= 0; end
      if (mass_valid[k] && mass_ready[k]) begin sent[1][k]++; mass_valid[k] <= 0; end
    end
  end

  initial begin
    int n, t;
    ap_start = 0; ap_continue = 0; n_elems = 0;
    dt_valid = '0; mass_valid = '0; dt_data = '0; mass_data = '0;
    for (int k = 0; k < NE; k++) begin sent[0][k] = 0; sent[1][k] = 0; end
    dt_base_addr = 64'h0030_0000; mass_base_addr = 64'h0040_0000;
    repeat (3) @(posedge clk);
    rst_n = 1;
    n = 27;
    @(negedge clk);
    n_elems = n; ap_start = 1;
    #1 check(ap_ready, "ap_ready when idle");
    @(negedge clk); ap_start = 0; n_cur = n;
    t = 0;
    while (!ap_done && t < 20000) begin
      @(negedge clk); t++;
      if (!ap_done && dut.dt_ap_done) check(!ap_done, "no done while one variable is pending");
    end
    check(ap_done, "ap_done");
    for (int v = 0; v < 2; v++)
      for (int b = 0; b < (n * VALS + 7) / 8; b++) begin
        logic [511:0] beat;
        bit ok;
        beat = u_hbm.mem[((v == 0 ? dt_base_addr : mass_base_addr) >> 6) + b];
        ok = 1;
        for (int i = 0; i < 8; i++) begin
          int idx;
          idx = b * 8 + i;
          ok &= (beat[64*i +: 64] == ((idx < n * VALS) ? val(v, idx / VALS, idx % VALS) : 64'd0));
        end
        check(ok, $sformatf("%s beat %0d", v == 0 ? "eldtrho" : "elmurho", b));
      end
    ap_continue = 1;
    @(negedge clk); ap_continue = 0;
    check(ap_idle && !ap_done, "idle after continue");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
