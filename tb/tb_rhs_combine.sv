// tb_rhs_combine: drives the convective and viscous sum streams with independent random
// pacing and checks that elrbu is their lane-wise double sum, pairs matched in order, and that
// a pair presented with the output ready appears exactly 7 cycles later.
module tb_rhs_combine;
  localparam int LANES = 12, L = 7;
  logic clk = 0, rst_n = 0;
  logic conv_valid, conv_ready, visc_valid, visc_ready, out_valid, out_ready;
  logic [LANES-1:0][63:0] conv_data, visc_data, out_data;
  int checks = 0, failures = 0;
  logic [LANES-1:0][63:0] cq[$], vq[$];
  int received = 0, nconv = 0, nvisc = 0;
  bit ctaken = 0, vtaken = 0;

  rhs_combine #(.LANES(LANES), .ADD_LATENCY(L)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  function automatic logic [LANES-1:0][63:0] rvec();
    for (int l = 0; l < LANES; l++) rvec[l] = $realtobits((real'($urandom % 100000) - 50000.0) / 7.0);
  endfunction

  always @(posedge clk) begin
    ctaken <= conv_valid && conv_ready;
    vtaken <= visc_valid && visc_ready;
    if (rst_n) begin
      if (conv_valid && conv_ready) cq.push_back(conv_data);
      if (visc_valid && visc_ready) vq.push_back(visc_data);
      check(!(conv_valid && conv_ready) == !(visc_valid && visc_ready), "inputs consumed together");
      if (out_valid && out_ready) begin
        logic [LANES-1:0][63:0] e;
        for (int l = 0; l < LANES; l++)
          e[l] = $realtobits($bitstoreal(cq[0][l]) + $bitstoreal(vq[0][l]));
        check(out_data == e, $sformatf("elrbu %0d", received));
        void'(cq.pop_front()); void'(vq.pop_front());
        received++;
      end
    end
  end

  initial begin
    int t;
    conv_valid = 0; visc_valid = 0; conv_data = '0; visc_data = '0; out_ready = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    conv_valid = 1; visc_valid = 1; conv_data = rvec(); visc_data = rvec();
    @(negedge clk);
    conv_valid = 0; visc_valid = 0;
    t = 1;
    while (!out_valid && t < 50) begin @(negedge clk); t++; end
    check(t == L, $sformatf("latency %0d, expected %0d", t, L));
    for (int n = 0; n < 4000; n++) begin
      @(negedge clk);
      if (!conv_valid || ctaken) begin conv_valid = ($urandom % 3) != 0; conv_data = rvec(); if (conv_valid) nconv++; end
      if (!visc_valid || vtaken) begin visc_valid = ($urandom % 3) != 0; visc_data = rvec(); if (visc_valid) nvisc++; end
      out_ready = ($urandom % 4) != 0;
    end
    @(negedge clk);
    out_ready = 1;
    while (conv_valid || visc_valid) begin
      @(negedge clk);
      if (ctaken) conv_valid = 0;
      if (vtaken) visc_valid = 0;
      if (conv_valid != visc_valid) begin conv_valid = 1; visc_valid = 1; end
    end
    repeat (20) @(negedge clk);
    check(received > 1000 && cq.size() == 0 && vq.size() == 0, $sformatf("received %0d", received));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
