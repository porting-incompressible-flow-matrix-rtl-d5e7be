// tb_gauss_add: feeds random per-Gauss-point vectors and checks each element's lane-wise sum
// against ((g0+g1)+g2)+g3 computed with the simulator's double arithmetic. Also checks the
// timing: the sum appears 22 cycles after the last vector of an element (PGAUS=4, 7-cycle
// adders), and back-to-back elements are accepted at one Gauss point per cycle. A random phase
// adds input gaps and output back-pressure.
module tb_gauss_add;
  localparam int LANES = 4, PG = 4, L = 7;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [LANES-1:0][63:0] in_data, out_data;
  int checks = 0, failures = 0;
  logic [LANES-1:0][63:0] expq[$];
  real acc [LANES];
  int gp = 0, received = 0, sent = 0;
  bit taken = 0;

  gauss_add #(.LANES(LANES), .PGAUS(PG), .ADD_LATENCY(L)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  function automatic real rval();
    return (real'($urandom % 2000000) - 1000000.0) / real'(1 + $urandom % 1000);
  endfunction

  // reference model: accumulate in Gauss point order
  always @(posedge clk) begin
    taken <= in_valid && in_ready;
    if (rst_n && in_valid && in_ready) begin
      for (int l = 0; l < LANES; l++)
        acc[l] = (gp == 0) ? $bitstoreal(in_data[l]) : acc[l] + $bitstoreal(in_data[l]);
      sent++;
      if (gp == PG - 1) begin
        logic [LANES-1:0][63:0] e;
        for (int l = 0; l < LANES; l++) e[l] = $realtobits(acc[l]);
        expq.push_back(e);
        gp = 0;
      end else gp++;
    end
    if (rst_n && out_valid && out_ready) begin
      check(expq.size() > 0 && out_data == expq[0], $sformatf("element %0d sum", received));
      if (expq.size() > 0) void'(expq.pop_front());
      received++;
    end
  end

  task automatic drive_vec();
    for (int l = 0; l < LANES; l++) in_data[l] = $realtobits(rval());
  endtask

  initial begin
    int t, t_last;
    in_valid = 0; in_data = '0; out_ready = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // latency of one element
    for (int g = 0; g < PG; g++) begin
      @(negedge clk); in_valid = 1; drive_vec();
    end
    @(negedge clk); in_valid = 0;
    t = 0;
    while (!out_valid && t < 100) begin @(negedge clk); t++; end
    check(t + 1 == (PG - 1) * L + 1, $sformatf("latency %0d cycles after last vector, expected %0d", t + 1, (PG - 1) * L + 1));
    // back-to-back elements at one Gauss point per cycle
    t = 0;
    for (int n = 0; n < 50 * PG; n++) begin
      @(negedge clk);
      if (n > 0 && !taken) t++;
      in_valid = 1; drive_vec();
    end
    @(negedge clk);
    if (!taken) t++;
    in_valid = 0;
    check(t == 0, $sformatf("%0d stall cycles in back-to-back feed", t));
    repeat (40) @(negedge clk);
    check(received == 51, $sformatf("received %0d elements after full-rate phase", received));
    // random pacing and back-pressure
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      if (!in_valid || taken) begin
        in_valid = ($urandom % 4) != 0;
        drive_vec();
      end
      out_ready = ($urandom % 3) != 0;
    end
    // finish the last element
    while (gp != 0) begin
      @(negedge clk);
      if (!in_valid || taken) begin in_valid = 1; drive_vec(); end
    end
    @(negedge clk); in_valid = 0; out_ready = 1;
    repeat (60) @(negedge clk);
    check(received * PG == sent && expq.size() == 0, $sformatf("all elements out: %0d of %0d", received, sent / PG));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
