// tb_stream_replicate: one source, three consumers with independent random ready patterns.
// Checks that every consumer receives the complete sequence, in order, each word exactly once,
// and that with all consumers ready one word moves per cycle.
module tb_stream_replicate;
  localparam int W = 16, N = 3, WORDS = 2000;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready;
  logic [W-1:0] in_data;
  logic [N-1:0] out_valid, out_ready;
  logic [N-1:0][W-1:0] out_data;
  int checks = 0, failures = 0;
  int rx [N];
  int sent;

  stream_replicate #(.W(W), .N_OUT(N)) dut (.*);
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

  function automatic logic [W-1:0] word(int i); return W'(i * 37 + 5); endfunction

  always @(posedge clk) if (rst_n) begin
    for (int k = 0; k < N; k++)
      if (out_valid[k] && out_ready[k]) begin
        check(out_data[k] == word(rx[k]), $sformatf("consumer %0d word %0d", k, rx[k]));
        rx[k]++;
      end
    if (in_valid && in_ready) sent++;
  end

  initial begin
    int t0;
    for (int k = 0; k < N; k++) rx[k] = 0;
    sent = 0; in_valid = 0; in_data = 0; out_ready = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // full-rate phase
    t0 = 0;
    forever begin
      @(negedge clk);
      if (sent >= 100) break;
      in_valid = 1; in_data = word(sent); out_ready = '1;
      t0++;
    end
    in_data = word(sent);
    check(t0 == 100, $sformatf("full rate: 100 words took %0d cycles", t0));
    // random phase
    forever begin
      @(negedge clk);
      if (sent >= WORDS) break;
      in_valid = 1; in_data = word(sent);
      for (int k = 0; k < N; k++) out_ready[k] = ($urandom % (k + 2)) == 0;
    end
    in_valid = 0; out_ready = '1;
    repeat (5) @(negedge clk);
    for (int k = 0; k < N; k++) check(rx[k] == WORDS, $sformatf("consumer %0d received %0d", k, rx[k]));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
