// tb_stream_fifo: random producer and consumer pacing against a queue model. Checks that every
// word comes out once and in order, that the FIFO takes exactly DEPTH words before in_ready
// drops, and that a word written is readable one cycle later.
module tb_stream_fifo;
  localparam int W = 16, DEPTH = 8;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [W-1:0] in_data, out_data;
  int checks = 0, failures = 0;
  logic [W-1:0] model[$];
  bit taken = 0;
  bit random_phase = 0;

  always @(posedge clk) begin
    taken <= in_valid && in_ready;
    if (random_phase) begin
      if (out_valid && out_ready) begin
        check(model.size() > 0 && out_data == model[0], "random traffic order");
        if (model.size() > 0) void'(model.pop_front());
      end
      if (in_valid && in_ready) model.push_back(in_data);
    end
  end

  stream_fifo #(.W(W), .DEPTH(DEPTH)) dut (.*);
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

  initial begin
    in_valid = 0; in_data = 0; out_ready = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    // fill to capacity
    for (int i = 0; i < DEPTH; i++) begin
      in_valid = 1; in_data = W'(i + 100);
      #1 check(in_ready, $sformatf("in_ready at fill %0d", i));
      @(posedge clk); #1;
      if (i == 0) check(out_valid && out_data == W'(100), "first word visible after one cycle");
      @(negedge clk);
    end
    in_valid = 0;
    #1 check(!in_ready, "full after DEPTH words");
    for (int i = 0; i < DEPTH; i++) begin
      out_ready = 1;
      #1 check(out_valid && out_data == W'(i + 100), $sformatf("drain word %0d", i));
      @(negedge clk);
    end
    #1 check(!out_valid, "empty after drain");
    // random traffic
    random_phase = 1;
    for (int i = 0; i < 5000; i++) begin
      @(negedge clk);
      if (!in_valid || taken) begin
        in_valid = ($urandom % 3) != 0;
        in_data  = W'($urandom);
      end
      out_ready = ($urandom % 3) != 0;
    end
    @(negedge clk);
    check(model.size() <= DEPTH, "model occupancy");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
