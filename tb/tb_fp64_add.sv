// tb_fp64_add: checks the pipelined binary64 adder against the simulator's own double
// arithmetic (IEEE-754, round to nearest even) on random normal, subnormal, cancelling, zero
// and overflowing operand pairs, with random pipeline stalls, and checks the 7-cycle latency.
module tb_fp64_add;
  localparam int L = 7;
  logic clk = 0, en;
  logic [63:0] a, b, sum;
  int checks = 0, failures = 0;
  logic [63:0] expq[$];

  fp64_add #(.LATENCY(L)) dut (.clk, .en, .a, .b, .sum);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [63:0] rnd_fin();
    logic [63:0] v;
    v = {$urandom, $urandom};
    if (v[62:52] == 11'h7FF) v[62:52] = 11'h7FE;
    return v;
  endfunction

  function automatic logic [63:0] ref_add(logic [63:0] x, logic [63:0] y);
    return $realtobits($bitstoreal(x) + $bitstoreal(y));
  endfunction

  task automatic pick(output logic [63:0] x, output logic [63:0] y);
    int mode = $urandom % 8;
    x = rnd_fin();
    y = rnd_fin();
    unique case (mode)
      0: ;                                                          // unrelated values
      1: begin y[62:52] = x[62:52] - 11'($urandom % 60); end         // close exponents
      2: begin y = x ^ 64'h8000_0000_0000_0000; y[7:0] = 8'($urandom); end // near cancellation
      3: begin x[62:52] = 11'($urandom % 3); y[62:52] = 11'($urandom % 3); end // subnormal region
      4: begin y = {~x[63], x[62:0]}; end                            // exact cancellation
      5: begin y = 64'd0; end
      6: begin x[62:52] = 11'h7FE; y[62:52] = 11'h7FE; y[63] = x[63]; end // overflow
      7: begin y[62:52] = x[62:52]; y[63] = ~x[63]; end              // same exponent, opposite sign
    endcase
    if (x[62:52] == 11'h7FF) x[62:52] = 11'h7FE;                     // keep operands finite
    if (y[62:52] == 11'h7FF) y[62:52] = 11'h7FE;
  endtask

  initial begin
    en = 0; a = 0; b = 0;
    repeat (3) @(posedge clk);
    for (int i = 0; i < 20000; i++) begin
      @(negedge clk);
      en = ($urandom % 8) != 0;
      pick(a, b);
      @(posedge clk);
      if (en) begin
        expq.push_back(ref_add(a, b));
        #1;
        if (expq.size() >= L) begin
          checks++;
          if (sum !== expq[expq.size() - L]) begin
            failures++;
            if (failures < 10) $display("mismatch: got %h expected %h", sum, expq[expq.size() - L]);
          end
        end
      end
    end
    // latency: a single operation appears after exactly L enabled edges
    @(negedge clk); en = 1; a = $realtobits(1.5); b = $realtobits(2.25);
    @(negedge clk); a = 0; b = 0;
    for (int c = 2; c <= L; c++) begin
      checks++;
      if (sum === $realtobits(3.75)) begin failures++; $display("result %0d cycles early", L - c + 1); end
      @(negedge clk);
    end
    checks++;
    if (sum !== $realtobits(3.75)) begin failures++; $display("latency: result not present after %0d cycles", L); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
