// stream_replicate: copies one stream to N_OUT consumer streams.
//
// The data replication stage of the dataflow design: a stream that several later stages
// need is read once and written to each of them. Each output presents the current input word
// with its own valid; the input word is consumed (in_ready) in the cycle in which every output
// has taken it. An output that takes the word early is remembered in `taken`, so it is not
// offered the same word twice while a slower consumer catches up. With all consumers ready
// the stage moves one word per cycle with no added latency (it is combinational from input to
// outputs). Reading the source and writing every target follows the paper; the per-output
// bookkeeping is this design's way of doing it under back-pressure.
module stream_replicate #(
  parameter int W     = 64,
  parameter int N_OUT = 2
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  in_valid,
  output logic                  in_ready,
  input  logic [W-1:0]          in_data,
  output logic [N_OUT-1:0]      out_valid,
  input  logic [N_OUT-1:0]      out_ready,
  output logic [N_OUT-1:0][W-1:0] out_data
);
  logic [N_OUT-1:0] taken;
  logic [N_OUT-1:0] done_now;

  always_comb begin
    for (int i = 0; i < N_OUT; i++) begin
      out_valid[i] = in_valid && !taken[i];
      out_data[i]  = in_data;
      done_now[i]  = taken[i] || out_ready[i];
    end
    in_ready = in_valid && (&done_now);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      taken <= '0;
    end else if (in_valid) begin
      if (&done_now) taken <= '0;
      else           taken <= taken | (out_valid & out_ready);
    end
  end
endmodule
