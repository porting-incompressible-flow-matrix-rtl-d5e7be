// stream_fifo: the FIFO that carries a stream from one dataflow stage to the next.
//
// A synchronous first-word-fall-through FIFO with an AXI-Stream style valid/ready handshake
// on both sides: a word moves when valid and ready are both high at a clock edge. It holds
// DEPTH words; in_ready is low only when it is full, out_valid high whenever it holds a word.
// A word written in one cycle is readable in the next. Deep FIFOs between the stages keep
// stages that run at different paces from stalling each other, which is why the paper
// deepens its stream FIFOs; the depth itself (16) is this design's choice.
module stream_fifo #(
  parameter int W     = 64,
  parameter int DEPTH = 16
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  output logic         in_ready,
  input  logic [W-1:0] in_data,
  output logic         out_valid,
  input  logic         out_ready,
  output logic [W-1:0] out_data
);
  localparam int AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] rd_ptr, wr_ptr;
  logic [AW:0]   count;
  logic          push, pop;

  assign in_ready  = (count != (AW+1)'(DEPTH));
  assign out_valid = (count != 0);
  assign out_data  = mem[rd_ptr];
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;

  always_ff @(posedge clk) begin
    if (push) mem[wr_ptr] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      if (push) wr_ptr <= (wr_ptr == AW'(DEPTH - 1)) ? '0 : wr_ptr + 1'b1;
      if (pop)  rd_ptr <= (rd_ptr == AW'(DEPTH - 1)) ? '0 : rd_ptr + 1'b1;
      count <= count + (AW+1)'(push) - (AW+1)'(pop);
    end
  end

  // A producer must hold its word until it is taken.
  property p_in_stable;
    @(posedge clk) disable iff (!rst_n) (in_valid && !in_ready) |=> (in_valid && $stable(in_data));
  endproperty
  a_in_stable: assert property (p_in_stable) else $error("stream_fifo: input dropped while stalled");
endmodule
