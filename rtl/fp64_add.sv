// fp64_add: pipelined IEEE-754 binary64 adder.
//
// sum = a + b, rounded to nearest, ties to even, LATENCY enabled cycles after the operands
// are presented. The pipeline advances only when `en` is high, which lets a stage stall its
// whole datapath on back-pressure. A result for every input, one per enabled cycle: there is
// no loop-carried dependency inside.
//
// The seven-cycle latency is the double-precision add latency the paper reports for its FPGA
// (it is why accumulation loops could not reach an initiation interval of one). How the adder
// works inside is this design's own: the addition is evaluated combinationally in the first
// stage and the result then travels through LATENCY-1 registers, leaving synthesis free to
// retime the logic across them. Subnormal operands and results are exact; an infinity
// operand gives an infinity, inf - inf and NaN operands give the quiet NaN 0x7FF8_0000_0000_0000.
module fp64_add #(
  parameter int LATENCY = 7
) (
  input  logic        clk,
  input  logic        en,
  input  logic [63:0] a,
  input  logic [63:0] b,
  output logic [63:0] sum
);
  function automatic logic [63:0] add_f(input logic [63:0] x, input logic [63:0] y);
    logic        sx, sy, sr;
    logic [10:0] ex, ey;
    logic [11:0] er;             // working exponent, may exceed 2046 before the overflow test
    logic [52:0] mx, my;         // significands with hidden bit
    logic [55:0] ax, ay;         // significand, guard, round, sticky
    logic [56:0] s;
    logic [11:0] d;
    logic [5:0]  lz;
    logic [53:0] mr;
    logic        up;
    logic [55:0] shifted;
    logic        sticky;
    // special values
    if (x[62:52] == 11'h7FF || y[62:52] == 11'h7FF) begin
      if ((x[62:52] == 11'h7FF && x[51:0] != 0) || (y[62:52] == 11'h7FF && y[51:0] != 0))
        return 64'h7FF8_0000_0000_0000;
      if (x[62:52] == 11'h7FF && y[62:52] == 11'h7FF && x[63] != y[63])
        return 64'h7FF8_0000_0000_0000;
      return (x[62:52] == 11'h7FF) ? x : y;
    end
    // order so that |x| >= |y|
    if (y[62:0] > x[62:0]) begin
      logic [63:0] t;
      t = x; x = y; y = t;
    end
    sx = x[63]; sy = y[63];
    ex = (x[62:52] == 0) ? 11'd1 : x[62:52];
    ey = (y[62:52] == 0) ? 11'd1 : y[62:52];
    mx = {(x[62:52] != 0), x[51:0]};
    my = {(y[62:52] != 0), y[51:0]};
    ax = {mx, 3'b000};
    d  = {1'b0, ex} - {1'b0, ey};
    if (d >= 12'd56) begin
      ay = {55'd0, (my != 0)};
    end else begin
      shifted = {my, 3'b000} >> d;
      sticky  = (({my, 3'b000} & ((56'd1 << d) - 56'd1)) != 0);
      ay = {shifted[55:1], shifted[0] | sticky};
    end
    er = {1'b0, ex};
    sr = sx;
    if (sx == sy) begin
      s = {1'b0, ax} + {1'b0, ay};
      if (s[56]) begin
        s  = {1'b0, s[56:2], s[1] | s[0]};
        er = er + 12'd1;
      end
    end else begin
      s = {1'b0, ax} - {1'b0, ay};
      if (s == 0) return 64'd0;     // exact cancellation gives +0 in round-to-nearest
      lz = 6'd0;
      for (int i = 55; i >= 0; i--) begin
        if (s[i]) break;
        lz = lz + 6'd1;
      end
      // normalise, but keep the exponent at least 1 (subnormal result otherwise)
      if ({6'd0, lz} >= er) lz = 6'(er - 12'd1);
      s  = s << lz;
      er = er - {6'd0, lz};
    end
    // round to nearest even on bits [2:0]
    up = s[2] & (s[1] | s[0] | s[3]);
    mr = {1'b0, s[55:3]} + {53'd0, up};
    if (mr[53]) begin
      mr = mr >> 1;
      er = er + 12'd1;
    end
    if (er >= 12'd2047) return {sr, 11'h7FF, 52'd0};
    return {sr, (mr[52] ? er[10:0] : 11'd0), mr[51:0]};
  endfunction

  logic [LATENCY-1:0][63:0] pipe;

  always_ff @(posedge clk) begin
    if (en) begin
      pipe[0] <= add_f(a, b);
      for (int i = 1; i < LATENCY; i++) pipe[i] <= pipe[i-1];
    end
  end

  assign sum = pipe[LATENCY-1];
endmodule
