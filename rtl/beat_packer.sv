// beat_packer: packs groups of binary64 values densely into 512-bit beats.
//
// Each input transfer carries in_n values (at most IN_MAX) in its low lanes; they are appended
// behind the values already held, and every 8 values leave as one beat, value i of the beat in
// bits [64i+63:64i]. When `flush` is high and fewer than 8 values are left, they go out as a
// final beat whose remaining lanes are zero. A beat can leave and a new group enter in the same
// cycle; the buffer holds IN_MAX+8 values, so a full group is accepted every cycle in which a
// beat also leaves. Used by the output streaming blocks to turn results of several engines into
// full-width memory writes; the packing order is this design's choice.
module beat_packer #(
  parameter int IN_MAX = 24
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  output logic                    in_ready,
  input  logic [IN_MAX-1:0][63:0] in_data,
  input  logic [7:0]              in_n,
  input  logic                    flush,
  output logic                    out_valid,
  input  logic                    out_ready,
  output logic [511:0]            out_data,
  output logic                    empty
);
  localparam int CAP = IN_MAX + 8;
  localparam int CW  = $clog2(CAP + 1);

  logic [CAP-1:0][63:0] buffer, shifted, next_buf;
  logic [CW-1:0]        cnt, base;
  logic                 emit, accept;

  assign out_valid = (cnt >= CW'(8)) || (flush && cnt != 0);
  assign emit      = out_valid && out_ready;
  assign empty     = (cnt == 0);

  always_comb begin
    for (int i = 0; i < 8; i++) out_data[64*i +: 64] = (CW'(i) < cnt) ? buffer[i] : 64'd0;
    base     = emit ? ((cnt >= CW'(8)) ? cnt - CW'(8) : '0) : cnt;
    in_ready = (32'(base) + 32'(in_n) <= CAP);
    accept   = in_valid && in_ready;
    for (int i = 0; i < CAP; i++) shifted[i] = (emit && i + 8 < CAP) ? buffer[i+8] : (emit ? 64'd0 : buffer[i]);
    next_buf = shifted;
    if (accept) begin
      for (int i = 0; i < IN_MAX; i++)
        if (8'(i) < in_n) next_buf[32'(base) + i] = in_data[i];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt    <= '0;
      buffer <= '0;
    end else begin
      buffer <= next_buf;
      cnt    <= base + (accept ? CW'(in_n) : CW'(0));
    end
  end
endmodule
