// config_lze: configurable 8/16-bit leading-zero encoder (LZE).
//
// Following the paper, the encoder first takes y = abs(x) and then feeds the
// two bytes of y to two 8-bit leading-zero counters in series. In 8-bit mode
// the two counters work on two independent 8-bit operands (d[15:8] and
// d[7:0]). In 16-bit mode the all-zero flag a0 of the upper counter selects
// the result: a0 = 0 gives LZ = z0, a0 = 1 gives LZ = 8 + z1; a0 AND a1 flags a
// zero operand.
//
// code16 is valid when mode16 = 1, code8_hi/code8_lo when mode16 = 0.
// Outputs are log-domain codes (see sofa_pkg): two 4-bit codes
// {sign, LZ-1} for 8-bit mode and one 5-bit code {sign, LZ-1} for 16-bit
// mode, with the all-ones LZ field meaning zero. abs() of the most negative
// value is clamped to the largest positive one so that LZ >= 1 always. The
// code layout and the clamp are this design's choices. Combinational.
module config_lze (
  input  logic        mode16,   // 1: one 16-bit operand, 0: two 8-bit operands
  input  logic [15:0] d,        // one 16-bit operand, or two 8-bit operands
  output logic [3:0]  code8_hi, // 8-bit mode, operand d[15:8]
  output logic [3:0]  code8_lo, // 8-bit mode, operand d[7:0]
  output logic [4:0]  code16    // 16-bit mode, operand d[15:0]
);
  logic [15:0] y16;
  logic [7:0]  yh, yl;
  logic [3:0]  z0, z1;
  logic        a0, a1;
  logic [7:0]  lzc0_in, lzc1_in;
  logic [4:0]  lz16;

  // 16-bit abs, clamped
  always_comb begin
    if (d == 16'h8000)      y16 = 16'h7fff;
    else if (d[15])         y16 = 16'(-d);
    else                    y16 = d;
    if (d[15:8] == 8'h80)   yh = 8'h7f;
    else if (d[15])         yh = 8'(-d[15:8]);
    else                    yh = d[15:8];
    if (d[7:0] == 8'h80)    yl = 8'h7f;
    else if (d[7])          yl = 8'(-d[7:0]);
    else                    yl = d[7:0];
  end

  // the two counters see the bytes of abs16 (16-bit mode) or the two
  // independent abs8 operands (8-bit mode)
  assign lzc0_in = mode16 ? y16[15:8] : yh;
  assign lzc1_in = mode16 ? y16[7:0]  : yl;
  lzc8 u_lzc0 (.d(lzc0_in), .z(z0), .a(a0));
  lzc8 u_lzc1 (.d(lzc1_in), .z(z1), .a(a1));

  always_comb begin
    lz16 = a0 ? (5'd8 + {1'b0, z1}) : {1'b0, z0};
    if (a0 && a1) code16 = {d[15], 4'hF};
    else          code16 = {d[15], 4'(lz16 - 5'd1)};
    if (a0)       code8_hi = {d[15], 3'b111};
    else          code8_hi = {d[15], 3'(z0 - 4'd1)};
    if (a1)       code8_lo = {d[7], 3'b111};
    else          code8_lo = {d[7], 3'(z1 - 4'd1)};
  end
endmodule
