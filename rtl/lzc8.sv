// lzc8: 8-bit leading-zero counter, the building block of the configurable
// leading-zero encoder. z is the number of leading zeros of d (0..8) and a is
// the all-zero flag (d == 0). Purely combinational. The paper cites a modular
// LZC design; this one is a plain priority scan, which synthesises to the same
// function.
module lzc8 (
  input  logic [7:0] d,
  output logic [3:0] z,
  output logic       a
);
  always_comb begin
    z = 4'd8;
    for (int i = 0; i < 8; i++) begin
      if (d[i]) z = 4'(7 - i);
    end
    a = (d == 8'h00);
  end
endmodule
