// exp_unit: fixed-point exponential for SU-FA, p = exp(x) for x <= 0.
//
// The paper names the Exp unit (128 of them) but not its insides. This one
// uses exp(x) = 2^(x*log2(e)): u = -x*log2(e) is split into an integer part n
// and a fraction f, 2^-f is approximated by the line 1 - f/2, and the result
// is shifted right by n.
//   x : signed Q8.8 score difference (17 bits); x > 0 is clamped to 0
//   p : unsigned Q1.15, 1.0 = 16'h8000; p = 0 once n >= 16
// log2(e) is the constant 23637 / 2^14. Combinational.
module exp_unit (
  input  logic signed [16:0] x,
  output logic [15:0]        p
);
  localparam logic [31:0] LOG2E_Q14 = 32'd23637;
  logic [31:0] mag, u;
  logic [23:0] n;
  logic [7:0]  f;
  logic [15:0] mant;

  always_comb begin
    mag  = x[16] ? 32'(-x) : 32'd0;
    u    = (mag * LOG2E_Q14) >> 14;     // Q8.8
    n    = u[31:8];
    f    = u[7:0];
    mant = 16'h8000 - {2'b00, f, 6'b0};
    p    = (n >= 24'd16) ? 16'd0 : (mant >> n[3:0]);
  end
endmodule
