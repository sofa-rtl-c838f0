// tb_exp_unit: self-checking testbench of exp_unit.
// Drives 4000 random Q8.8 inputs in [-20, +1) plus the corner values 0, a
// positive value (clamped to 0) and the most negative input, and compares
// p / 2^15 with the real exp(min(x,0)) worked out by $exp. The linear
// fraction step of the unit is accurate to about 0.045, so the tolerance is
// 0.05 absolute. Combinational block: no cycle count applies; the watchdog
// only guards the run.
module tb_exp_unit;
  logic signed [16:0] x;
  logic [15:0]        p;
  int checks = 0, failures = 0;

  exp_unit dut (.x, .p);

  task automatic check_one(input logic signed [16:0] xi);
    real xr, ref_v, got;
    x = xi;
    #1;
    xr    = real'(xi) / 256.0;
    if (xr > 0.0) xr = 0.0;
    ref_v = $exp(xr);
    got   = real'(p) / 32768.0;
    checks++;
    if (got - ref_v > 0.05 || ref_v - got > 0.05) begin
      failures++;
      if (failures < 10)
        $display("FAIL x=%0d p=%0d got=%f ref=%f", xi, p, got, ref_v);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    check_one(17'sd0);
    check_one(17'sd200);
    check_one(-17'sd65536);
    for (int i = 0; i < 4000; i++)
      check_one(17'(-($urandom % 5120) + 255));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
