// tb_config_lze: self-checking testbench of the configurable leading-zero
// encoder. For random 16-bit operands (plus 0, +-1 and the most negative
// values) it works out the expected codes with a plain bit loop: take
// |x| (clamped to the largest positive value), count the leading zeros in
// the W-bit field, and form {sign, LZ-1}, all ones for zero. 16-bit mode
// is checked on code16, 8-bit mode on both byte codes. Combinational block:
// no cycle count; the watchdog only guards the run.
module tb_config_lze;
  logic        mode16;
  logic [15:0] d;
  logic [3:0]  code8_hi, code8_lo;
  logic [4:0]  code16;
  int checks = 0, failures = 0;

  config_lze dut (.mode16, .d, .code8_hi, .code8_lo, .code16);

  function automatic int ref_code(input int v, input int w);
    int mag, lz, s;
    s   = (v < 0) ? 1 : 0;
    mag = (v < 0) ? -v : v;
    if (mag > (1 << (w - 1)) - 1) mag = (1 << (w - 1)) - 1;
    if (mag == 0) return (s << (w == 8 ? 3 : 4)) | (w == 8 ? 7 : 15);
    lz = 0;
    for (int b = w - 1; b >= 0; b--) begin
      if (mag & (1 << b)) break;
      lz++;
    end
    return (s << (w == 8 ? 3 : 4)) | (lz - 1);
  endfunction

  task automatic check_one(input logic [15:0] v);
    int e16, eh, el;
    d = v;
    mode16 = 1'b1;
    #1;
    e16 = ref_code(int'($signed(v)), 16);
    checks++;
    if (int'(code16) != e16) begin
      failures++;
      if (failures < 10) $display("FAIL16 d=%h code=%h exp=%h", v, code16, e16);
    end
    mode16 = 1'b0;
    #1;
    eh = ref_code(int'($signed(v[15:8])), 8);
    el = ref_code(int'($signed(v[7:0])), 8);
    checks++;
    if (int'(code8_hi) != eh || int'(code8_lo) != el) begin
      failures++;
      if (failures < 10) $display("FAIL8 d=%h hi=%h/%h lo=%h/%h", v, code8_hi, eh, code8_lo, el);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    check_one(16'h0000);
    check_one(16'h0001);
    check_one(16'hFFFF);
    check_one(16'h8000);
    check_one(16'h8080);
    check_one(16'h7F7F);
    for (int i = 0; i < 3000; i++) begin
      logic [15:0] v;
      v = 16'($urandom);
      v = v >> ($urandom % 16);
      if ($urandom % 2) v = -v;
      check_one(v);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
