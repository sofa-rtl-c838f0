// tb_sort16to4: self-checking testbench of the pruned 16-to-4 bitonic core.
// Drives 2000 random sets of 16 candidates with distinct values (a random
// number of them invalid) and checks against a reference found by plain
// selection: out[0] and out[1] are the largest and second largest valid
// values, {out[2], out[3]} are the 3rd and 4th in either order (the last
// comparator is pruned), indices travel with their values, and invalid
// inputs only fill slots after all valid ones. Combinational block: no cycle
// count; the watchdog only guards the run.
module tb_sort16to4;
  import sofa_pkg::*;
  cand_t in [16];
  cand_t out [4];
  int checks = 0, failures = 0;

  sort16to4 dut (.in, .out);

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int vals [16];
    int srt [16];
    int nv, tmp;
    logic ok;
    for (int t = 0; t < 2000; t++) begin
      nv = 0;
      for (int i = 0; i < 16; i++) begin
        vals[i] = int'($urandom % 200) * 16 + i - 1600;  // distinct values
        in[i].val   = 16'(vals[i]);
        in[i].idx   = 16'(i);
        in[i].valid = ($urandom % 8) != 0;
        if (in[i].valid) begin srt[nv] = vals[i]; nv++; end
      end
      for (int a = 0; a < nv; a++)
        for (int b = a + 1; b < nv; b++)
          if (srt[b] > srt[a]) begin tmp = srt[a]; srt[a] = srt[b]; srt[b] = tmp; end
      #1;
      ok = 1'b1;
      for (int k = 0; k < 4; k++) begin
        if (k < nv) begin
          if (!out[k].valid) ok = 1'b0;
          if (out[k].valid && vals[out[k].idx] != $signed(out[k].val)) ok = 1'b0;
        end
      end
      if (nv > 0 && $signed(out[0].val) != srt[0]) ok = 1'b0;
      if (nv > 1 && $signed(out[1].val) != srt[1]) ok = 1'b0;
      if (nv > 3 && !(($signed(out[2].val) == srt[2] && $signed(out[3].val) == srt[3]) ||
                      ($signed(out[2].val) == srt[3] && $signed(out[3].val) == srt[2]))) ok = 1'b0;
      if (nv == 3 && $signed(out[2].val) != srt[2] && $signed(out[3].val) != srt[2]) ok = 1'b0;
      checks++;
      if (!ok) begin
        failures++;
        if (failures < 10) $display("FAIL t=%0d nv=%0d top=%0d %0d %0d %0d", t, nv,
                                    $signed(out[0].val), $signed(out[1].val),
                                    $signed(out[2].val), $signed(out[3].val));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
