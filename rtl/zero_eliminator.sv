// zero_eliminator: marks operands that are zero so that the shift array skips
// every operation that involves them.
//
// The paper says only that calculations with zeros are removed before the
// shift array. Here each lane carries either a linear operand or a log-domain
// code (selected per side by is_code). A lane is nonzero when its linear value
// is not 0, or when its code is not the zero code. The stage is registered:
// outputs appear one cycle after the inputs. A zero lane leaves with nz = 0
// and its data forced to 0, so the PEs it meets neither add nor toggle.
// eliminated counts the zero lanes seen in valid cycles (for statistics).
module zero_eliminator
  import sofa_pkg::*;
#(
  parameter int unsigned N = 128
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            is_code,   // 1: lanes hold codes, 0: linear values
  input  dlzs_op_t        op_in  [N],
  output dlzs_op_t        op_out [N],
  output logic [31:0]     eliminated
);
  logic [N-1:0] nz;
  logic [$clog2(N+1)-1:0] nzero;

  always_comb begin
    nzero = '0;
    for (int i = 0; i < N; i++) begin
      nz[i] = is_code ? !op_in[i].code.zero : (op_in[i].lin != 16'sd0);
      if (op_in[i].vld && !nz[i]) nzero = nzero + 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N; i++) op_out[i] <= '0;
      eliminated <= '0;
    end else begin
      for (int i = 0; i < N; i++) begin
        op_out[i].vld  <= op_in[i].vld;
        op_out[i].nz   <= nz[i];
        op_out[i].lin  <= nz[i] ? op_in[i].lin  : 16'sd0;
        op_out[i].code <= nz[i] ? op_in[i].code : lz_code_t'(0);
      end
      eliminated <= eliminated + 32'(nzero);
    end
  end
endmodule
