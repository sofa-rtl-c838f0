// dlzs_pe: one shift PE of the DLZS systolic shift array.
//
// Output stationary: the PE keeps a signed accumulator and adds one
// approximate product per valid step. The product x*y is replaced by a shift
// of the linear operand by (W - LZ(y)) (paper Eq. 2-3), with W = 8 for the
// 4-bit weight codes of the key-estimation phase and W = 16 for the 5-bit Q
// codes of the attention-estimation phase. The code's sign bit negates the
// result. In PH_KEST the linear operand comes from the row (token) and the
// code from the column (weight); in PH_AEST the code comes from the row (Q)
// and the linear operand from the column (K-hat). Steps where either operand
// is zero (nz = 0) are skipped.
// Row operands move one PE to the right and column operands one PE down per
// clock. clear zeroes the accumulator synchronously.
module dlzs_pe
  import sofa_pkg::*;
#(
  parameter int unsigned ACC_W = 40
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    clear,
  input  dlzs_phase_e             phase,
  input  dlzs_op_t                a_in,   // from the left
  input  dlzs_op_t                b_in,   // from above
  output dlzs_op_t                a_out,  // to the right
  output dlzs_op_t                b_out,  // to below
  output logic signed [ACC_W-1:0] acc
);
  logic signed [15:0]      lin;
  lz_code_t                code;
  logic [3:0]              sh;
  logic signed [ACC_W-1:0] mag, prod;
  logic                    en;

  always_comb begin
    if (phase == PH_KEST) begin
      lin  = a_in.lin;
      code = b_in.code;
      sh   = 4'd7 - code.lz_m1;
    end else begin
      lin  = b_in.lin;
      code = a_in.code;
      sh   = 4'd15 - code.lz_m1;
    end
    mag  = ACC_W'(lin) <<< sh;
    prod = code.sign ? -mag : mag;
    en   = a_in.vld && a_in.nz && b_in.nz;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_out <= '0;
      b_out <= '0;
      acc   <= '0;
    end else begin
      a_out <= a_in;
      b_out <= b_in;
      if (clear)   acc <= '0;
      else if (en) acc <= acc + prod;
    end
  end
endmodule
