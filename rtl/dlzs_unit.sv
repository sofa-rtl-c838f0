// dlzs_unit: the reusable and configurable DLZS prediction engine
// (paper Sec. IV-B, Fig. 12): LZC array, zero eliminator and shift array.
//
// Two phases share the same shift array:
//   PH_KEST  key prediction. row_data[r] is a 16-bit token element of key r
//            whose upper byte is used as the 8-bit token; col_data[c][3:0] is
//            the pre-converted 4-bit LZ code of W_k[t][c]. result = K-hat.
//   PH_AEST  attention prediction. row_data[r] is the 16-bit Q element of
//            query r, converted by the 16-bit-mode LZE array (ROWS encoders)
//            into a 5-bit code; col_data[c] is the 16-bit K-hat element of
//            key c. result = A-hat.
// The zero eliminator sits between the encoders and the array, so a step
// enters the array one cycle after it is presented. Using the upper byte of
// the 16-bit token for the 8-bit prediction is this design's choice; the
// paper only says that prediction uses 8-bit tokens.
// Interface: one unskewed step per cycle with in_valid; busy covers the
// zero-eliminator stage and the array drain.
module dlzs_unit
  import sofa_pkg::*;
#(
  parameter int unsigned ROWS  = 128,
  parameter int unsigned COLS  = 32,
  parameter int unsigned ACC_W = 40
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               clear,
  input  dlzs_phase_e        phase,
  input  logic               in_valid,
  input  logic [15:0]        row_data [ROWS],
  input  logic [15:0]        col_data [COLS],
  input  logic [5:0]         out_shift,
  output logic               busy,
  output logic signed [15:0] result [ROWS][COLS],
  output logic [31:0]        eliminated
);
  dlzs_op_t row_op [ROWS];
  dlzs_op_t col_op [COLS];
  dlzs_op_t row_ze [ROWS];
  dlzs_op_t col_ze [COLS];
  logic [31:0] elim_r, elim_c;
  logic        arr_busy, in_valid_q;

  // LZC array (ROWS configurable encoders, 16-bit mode for Q)
  for (genvar r = 0; r < ROWS; r++) begin : g_lze
    logic [3:0] c8h, c8l;
    logic [4:0] c16;
    config_lze u_lze (.mode16(1'b1), .d(row_data[r]),
                      .code8_hi(c8h), .code8_lo(c8l), .code16(c16));
    always_comb begin
      row_op[r].vld  = in_valid;
      row_op[r].nz   = 1'b0;
      row_op[r].lin  = (phase == PH_KEST) ? 16'($signed(row_data[r][15:8])) : 16'sd0;
      row_op[r].code = (phase == PH_AEST) ? unpack_q5(c16) : lz_code_t'(0);
    end
  end

  for (genvar c = 0; c < COLS; c++) begin : g_col
    always_comb begin
      col_op[c].vld  = in_valid;
      col_op[c].nz   = 1'b0;
      col_op[c].lin  = (phase == PH_AEST) ? $signed(col_data[c]) : 16'sd0;
      col_op[c].code = (phase == PH_KEST) ? unpack_w4(col_data[c][3:0]) : lz_code_t'(0);
    end
  end

  zero_eliminator #(.N(ROWS)) u_ze_row (
    .clk, .rst_n, .is_code(phase == PH_AEST), .op_in(row_op), .op_out(row_ze),
    .eliminated(elim_r));
  zero_eliminator #(.N(COLS)) u_ze_col (
    .clk, .rst_n, .is_code(phase == PH_KEST), .op_in(col_op), .op_out(col_ze),
    .eliminated(elim_c));

  dlzs_array #(.ROWS(ROWS), .COLS(COLS), .ACC_W(ACC_W)) u_array (
    .clk, .rst_n, .clear, .phase, .row_in(row_ze), .col_in(col_ze),
    .out_shift, .busy(arr_busy), .result);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) in_valid_q <= 1'b0;
    else        in_valid_q <= in_valid;
  end
  assign busy       = arr_busy || in_valid_q;
  assign eliminated = elim_r + elim_c;
endmodule
