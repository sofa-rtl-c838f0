// dlzs_array: the ROWS x COLS systolic shift array of the DLZS predictor
// (paper: 128 x 32 shift PEs).
//
// Output-stationary systolic dataflow. PE(r,c) accumulates
//     sum_t  row_in[r](t) (x) col_in[c](t)
// where (x) is the shift-based approximate product of dlzs_pe. The caller
// presents one unskewed step per cycle (row vector and column vector of the
// same inner index t, marked vld). The row scheduler delays row r by r
// cycles and the column scheduler delays column c by c cycles, so the two
// operands of step t meet in PE(r,c) at cycle t+r+c.
//
// Timing: after the last valid step the accumulators settle within
// ROWS+COLS cycles; busy stays high until then. clear resets every
// accumulator. result[r][c] is the accumulator arithmetically shifted right by
// out_shift and saturated to 16 bits (the paper truncates the K-hat output to
// at most 16 bits; the programmable shift is this design's choice).
module dlzs_array
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
  input  dlzs_op_t           row_in [ROWS],
  input  dlzs_op_t           col_in [COLS],
  input  logic [5:0]         out_shift,
  output logic               busy,
  output logic signed [15:0] result [ROWS][COLS]
);
  // operand wires between PEs: a_w[r][c] enters PE(r,c) from the left
  dlzs_op_t a_w [ROWS][COLS+1];
  dlzs_op_t b_w [ROWS+1][COLS];
  logic signed [ACC_W-1:0] acc [ROWS][COLS];

  // row scheduler: row r delayed by r cycles
  for (genvar r = 0; r < ROWS; r++) begin : g_rsched
    if (r == 0) begin : g_direct
      assign a_w[0][0] = row_in[0];
    end else begin : g_delay
      dlzs_op_t dly [r];
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          for (int i = 0; i < r; i++) dly[i] <= '0;
        end else begin
          dly[0] <= row_in[r];
          for (int i = 1; i < r; i++) dly[i] <= dly[i-1];
        end
      end
      assign a_w[r][0] = dly[r-1];
    end
  end

  // column scheduler: column c delayed by c cycles
  for (genvar c = 0; c < COLS; c++) begin : g_csched
    if (c == 0) begin : g_direct
      assign b_w[0][0] = col_in[0];
    end else begin : g_delay
      dlzs_op_t dly [c];
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          for (int i = 0; i < c; i++) dly[i] <= '0;
        end else begin
          dly[0] <= col_in[c];
          for (int i = 1; i < c; i++) dly[i] <= dly[i-1];
        end
      end
      assign b_w[0][c] = dly[c-1];
    end
  end

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    for (genvar c = 0; c < COLS; c++) begin : g_col
      dlzs_pe #(.ACC_W(ACC_W)) u_pe (
        .clk, .rst_n, .clear, .phase,
        .a_in (a_w[r][c]),   .b_in (b_w[r][c]),
        .a_out(a_w[r][c+1]), .b_out(b_w[r+1][c]),
        .acc  (acc[r][c])
      );
      assign result[r][c] = sat16(48'(acc[r][c] >>> out_shift));
    end
  end

  // drain counter
  logic [$clog2(ROWS+COLS+1)-1:0] drain;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                 drain <= '0;
    else if (row_in[0].vld)     drain <= ($clog2(ROWS+COLS+1))'(ROWS + COLS);
    else if (drain != '0)       drain <= drain - 1'b1;
  end
  assign busy = (drain != '0);
endmodule
