// kv_pe_array: the ROWS x COLS 16-bit PE array that generates the selected
// keys and values on demand (paper: 128 x 4 16-bit PEs, "KV generation").
//
// The paper gives the size and the job (K_i = x_i W_k, V_i = x_i W_v only for
// keys chosen by the top-k stage) but not the mapping. Here column c works on
// one selected token and row r on one output feature: with ROWS = 2*D, rows
// 0..D-1 hold the columns of W_k and rows D..2D-1 those of W_v, so one pass
// of H cycles yields K and V of COLS tokens. Each step broadcasts the token
// elements x[c] along the columns and the weight row w[r] along the rows
// (the row/column router); every PE multiply-accumulates in 40 bits
// (output stationary). result is the accumulator shifted right by out_shift
// and saturated to 16 bits. Latency: the accumulators hold the final sum one
// cycle after the last in_valid.
module kv_pe_array
  import sofa_pkg::*;
#(
  parameter int unsigned ROWS = 128,
  parameter int unsigned COLS = 4
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               clear,
  input  logic               in_valid,
  input  logic signed [15:0] x_col [COLS],
  input  logic signed [15:0] w_row [ROWS],
  input  logic [5:0]         out_shift,
  output logic signed [15:0] result [ROWS][COLS]
);
  for (genvar r = 0; r < ROWS; r++) begin : g_row
    for (genvar c = 0; c < COLS; c++) begin : g_col
      logic signed [39:0] acc;
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n)        acc <= '0;
        else if (clear)    acc <= '0;
        else if (in_valid) acc <= acc + 40'(w_row[r] * x_col[c]);
      end
      assign result[r][c] = sat16(48'(acc >>> out_shift));
    end
  end
endmodule
