// sads_unit: LINES parallel SADS lines (paper: 128 sort cores and 128
// clipping units, one line per query row of the 128-row A-hat tile).
//
// All lines share start, base index, search radius and the chunk strobe, and
// each receives its own 12 scores per round. Each line returns the top-4 keys
// of its row for the current sub-segment. Timing as in sads_line: one round
// per clock, done one cycle after the last chunk.
module sads_unit
  import sofa_pkg::*;
#(
  parameter int unsigned LINES = 128,
  parameter int unsigned NEW   = 12
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic [IDX_W-1:0]   base_idx,
  input  logic [SCORE_W-1:0] radius,
  input  logic               in_valid,
  input  logic               in_last,
  input  logic [NEW-1:0]     in_mask,
  input  logic [SCORE_W-1:0] in_val [LINES][NEW],
  output logic               done,
  output cand_t              top [LINES][4],
  output logic [31:0]        clipped_total
);
  logic [LINES-1:0] done_l;
  logic [15:0]      clipped [LINES];

  for (genvar l = 0; l < LINES; l++) begin : g_line
    sads_line #(.NEW(NEW)) u_line (
      .clk, .rst_n, .start, .base_idx, .radius, .in_valid, .in_last, .in_mask,
      .in_val(in_val[l]), .done(done_l[l]), .top(top[l]), .clipped(clipped[l]));
  end

  assign done = done_l[0];

  always_comb begin
    clipped_total = '0;
    for (int l = 0; l < LINES; l++) clipped_total = clipped_total + 32'(clipped[l]);
  end
endmodule
