// sufa_unit: the SU-FA engine (paper: 128 x 2 x 2 PEs, 128 Exp and 128 DIV
// units): LINES query lines, the selected-K and selected-V buffers, and the
// tiled computation sequencer that drives every line with one control word.
//
// Use:
//   1. Write the Q line buffers: q_we with element index q_addr and one
//      element per line in q_data (one Q column per cycle).
//   2. init (one cycle, while idle) clears the running Max, l and o.
//   3. For each key pair: when pair_ready, pulse pair_valid with the two K
//      and V vectors, the per-line selection bits sel[line] and the AP mode.
//      The unit latches K/V into its selected-K/V buffers and runs SA-1 (D
//      cycles), AP (5 cycles) and SA-2 (D cycles): 2*D+5 cycles per pair.
//      The paper's tiled computation controller chooses the mode: mode 1 on
//      the first pair of a tile, mode 0 otherwise.
//   4. fin_start: for d = 0..D-1 every line divides o[d] by l (49 cycles per
//      element); o_valid pulses with o_d and one result per line. fin_done
//      pulses after the last element.
// upd_count / fix_count count line events of the Max register: raised in
// mode 1, and raised in mode 0 by the Max-assurance path.
module sufa_unit
  import sofa_pkg::*;
#(
  parameter int unsigned LINES = 128,
  parameter int unsigned D     = 64
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [4:0]         s_shift,
  input  logic               q_we,
  input  logic [7:0]         q_addr,
  input  logic signed [15:0] q_data [LINES],
  input  logic               init,
  input  logic               pair_valid,
  output logic               pair_ready,
  input  ap_mode_e           pair_mode,
  input  logic [1:0]         sel [LINES],
  input  logic signed [15:0] k_in [2][D],
  input  logic signed [15:0] v_in [2][D],
  input  logic               fin_start,
  output logic               o_valid,
  output logic [7:0]         o_d,
  output logic signed [15:0] o_data [LINES],
  output logic               fin_done,
  output logic [31:0]        upd_count,
  output logic [31:0]        fix_count
);
  localparam int unsigned DIV_LAT = 50;   // seq_div start-to-done plus one

  logic signed [15:0] kbuf [2][D];        // selected K buffer
  logic signed [15:0] vbuf [2][D];        // selected V buffer
  logic [1:0]         sel_q [LINES];
  sufa_ctl_t          ctl;
  logic [7:0]         cnt;
  logic [6:0]         wait_c;
  logic               div_wait;
  logic signed [15:0] k_d [2];
  logic signed [15:0] v_d [2];
  logic [LINES-1:0]   ov, upd, fix;

  assign pair_ready = (ctl.phase == SF_IDLE) && !pair_valid && !fin_start;

  always_comb begin
    for (int j = 0; j < 2; j++) begin
      k_d[j] = kbuf[j][ctl.d[$clog2(D)-1:0]];
      v_d[j] = vbuf[j][ctl.d[$clog2(D)-1:0]];
    end
  end

  // sequencer
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ctl <= '0;
      cnt <= '0;
      wait_c <= '0;
      div_wait <= 1'b0;
      fin_done <= 1'b0;
      o_d <= '0;
      for (int l = 0; l < LINES; l++) sel_q[l] <= '0;
    end else begin
      fin_done   <= 1'b0;
      ctl.init   <= 1'b0;
      ctl.div_go <= 1'b0;
      ctl.first  <= 1'b0;
      unique case (ctl.phase)
        SF_IDLE: begin
          if (init) ctl.init <= 1'b1;
          if (pair_valid) begin
            kbuf <= k_in;
            vbuf <= v_in;
            for (int l = 0; l < LINES; l++) sel_q[l] <= sel[l];
            ctl.mode  <= pair_mode;
            ctl.phase <= SF_SA1;
            ctl.d     <= '0;
            ctl.first <= 1'b1;
          end else if (fin_start) begin
            ctl.phase  <= SF_DIV;
            ctl.d      <= '0;
            ctl.div_go <= 1'b1;
            wait_c     <= '0;
            div_wait   <= 1'b1;
          end
        end
        SF_SA1: begin
          if (ctl.d == 8'(D-1)) begin
            ctl.phase   <= SF_AP;
            ctl.ap_step <= '0;
          end else begin
            ctl.d <= ctl.d + 1'b1;
          end
        end
        SF_AP: begin
          if (ctl.ap_step == 3'd4) begin
            ctl.phase <= SF_SA2;
            ctl.d     <= '0;
            ctl.first <= 1'b1;
          end else begin
            ctl.ap_step <= ctl.ap_step + 1'b1;
          end
        end
        SF_SA2: begin
          if (ctl.d == 8'(D-1)) begin
            ctl.phase <= SF_IDLE;
            ctl.d     <= '0;
          end else begin
            ctl.d <= ctl.d + 1'b1;
          end
        end
        SF_DIV: begin
          if (ov[0]) o_d <= ctl.d;
          if (wait_c == 7'(DIV_LAT - 1)) begin
            wait_c <= '0;
            if (ctl.d == 8'(D-1)) begin
              ctl.phase <= SF_IDLE;
              ctl.d     <= '0;
              fin_done  <= 1'b1;
            end else begin
              ctl.d      <= ctl.d + 1'b1;
              ctl.div_go <= 1'b1;
            end
          end else begin
            wait_c <= wait_c + 1'b1;
          end
        end
        default: ctl.phase <= SF_IDLE;
      endcase
    end
  end

  for (genvar l = 0; l < LINES; l++) begin : g_line
    sufa_line #(.D(D)) u_line (
      .clk, .rst_n, .ctl, .sel(sel_q[l]), .s_shift,
      .q_we, .q_addr, .q_data(q_data[l]), .k_d, .v_d,
      .o_valid(ov[l]), .o_data(o_data[l]), .upd_evt(upd[l]), .fix_evt(fix[l]));
  end

  assign o_valid = ov[0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      upd_count <= '0;
      fix_count <= '0;
    end else begin
      upd_count <= upd_count + 32'($countones(upd));
      fix_count <= fix_count + 32'($countones(fix));
    end
  end
endmodule
