// sufa_line: one query line of the SU-FA engine (paper Sec. III-C, IV-D,
// Fig. 10(b) and Fig. 14): Q line buffer, two SA-1 PEs, the folded auxiliary
// process (AP) module, two SA-2 PEs and the O updating module with its DIV
// unit.
//
// Keys arrive in pairs (the paper feeds two K rows per Q vector). The line
// follows the control word of the shared sequencer:
//   SF_SA1  D cycles, s_j += Q[d]*K_j[d] for j = 0,1. The sums are turned into
//           Q8.8 scores by an arithmetic right shift (s_shift) and saturation.
//   SF_AP   5 cycles through one comparator, one subtractor and one Exp unit:
//           steps 0,1 compare s_0, s_1 with the Max register and update it;
//           steps 2,3 compute p_j = exp(s_j - Max); step 4 computes the
//           rescale factor alpha = exp(Max_old - Max) and l = alpha*l + p0 + p1.
//           In mode 1 (max update) the compare is the intended operation. In
//           mode 0 (computation) the score should not exceed the Max predicted
//           by the top-k stage. If it does (a DLZS prediction error), the same
//           comparator raises the Max anyway: this is the Max-assurance path,
//           and it is counted in fix_evt. Only keys selected by this query
//           (sel) take part.
//   SF_SA2  D cycles, o[d] = alpha*o[d] + p0*V_0[d] + p1*V_1[d]. With an
//           unchanged Max alpha = 1.0, so no rescaling work is needed.
//   SF_DIV  per element d: O[d] = o[d] / l on the sequential divider; o_valid
//           pulses with the 16-bit result.
// Folding the per-tile max update of the paper's line 5-6 into the running
// alpha rescale (instead of storing l and o per tile) is this design's
// choice; it yields the same O.
// Formats: Q, K, V 16-bit signed; p and alpha Q1.15; l 32-bit; o 48-bit.
module sufa_line
  import sofa_pkg::*;
#(
  parameter int unsigned D = 64
) (
  input  logic               clk,
  input  logic               rst_n,
  input  sufa_ctl_t          ctl,
  input  logic [1:0]         sel,        // this query needs key 0 / key 1
  input  logic [4:0]         s_shift,
  // Q line buffer write
  input  logic               q_we,
  input  logic [7:0]         q_addr,
  input  logic signed [15:0] q_data,
  // broadcast K / V elements of the pair for element ctl.d
  input  logic signed [15:0] k_d [2],
  input  logic signed [15:0] v_d [2],
  // output
  output logic               o_valid,
  output logic signed [15:0] o_data,
  output logic               upd_evt,    // max raised in mode 1
  output logic               fix_evt     // max raised in mode 0 (assurance)
);
  logic signed [15:0] q_buf [D];
  logic signed [39:0] s_acc [2];
  logic signed [16:0] sc [2];            // Q8.8 scores
  logic signed [16:0] m_q, m_old;
  logic               m_vld, m_vld_old;
  logic [15:0]        p_q [2];
  logic [15:0]        alpha;
  logic [31:0]        l_q;
  logic signed [47:0] o_mem [D];         // o accumulators (memory)
  logic [D-1:0]       o_live;            // element written since init
  logic signed [47:0] o_rd;
  logic signed [16:0] exp_x;
  logic [15:0]        exp_p;
  logic               div_done;
  logic signed [15:0] div_quo;

  exp_unit u_exp (.x(exp_x), .p(exp_p));

  seq_div #(.DW(48), .LW(32)) u_div (
    .clk, .rst_n, .start(ctl.phase == SF_DIV && ctl.div_go),
    .num(o_rd), .den(l_q), .done(div_done), .quo(div_quo));

  // score of an SA-1 accumulator
  function automatic logic signed [16:0] to_score(input logic signed [39:0] a,
                                                  input logic [4:0] sh);
    logic signed [39:0] t;
    t = a >>> sh;
    if (t > 40'sd32767)  return 17'sd32767;
    if (t < -40'sd32768) return -17'sd32768;
    return t[16:0];
  endfunction

  always_comb begin
    sc[0] = to_score(s_acc[0], s_shift);
    sc[1] = to_score(s_acc[1], s_shift);
    unique case (ctl.ap_step)
      3'd2:    exp_x = sc[0] - m_q;
      3'd3:    exp_x = sc[1] - m_q;
      default: exp_x = m_old - m_q;
    endcase
  end

  always_ff @(posedge clk) begin
    if (q_we) q_buf[q_addr[$clog2(D)-1:0]] <= q_data;
  end

  // SA-2 / O updating, one element per cycle; o_live makes init a one-cycle
  // clear without touching the memory

  logic signed [63:0] o_scaled;
  logic signed [47:0] pv0, pv1;
  always_comb begin
    o_rd     = o_live[ctl.d[$clog2(D)-1:0]] ? o_mem[ctl.d[$clog2(D)-1:0]] : 48'sd0;
    o_scaled = (64'(o_rd) * $signed({48'd0, alpha})) >>> 15;
    pv0      = 48'($signed({1'b0, p_q[0]}) * v_d[0]);
    pv1      = 48'($signed({1'b0, p_q[1]}) * v_d[1]);
  end

  always_ff @(posedge clk) begin
    if (ctl.phase == SF_SA2) o_mem[ctl.d[$clog2(D)-1:0]] <= 48'(o_scaled) + pv0 + pv1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_acc[0] <= '0; s_acc[1] <= '0;
      m_q <= '0; m_old <= '0; m_vld <= 1'b0; m_vld_old <= 1'b0;
      p_q[0] <= '0; p_q[1] <= '0; alpha <= 16'h8000; l_q <= '0;
      o_live <= '0;
      o_valid <= 1'b0; o_data <= '0; upd_evt <= 1'b0; fix_evt <= 1'b0;
    end else begin
      o_valid <= 1'b0;
      upd_evt <= 1'b0;
      fix_evt <= 1'b0;
      if (ctl.init) begin
        m_vld <= 1'b0;
        l_q   <= '0;
        o_live <= '0;
      end
      unique case (ctl.phase)
        SF_SA1: begin
          for (int j = 0; j < 2; j++) begin
            logic signed [39:0] prod;
            prod = 40'(q_buf[ctl.d[$clog2(D)-1:0]] * k_d[j]);
            s_acc[j] <= (ctl.first ? 40'sd0 : s_acc[j]) + prod;
          end
        end
        SF_AP: begin
          unique case (ctl.ap_step)
            3'd0, 3'd1: begin
              logic jj;
              jj = ctl.ap_step[0];
              if (ctl.ap_step == 3'd0) begin
                m_old     <= m_q;
                m_vld_old <= m_vld;
              end
              if (sel[jj] && (!m_vld || sc[jj] > m_q)) begin
                m_q   <= sc[jj];
                m_vld <= 1'b1;
                if (m_vld) begin
                  if (ctl.mode == AP_MAXUPD) upd_evt <= 1'b1;
                  else                       fix_evt <= 1'b1;
                end
              end
            end
            3'd2: p_q[0] <= sel[0] ? exp_p : 16'd0;
            3'd3: p_q[1] <= sel[1] ? exp_p : 16'd0;
            default: begin
              logic [15:0] a;
              a = (m_vld_old && m_old != m_q) ? exp_p : 16'h8000;
              alpha <= a;
              l_q   <= 32'((64'(l_q) * 64'(a)) >> 15) + 32'(p_q[0]) + 32'(p_q[1]);
            end
          endcase
        end
        SF_SA2: begin
          o_live[ctl.d[$clog2(D)-1:0]] <= 1'b1;
        end
        SF_DIV: begin
          if (div_done) begin
            o_valid <= 1'b1;
            o_data  <= div_quo;
          end
        end
        default: ;
      endcase
    end
  end
endmodule
