// sads_line: one line of the iterative SADS top-k engine (paper Sec. III-B,
// IV-C, Fig. 13). It finds the four largest predicted scores of one
// sub-segment of one attention row.
//
// Each round takes NEW = 12 new scores, joins them with the four survivors
// held in the output buffer, and sends the 16 candidates through the
// 16-to-4 bitonic core; the four winners go back to the output buffer. A
// sub-segment of L scores therefore takes ceil(L/12) rounds, one per clock.
// Before a score reaches the core, the clipping stage compares it with the
// threshold of the threshold updating unit (TU): max(top margin, low bound),
// with top margin = Max - r (r = search radius) and low bound = the current
// minimum of the output buffer. A score below the threshold is blocked: it is
// replaced by zero (and marked invalid, so that it cannot win). Clipping is
// off in the first round of a sub-segment, as in the paper, and the low bound
// only applies once the buffer holds four valid entries (this design's
// choice). Indices travel with the scores (index reordering) as positions
// inside the sub-segment; index rescaling adds base_idx to produce global key
// indices at the output.
// Timing: start (one cycle) clears the buffer; chunks follow with in_valid,
// in_last on the final one; done pulses one cycle after the final chunk with
// top[] valid (top[0] >= top[1] >= top[2], top[3]; top[2]/top[3] unordered).
module sads_line
  import sofa_pkg::*;
#(
  parameter int unsigned NEW = 12
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic [IDX_W-1:0]   base_idx,
  input  logic [SCORE_W-1:0] radius,
  input  logic               in_valid,
  input  logic               in_last,
  input  logic [NEW-1:0]     in_mask,          // lanes holding a score
  input  logic [SCORE_W-1:0] in_val [NEW],
  output logic               done,
  output cand_t              top [4],
  output logic [15:0]        clipped           // scores blocked so far
);
  cand_t               buf_q [4];     // output buffer
  logic                clip_on;
  logic [IDX_W-1:0]    chunk_base;    // local index of lane 0
  logic [IDX_W-1:0]    base_q;
  cand_t               cin  [16];
  cand_t               cout [4];
  logic signed [SCORE_W:0] thr, margin, lowb;
  logic                lowb_ok;
  logic [4:0]          nblk;

  // threshold updating unit
  always_comb begin
    cand_t mn;
    mn      = cand_ge(buf_q[2], buf_q[3]) ? buf_q[3] : buf_q[2];
    lowb_ok = buf_q[0].valid && buf_q[1].valid && buf_q[2].valid && buf_q[3].valid;
    margin  = (SCORE_W+1)'($signed(buf_q[0].val)) - (SCORE_W+1)'($signed({1'b0, radius}));
    lowb    = (SCORE_W+1)'($signed(mn.val));
    thr     = (lowb_ok && lowb > margin) ? lowb : margin;
  end

  // clipping
  always_comb begin
    nblk = '0;
    for (int i = 0; i < NEW; i++) begin
      logic pass;
      pass = in_mask[i] &&
             (!clip_on || !buf_q[0].valid ||
              (SCORE_W+1)'($signed(in_val[i])) >= thr);
      cin[i].valid = pass;
      cin[i].val   = pass ? in_val[i] : '0;
      cin[i].idx   = chunk_base + IDX_W'(i);
      if (in_mask[i] && !pass) nblk = nblk + 1'b1;
    end
    for (int i = 0; i < 4; i++) cin[NEW+i] = buf_q[i];
  end

  sort16to4 u_sort (.in(cin), .out(cout));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < 4; i++) buf_q[i] <= '0;
      clip_on    <= 1'b0;
      chunk_base <= '0;
      base_q     <= '0;
      done       <= 1'b0;
      clipped    <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        for (int i = 0; i < 4; i++) buf_q[i] <= '0;
        clip_on    <= 1'b0;
        chunk_base <= '0;
        base_q     <= base_idx;
      end else if (in_valid) begin
        for (int i = 0; i < 4; i++) buf_q[i] <= cout[i];
        clip_on    <= 1'b1;
        chunk_base <= chunk_base + IDX_W'(NEW);
        clipped    <= clipped + 16'(nblk);
        done       <= in_last;
      end
    end
  end

  // index rescaling
  always_comb begin
    for (int i = 0; i < 4; i++) begin
      top[i]     = buf_q[i];
      top[i].idx = buf_q[i].idx + base_q;
    end
  end
endmodule
