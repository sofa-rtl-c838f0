// rass_scheduler: reuse-aware schedule scheme (RASS) scheduler (paper
// Sec. IV-D, Fig. 15): ID buffer indexed by a query bitmask, FSM controller
// and issuing FIFO.
//
// Fill: after start, one key per cycle arrives with the bitmask of the query
// groups that selected it (bit q = query group q needs the key). The key ID
// (its arrival number) is written into the single-port ID buffer under that
// mask, e.g. keys 5 and 6 wanted only by q3 go to buffer-1000. Keys nobody
// selected are dropped. fill_last marks the final key.
// Schedule: the FSM builds execution phases greedily. Inside a phase it
// repeatedly picks the stored mask with the most queries that does not
// overlap the queries already served in this phase (ties: the smaller mask
// value), and issues all IDs of that mask. When no such mask is left, a new
// phase starts. This reproduces the paper's example (phase 0 = {2,3} from
// 0111 and {5,6} from 1000). The tie rule and the exact greedy order are this
// design's reading of "such greedy search continues until all queries are
// allocated adequate Ks".
// Output: a valid/ready stream of IDs; phase_first marks the first ID of each
// phase; done pulses after the last ID has left the FIFO. The buffer is read
// one ID per cycle, so issue runs at up to one ID per clock.
module rass_scheduler #(
  parameter int unsigned NQ   = 4,     // query groups in the bitmask
  parameter int unsigned NK   = 128,   // keys per scheduling window
  parameter int unsigned FIFO = 8      // issuing FIFO depth
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  start,
  input  logic                  key_valid,
  input  logic [NQ-1:0]         key_mask,
  input  logic                  fill_last,
  output logic                  out_valid,
  input  logic                  out_ready,
  output logic [$clog2(NK)-1:0] out_id,
  output logic                  out_phase_first,
  output logic                  done,
  output logic [15:0]           phases
);
  localparam int unsigned NM  = 1 << NQ;
  localparam int unsigned IDW = $clog2(NK);
  localparam int unsigned FW  = $clog2(FIFO);

  typedef enum logic [2:0] {S_IDLE, S_FILL, S_PICK, S_READ, S_DRAIN} state_e;
  state_e state;

  // ID buffer: single port, address {mask, slot}
  logic [IDW-1:0]      idbuf [NM*NK];
  logic                buf_rd_en, buf_we;
  logic [$clog2(NM*NK)-1:0] buf_addr;
  logic [IDW-1:0]      buf_wdata, buf_rdata;

  logic [IDW:0]        cnt [NM];
  logic [NM-1:0]       sched;
  logic [NQ-1:0]       covered, cur;
  logic [IDW:0]        slot;
  logic [IDW-1:0]      key_cnt;
  logic                new_phase, rd_pend, rd_first;

  // issuing FIFO
  logic [IDW:0]        fifo_d [FIFO];
  logic [FW:0]         fifo_n;
  logic [FW-1:0]       fifo_rp, fifo_wp;
  logic                push, pop;

  always_ff @(posedge clk) begin
    if (buf_we)         idbuf[buf_addr] <= buf_wdata;
    else if (buf_rd_en) buf_rdata <= idbuf[buf_addr];
  end

  // best mask
  logic [NQ-1:0] best;
  logic          found, remain;
  always_comb begin
    int bp;
    best = '0; found = 1'b0; remain = 1'b0; bp = -1;
    for (int m = 1; m < NM; m++) begin
      if (cnt[m] != '0 && !sched[m]) begin
        remain = 1'b1;
        if ((NQ'(m) & covered) == '0 && $countones(NQ'(m)) > bp) begin
          bp    = $countones(NQ'(m));
          best  = NQ'(m);
          found = 1'b1;
        end
      end
    end
  end

  assign pop  = out_valid && out_ready;
  assign push = rd_pend;

  always_comb begin
    buf_we    = (state == S_FILL) && key_valid && (key_mask != '0);
    buf_rd_en = (state == S_READ) && (slot != cnt[cur]) && (fifo_n + FW'(rd_pend) < (FW+1)'(FIFO));
    buf_addr  = buf_we ? {key_mask, cnt[key_mask][IDW-1:0]} : {cur, slot[IDW-1:0]};
    buf_wdata = key_cnt;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; sched <= '0; covered <= '0; cur <= '0; slot <= '0;
      key_cnt <= '0; new_phase <= 1'b0; rd_pend <= 1'b0; rd_first <= 1'b0;
      done <= 1'b0; phases <= '0;
      for (int m = 0; m < NM; m++) cnt[m] <= '0;
    end else begin
      done    <= 1'b0;
      rd_pend <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          state   <= S_FILL;
          key_cnt <= '0;
          sched   <= '0;
          phases  <= '0;
          for (int m = 0; m < NM; m++) cnt[m] <= '0;
        end
        S_FILL: if (key_valid) begin
          if (key_mask != '0) cnt[key_mask] <= cnt[key_mask] + 1'b1;
          key_cnt <= key_cnt + 1'b1;
          if (fill_last) begin
            state     <= S_PICK;
            covered   <= '0;
            new_phase <= 1'b1;
          end
        end
        S_PICK: begin
          if (found) begin
            cur     <= best;
            covered <= covered | best;
            sched   <= sched | (NM'(1) << best);
            slot    <= '0;
            state   <= S_READ;
            if (new_phase) phases <= phases + 1'b1;
          end else if (remain) begin
            covered   <= '0;
            new_phase <= 1'b1;
          end else begin
            state <= S_DRAIN;
          end
        end
        S_READ: begin
          if (buf_rd_en) begin
            slot      <= slot + 1'b1;
            rd_pend   <= 1'b1;
            rd_first  <= new_phase;
            new_phase <= 1'b0;
          end else if (slot == cnt[cur]) begin
            state <= S_PICK;
          end
        end
        S_DRAIN: if (fifo_n == '0 && !rd_pend) begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fifo_n <= '0; fifo_rp <= '0; fifo_wp <= '0;
    end else begin
      if (push) begin
        fifo_d[fifo_wp] <= {rd_first, buf_rdata};
        fifo_wp <= fifo_wp + 1'b1;
      end
      if (pop) fifo_rp <= fifo_rp + 1'b1;
      fifo_n <= fifo_n + (FW+1)'(push) - (FW+1)'(pop);
    end
  end

  assign out_valid       = (fifo_n != '0);
  assign out_id          = fifo_d[fifo_rp][IDW-1:0];
  assign out_phase_first = fifo_d[fifo_rp][IDW];

  // the FIFO never overflows: reads are only issued when a slot is free
  always_ff @(posedge clk) begin
    if (push && !pop) assert (fifo_n < (FW+1)'(FIFO));
  end
endmodule
