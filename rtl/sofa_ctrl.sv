// sofa_ctrl: the tiled and out-of-order computation controller of SOFA
// (paper Sec. IV-A, steps 1-8 of Fig. 11).
//
// One run processes one tile: T queries against NKEY keys of one head.
// The controller steps through:
//   LOADT/LOADW  the data fetcher copies X^T and Q^T into the token SRAM and
//                W_k|W_v and the pre-converted W_k LZ codes into the weight
//                SRAM (step 1);
//   LOADQ        Q columns go from the token SRAM into the SU-FA line buffers;
//   KEST         DLZS key prediction, D/DC passes of H steps; each pass ends
//                with DC write-backs of K-hat columns into the temp SRAM
//                (step 2);
//   AEST + SADS  for each sub-segment of DC keys: DLZS attention prediction
//                over D steps, then ceil(DC/12) SADS rounds; the top-4 keys of
//                every query row are set in the top-k mask (steps 3-4);
//   RFILL        the mask, folded into NQ query groups, fills the RASS ID
//                buffer (step 5);
//   KV loop      up to PE_COLS keys popped from the issuing FIFO are
//                generated by the KV PE array over H steps (step 6) and fed
//                to SU-FA as pairs (step 7); the first pair of each RASS phase
//                runs the AP in max-update mode, the others in computation
//                mode;
//   FIN          SU-FA divides and the O columns go to DRAM (step 8).
// SRAM reads have one cycle of latency, so every streamed step is issued as
// a read and presented to the engine one cycle later (the *_v outputs).
// The order of steps follows the paper; the state sequence, the mask folding
// into query groups and the choice of AP mode are this design's own.
module sofa_ctrl
  import sofa_pkg::*;
#(
  parameter int unsigned T       = 128,
  parameter int unsigned D       = 64,
  parameter int unsigned DC      = 32,
  parameter int unsigned H       = 256,
  parameter int unsigned NQ      = 4,
  parameter int unsigned PE_COLS = 4,
  parameter int unsigned SAW     = 10,
  parameter int unsigned AW      = 32
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic [AW-1:0]      dram_in_base,
  output logic               busy,
  output logic               done,
  // data fetcher
  output logic               fetch_start,
  output logic               fetch_to_wt,     // 0: token SRAM, 1: weight SRAM
  output logic [AW-1:0]      fetch_dram_base,
  output logic [SAW-1:0]     fetch_sram_base,
  output logic [SAW-1:0]     fetch_nwords,
  input  logic               fetch_done,
  // SRAM read ports
  output logic               tok_rd,
  output logic [SAW-1:0]     tok_addr,
  output logic               wt_rd,
  output logic [SAW-1:0]     wt_addr,
  output logic               tmp_rd,
  output logic               tmp_we,
  output logic [SAW-1:0]     tmp_addr,
  output logic [7:0]         tmp_wcol,        // K-hat column written back
  // DLZS
  output logic               dlzs_clear,
  output dlzs_phase_e        dlzs_phase,
  output logic               dlzs_valid,
  output logic [2:0]         lz_sub,          // row of the packed LZ word
  output logic [7:0]         kpass,           // K-hat column block
  output logic [7:0]         kseg,            // key sub-segment in AEST
  input  logic               dlzs_busy,
  // SADS
  output logic               sads_start,
  output logic [IDX_W-1:0]   sads_base,
  output logic               sads_valid,
  output logic               sads_last,
  output logic [7:0]         sads_chunk,
  input  logic               sads_done,
  input  cand_t              sads_top [T][4],
  // RASS
  output logic               rass_start,
  output logic               rass_key_valid,
  output logic [NQ-1:0]      rass_key_mask,
  output logic               rass_fill_last,
  input  logic               rass_out_valid,
  output logic               rass_out_ready,
  input  logic [$clog2(T)-1:0] rass_out_id,
  input  logic               rass_out_first,
  input  logic               rass_done,
  // KV PE array
  output logic               pe_clear,
  output logic               pe_valid,
  output logic [$clog2(T)-1:0] pe_key [PE_COLS],
  // SU-FA
  output logic               sf_q_we,
  output logic [7:0]         sf_q_addr,
  output logic               sf_init,
  output logic               sf_pair_valid,
  output ap_mode_e           sf_pair_mode,
  output logic               sf_pair_hi,      // pair uses PE columns 2,3
  output logic [1:0]         sf_sel [T],
  input  logic               sf_pair_ready,
  output logic               sf_fin_start,
  input  logic               sf_fin_done,
  // statistics
  output logic [15:0]        kv_groups
);
  localparam int unsigned NKEY   = T;
  localparam int unsigned NSEG   = NKEY / DC;
  localparam int unsigned NPASS  = D / DC;
  localparam int unsigned NCHUNK = (DC + 11) / 12;
  localparam int unsigned GRP    = T / NQ;
  localparam int unsigned KW     = $clog2(T);

  typedef enum logic [4:0] {
    S_IDLE, S_LOADT, S_LOADW, S_LOADQ, S_KEST, S_KDRAIN, S_KWB,
    S_AEST, S_ADRAIN, S_SADS, S_SWAIT, S_RFILL, S_KVPOP, S_KVGEN,
    S_KVDRAIN, S_PAIR, S_PWAIT, S_FIN, S_FWAIT, S_DONE
  } state_e;
  state_e state;

  logic [T-1:0][NKEY-1:0] mask;         // mask[query][key]: top-k mask
  logic [NKEY-1:0]    seg_bits [T];     // keys picked in the current sub-segment
  logic [15:0]        step;
  logic [7:0]         pass, seg, chunk;
  logic               rd_v;             // read issued last cycle
  logic [2:0]         lz_sub_q;
  logic [KW-1:0]      keys [PE_COLS];
  logic [PE_COLS-1:0] key_ok;
  logic [$clog2(PE_COLS+1)-1:0] nkeys;
  logic               rass_fin, first_pair, grp_first, pair_hi;
  logic [3:0]         wait_c;

  assign busy = (state != S_IDLE);
  assign pe_key = keys;

  // group mask of key step for the RASS fill
  logic [T-1:0] key_col;
  logic [KW-1:0] key_sel [2];
  for (genvar q = 0; q < T; q++) begin : g_q
    logic [DC-1:0] dec;
    assign key_col[q] = mask[q][step[KW-1:0]];
    // selection bits of the current pair
    assign sf_sel[q][0] = key_ok[pair_hi ? 2 : 0] && mask[q][key_sel[0]];
    assign sf_sel[q][1] = key_ok[pair_hi ? 3 : 1] && mask[q][key_sel[1]];
    // top-4 local indices of the query row, decoded into key bits
    always_comb begin
      dec = '0;
      for (int j = 0; j < 4; j++)
        if (sads_top[q][j].valid)
          dec[$clog2(DC)'(sads_top[q][j].idx - sads_base)] = 1'b1;
    end
    assign seg_bits[q] = NKEY'(dec) << (seg * DC);
  end
  assign key_sel[0] = pair_hi ? keys[2] : keys[0];
  assign key_sel[1] = pair_hi ? keys[3] : keys[1];
  for (genvar g = 0; g < NQ; g++) begin : g_grp
    assign rass_key_mask[g] = |key_col[g*GRP +: GRP];
  end

  always_comb begin
    tok_rd = 1'b0; tok_addr = '0; wt_rd = 1'b0; wt_addr = '0;
    tmp_rd = 1'b0; tmp_addr = '0; tmp_we = 1'b0;
    unique case (state)
      S_LOADQ: begin tok_rd = (step < 16'(D)); tok_addr = SAW'(H) + SAW'(step); end
      S_KEST: begin
        tok_rd = 1'b1; tok_addr = SAW'(step);
        wt_rd  = 1'b1; wt_addr  = SAW'(H) + SAW'(step >> 3);
      end
      S_KWB: begin tmp_we = 1'b1; tmp_addr = SAW'(pass) * SAW'(DC) + SAW'(step); end
      S_AEST: begin
        tok_rd = 1'b1; tok_addr = SAW'(H) + SAW'(step);
        tmp_rd = 1'b1; tmp_addr = SAW'(step);
      end
      S_KVGEN: begin
        tok_rd = 1'b1; tok_addr = SAW'(step);
        wt_rd  = 1'b1; wt_addr  = SAW'(step);
      end
      default: ;
    endcase
  end
  assign tmp_wcol = 8'(step);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; step <= '0; pass <= '0; seg <= '0; chunk <= '0;
      rd_v <= 1'b0; lz_sub_q <= '0; done <= 1'b0;
      fetch_start <= 1'b0; fetch_to_wt <= 1'b0; fetch_dram_base <= '0;
      fetch_sram_base <= '0; fetch_nwords <= '0;
      dlzs_clear <= 1'b0; dlzs_phase <= PH_KEST;
      sads_start <= 1'b0; sads_base <= '0; sads_valid <= 1'b0; sads_last <= 1'b0;
      rass_start <= 1'b0; rass_key_valid <= 1'b0; rass_fill_last <= 1'b0;
      pe_clear <= 1'b0; sf_q_we <= 1'b0; sf_q_addr <= '0; sf_init <= 1'b0;
      sf_pair_valid <= 1'b0; sf_pair_mode <= AP_COMPUTE; sf_fin_start <= 1'b0;
      nkeys <= '0; key_ok <= '0; rass_fin <= 1'b0; first_pair <= 1'b0;
      grp_first <= 1'b0; pair_hi <= 1'b0; wait_c <= '0; kv_groups <= '0;
      for (int c = 0; c < PE_COLS; c++) keys[c] <= '0;
    end else begin
      done <= 1'b0; fetch_start <= 1'b0; dlzs_clear <= 1'b0; sads_start <= 1'b0;
      sads_valid <= 1'b0; sads_last <= 1'b0; rass_start <= 1'b0;
      rass_key_valid <= 1'b0; rass_fill_last <= 1'b0; pe_clear <= 1'b0;
      sf_q_we <= 1'b0; sf_init <= 1'b0; sf_pair_valid <= 1'b0; sf_fin_start <= 1'b0;
      rd_v <= 1'b0;
      if (rass_done) rass_fin <= 1'b1;
      unique case (state)
        S_IDLE: if (start) begin
          state           <= S_LOADT;
          fetch_start     <= 1'b1;
          fetch_to_wt     <= 1'b0;
          fetch_dram_base <= dram_in_base;
          fetch_sram_base <= '0;
          fetch_nwords    <= SAW'(H + D);
          kv_groups <= '0;
        end
        S_LOADT: if (fetch_done) begin
          state           <= S_LOADW;
          fetch_start     <= 1'b1;
          fetch_to_wt     <= 1'b1;
          fetch_dram_base <= dram_in_base + AW'((H + D) * 4);
          fetch_sram_base <= '0;
          fetch_nwords    <= SAW'(H + H / 8);
        end
        S_LOADW: if (fetch_done) begin
          state <= S_LOADQ;
          step  <= '0;
        end
        S_LOADQ: begin
          // read Q column step, write it to the line buffers a cycle later
          if (step != '0) begin
            sf_q_we   <= 1'b1;
            sf_q_addr <= 8'(step - 1);
          end
          if (step == 16'(D)) begin
            state      <= S_KEST;
            step       <= '0;
            pass       <= '0;
            dlzs_clear <= 1'b1;
            dlzs_phase <= PH_KEST;
            sf_init    <= 1'b1;
          end else begin
            step <= step + 1'b1;
          end
        end
        S_KEST: begin
          rd_v     <= 1'b1;
          lz_sub_q <= step[2:0];
          if (step == 16'(H - 1)) begin
            state <= S_KDRAIN;
            step  <= '0;
          end else step <= step + 1'b1;
        end
        S_KDRAIN: if (!rd_v && !dlzs_busy) begin
          state <= S_KWB;
          step  <= '0;
        end
        S_KWB: begin
          if (step == 16'(DC - 1)) begin
            step <= '0;
            if (pass == 8'(NPASS - 1)) begin
              state      <= S_AEST;
              seg        <= '0;
              dlzs_clear <= 1'b1;
              dlzs_phase <= PH_AEST;
            end else begin
              state      <= S_KEST;
              pass       <= pass + 1'b1;
              dlzs_clear <= 1'b1;
            end
          end else step <= step + 1'b1;
        end
        S_AEST: begin
          rd_v <= 1'b1;
          if (step == 16'(D - 1)) begin
            state <= S_ADRAIN;
            step  <= '0;
          end else step <= step + 1'b1;
        end
        S_ADRAIN: if (!rd_v && !dlzs_busy) begin
          state      <= S_SADS;
          chunk      <= '0;
          sads_start <= 1'b1;
          sads_base  <= IDX_W'(seg) * IDX_W'(DC);
        end
        S_SADS: begin
          sads_valid <= 1'b1;
          sads_last  <= (chunk == 8'(NCHUNK - 1));
          if (chunk == 8'(NCHUNK - 1)) state <= S_SWAIT;
          else chunk <= chunk + 1'b1;
        end
        S_SWAIT: if (sads_done) begin
          if (seg == 8'(NSEG - 1)) begin
            state      <= S_RFILL;
            step       <= '0;
            rass_start <= 1'b1;
          end else begin
            state      <= S_AEST;
            seg        <= seg + 1'b1;
            step       <= '0;
            dlzs_clear <= 1'b1;
          end
        end
        S_RFILL: begin
          rass_key_valid <= 1'b1;
          rass_fill_last <= (step == 16'(NKEY - 1));
          if (step == 16'(NKEY - 1)) begin
            state      <= S_KVPOP;
            step       <= '0;
            nkeys      <= '0;
            key_ok     <= '0;
            rass_fin   <= 1'b0;
            first_pair <= 1'b1;
            grp_first  <= 1'b0;
          end else step <= step + 1'b1;
        end
        S_KVPOP: begin
          if (rass_out_valid && nkeys != ($clog2(PE_COLS+1))'(PE_COLS)) begin
            keys[nkeys]   <= rass_out_id;
            key_ok[nkeys] <= 1'b1;
            nkeys         <= nkeys + 1'b1;
            if (rass_out_first) grp_first <= 1'b1;
          end else if (nkeys == ($clog2(PE_COLS+1))'(PE_COLS) ||
                       (rass_fin && !rass_out_valid && nkeys != '0)) begin
            state     <= S_KVGEN;
            step      <= '0;
            pe_clear  <= 1'b1;
            kv_groups <= kv_groups + 1'b1;
          end else if (rass_fin && !rass_out_valid) begin
            state <= S_FIN;
          end
        end
        S_KVGEN: begin
          rd_v <= 1'b1;
          if (step == 16'(H - 1)) begin
            state  <= S_KVDRAIN;
            wait_c <= '0;
          end else step <= step + 1'b1;
        end
        S_KVDRAIN: begin
          wait_c <= wait_c + 1'b1;
          if (wait_c == 4'd2) begin
            state   <= S_PAIR;
            pair_hi <= 1'b0;
          end
        end
        S_PAIR: if (sf_pair_ready) begin
          sf_pair_valid <= 1'b1;
          sf_pair_mode  <= (first_pair || (grp_first && !pair_hi)) ? AP_MAXUPD : AP_COMPUTE;
          first_pair    <= 1'b0;
          state         <= S_PWAIT;
          wait_c        <= '0;
        end
        S_PWAIT: begin
          wait_c <= wait_c + 1'b1;
          if (wait_c >= 4'd2 && sf_pair_ready) begin
            if (!pair_hi && nkeys > 2) begin
              pair_hi <= 1'b1;
              state   <= S_PAIR;
            end else begin
              pair_hi   <= 1'b0;
              state     <= S_KVPOP;
              nkeys     <= '0;
              key_ok    <= '0;
              grp_first <= 1'b0;
            end
          end
        end
        S_FIN: if (sf_pair_ready) begin
          sf_fin_start <= 1'b1;
          state        <= S_FWAIT;
        end
        S_FWAIT: if (sf_fin_done) begin
          state <= S_DONE;
        end
        S_DONE: begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // top-k mask register: cleared at start, ORed with each sub-segment result
  logic mask_clr, mask_upd;
  assign mask_clr = (state == S_IDLE) && start;
  assign mask_upd = (state == S_SWAIT) && sads_done;
  for (genvar q = 0; q < T; q++) begin : g_mask
    logic [NKEY-1:0] m;
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)        m <= '0;
      else if (mask_clr) m <= '0;
      else if (mask_upd) m <= m | seg_bits[q];
    end
    assign mask[q] = m;
  end

  // engine strobes, one cycle after the SRAM read
  assign dlzs_valid = rd_v && (state == S_KEST || state == S_KDRAIN ||
                               state == S_AEST || state == S_ADRAIN);
  assign pe_valid   = rd_v && (state == S_KVGEN || state == S_KVDRAIN);
  assign lz_sub     = lz_sub_q;
  assign kpass      = pass;
  assign kseg       = seg;
  assign sads_chunk = chunk;
  assign sf_pair_hi = pair_hi;
  assign rass_out_ready = (state == S_KVPOP) && nkeys != ($clog2(PE_COLS+1))'(PE_COLS);
endmodule
