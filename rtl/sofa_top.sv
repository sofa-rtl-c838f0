// sofa_top: the SOFA accelerator top level (paper Fig. 11).
//
// What it does: runs one tile of sparse attention for one head. X^T, Q^T,
// W_k|W_v and the pre-converted W_k leading-zero codes are read from the
// external DRAM, keys are predicted with the DLZS shift array, the top-4 keys
// of every query are picked by the SADS sorters, the RASS scheduler orders the
// selected keys, the KV PE array generates exact K and V for them only, and
// SU-FA computes softmax(QK^T)V over the selected keys. O leaves through a DRAM
// write port, one word of T 16-bit values per head dimension.
//
// How it works: sofa_ctrl sequences all blocks. Three single-port SRAMs hold
// the on-chip data (2048-bit words):
//   token SRAM   words 0..H-1 = X^T rows (T tokens x 16 b),
//                words H..H+D-1 = Q^T rows (T queries x 16 b)
//   weight SRAM  words 0..H-1 = W_k|W_v rows (D + D outputs x 16 b),
//                words H..H+H/8-1 = W_k codes, 8 rows of H per word,
//                D codes x 4 b per row
//   temp SRAM    word d = K-hat column d (NKEY keys x 16 b)
// DRAM layout (in SRAM words of 4 beats each, from dram_in_base): X^T at
// 0..H-1, Q^T at H..H+D-1, W_k|W_v at H+D..2H+D-1, codes after that.
//
// Interface: start/busy/done; a 512-bit DRAM read channel (req/gnt, then
// rvalid beats, any latency, stalls allowed); a 2048-bit DRAM write port
// (wr_valid/wr_addr/wr_data, always accepted); fixed-point shifts and the SADS
// radius as inputs; mechanism counters as outputs.
//
// Paper vs this design: the blocks, their sizes and the order of steps follow
// the paper (128x32 DLZS array, 128 SADS lines with 12 new inputs, 128 SU-FA
// lines, NQ = 4 RASS query groups). The SRAM word layout, the DRAM layout and
// the port shapes are this design's choice. The DRAM is outside the design.
module sofa_top
  import sofa_pkg::*;
#(
  parameter int unsigned T       = 128,  // queries and keys per tile
  parameter int unsigned D       = 64,   // head dimension
  parameter int unsigned DC      = 32,   // DLZS array columns
  parameter int unsigned H       = 256,  // hidden size (input rows)
  parameter int unsigned NQ      = 4,    // RASS query groups
  parameter int unsigned PE_COLS = 4,    // KV PE array columns
  parameter int unsigned AW      = 32,
  parameter int unsigned SAW     = 10
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  input  logic [AW-1:0]       dram_in_base,
  input  logic [AW-1:0]       dram_out_base,
  input  logic [5:0]          kest_shift,
  input  logic [5:0]          aest_shift,
  input  logic [5:0]          kv_shift,
  input  logic [4:0]          s_shift,
  input  logic [SCORE_W-1:0]  radius,
  output logic                busy,
  output logic                done,
  // external DRAM read channel
  output logic                dram_rd_req,
  output logic [AW-1:0]       dram_rd_addr,
  input  logic                dram_rd_gnt,
  input  logic                dram_rd_rvalid,
  input  logic [511:0]        dram_rd_rdata,
  // external DRAM write port
  output logic                dram_wr_valid,
  output logic [AW-1:0]       dram_wr_addr,
  output logic [16*T-1:0]     dram_wr_data,
  // mechanism counters
  output logic [31:0]         stat_eliminated,
  output logic [31:0]         stat_clipped,
  output logic [31:0]         stat_max_upd,
  output logic [31:0]         stat_max_fix,
  output logic [15:0]         stat_phases,
  output logic [15:0]         stat_kv_groups
);
  localparam int unsigned W = 16 * T;   // SRAM word width
  localparam int unsigned NEW = 12;

  // ---------------- controller ----------------
  logic fetch_start, fetch_to_wt, fetch_done, fetch_busy;
  logic [AW-1:0] fetch_dram_base;
  logic [SAW-1:0] fetch_sram_base, fetch_nwords;
  logic tok_rd, wt_rd, tmp_rd, tmp_we;
  logic [SAW-1:0] tok_addr, wt_addr, tmp_addr;
  logic [7:0] tmp_wcol, kpass, kseg, sads_chunk, sf_q_addr;
  logic dlzs_clear, dlzs_valid, dlzs_busy;
  dlzs_phase_e dlzs_phase;
  logic [2:0] lz_sub;
  logic sads_start, sads_valid, sads_last, sads_done;
  logic [IDX_W-1:0] sads_base;
  cand_t sads_top [T][4];
  logic rass_start, rass_key_valid, rass_fill_last, rass_out_valid, rass_out_ready;
  logic rass_out_first, rass_done;
  logic [NQ-1:0] rass_key_mask;
  logic [$clog2(T)-1:0] rass_out_id;
  logic pe_clear, pe_valid;
  logic [$clog2(T)-1:0] pe_key [PE_COLS];
  logic sf_q_we, sf_init, sf_pair_valid, sf_pair_hi, sf_pair_ready;
  logic sf_fin_start, sf_fin_done;
  ap_mode_e sf_pair_mode;
  logic [1:0] sf_sel [T];

  sofa_ctrl #(.T(T), .D(D), .DC(DC), .H(H), .NQ(NQ), .PE_COLS(PE_COLS),
              .SAW(SAW), .AW(AW)) u_ctrl (
    .clk, .rst_n, .start, .dram_in_base, .busy, .done,
    .fetch_start, .fetch_to_wt, .fetch_dram_base, .fetch_sram_base,
    .fetch_nwords, .fetch_done,
    .tok_rd, .tok_addr, .wt_rd, .wt_addr, .tmp_rd, .tmp_we, .tmp_addr, .tmp_wcol,
    .dlzs_clear, .dlzs_phase, .dlzs_valid, .lz_sub, .kpass, .kseg, .dlzs_busy,
    .sads_start, .sads_base, .sads_valid, .sads_last, .sads_chunk, .sads_done,
    .sads_top,
    .rass_start, .rass_key_valid, .rass_key_mask, .rass_fill_last,
    .rass_out_valid, .rass_out_ready, .rass_out_id, .rass_out_first, .rass_done,
    .pe_clear, .pe_valid, .pe_key,
    .sf_q_we, .sf_q_addr, .sf_init, .sf_pair_valid, .sf_pair_mode, .sf_pair_hi,
    .sf_sel, .sf_pair_ready, .sf_fin_start, .sf_fin_done,
    .kv_groups(stat_kv_groups)
  );

  // ---------------- data fetcher and SRAMs ----------------
  logic fsram_we;
  logic [SAW-1:0] fsram_addr;
  logic [W-1:0] fsram_wdata;

  data_fetcher #(.DRAM_W(512), .SRAM_W(W), .AW(AW), .SAW(SAW)) u_fetch (
    .clk, .rst_n, .start(fetch_start), .dram_base(fetch_dram_base),
    .sram_base(fetch_sram_base), .nwords(fetch_nwords), .busy(fetch_busy),
    .done(fetch_done),
    .rd_req(dram_rd_req), .rd_addr(dram_rd_addr), .rd_gnt(dram_rd_gnt),
    .rd_rvalid(dram_rd_rvalid), .rd_rdata(dram_rd_rdata),
    .sram_we(fsram_we), .sram_addr(fsram_addr), .sram_wdata(fsram_wdata)
  );

  localparam int unsigned TOK_DEPTH = H + D;
  localparam int unsigned WT_DEPTH  = H + H / 8;
  localparam int unsigned TMP_DEPTH = D;

  logic [W-1:0] tok_rdata, wt_rdata, tmp_rdata, tmp_wdata;
  logic tok_we, wt_we;
  assign tok_we = fsram_we && !fetch_to_wt;
  assign wt_we  = fsram_we &&  fetch_to_wt;

  sram_sp #(.DATA_W(W), .DEPTH(TOK_DEPTH)) u_tok (
    .clk, .en(tok_we || tok_rd), .we(tok_we),
    .addr($clog2(TOK_DEPTH)'(tok_we ? fsram_addr : tok_addr)),
    .wdata(fsram_wdata), .rdata(tok_rdata)
  );
  sram_sp #(.DATA_W(W), .DEPTH(WT_DEPTH)) u_wt (
    .clk, .en(wt_we || wt_rd), .we(wt_we),
    .addr($clog2(WT_DEPTH)'(wt_we ? fsram_addr : wt_addr)),
    .wdata(fsram_wdata), .rdata(wt_rdata)
  );
  sram_sp #(.DATA_W(W), .DEPTH(TMP_DEPTH)) u_tmp (
    .clk, .en(tmp_we || tmp_rd), .we(tmp_we),
    .addr($clog2(TMP_DEPTH)'(tmp_addr)),
    .wdata(tmp_wdata), .rdata(tmp_rdata)
  );

  // ---------------- DLZS ----------------
  logic [15:0] row_data [T];
  logic [15:0] col_data [DC];
  logic signed [15:0] dres [T][DC];

  for (genvar r = 0; r < T; r++) begin : g_row
    assign row_data[r] = tok_rdata[r*16 +: 16];
    assign tmp_wdata[r*16 +: 16] = dres[r][tmp_wcol];
  end
  for (genvar c = 0; c < DC; c++) begin : g_col
    logic [D*4-1:0] lzrow;
    assign lzrow = wt_rdata[lz_sub*(D*4) +: D*4];
    assign col_data[c] = (dlzs_phase == PH_KEST)
                         ? {12'b0, lzrow[(kpass*DC + c)*4 +: 4]}
                         : tmp_rdata[(kseg*DC + c)*16 +: 16];
  end

  dlzs_unit #(.ROWS(T), .COLS(DC)) u_dlzs (
    .clk, .rst_n, .clear(dlzs_clear), .phase(dlzs_phase), .in_valid(dlzs_valid),
    .row_data, .col_data,
    .out_shift(dlzs_phase == PH_KEST ? kest_shift : aest_shift),
    .busy(dlzs_busy), .result(dres), .eliminated(stat_eliminated)
  );

  // ---------------- SADS ----------------
  logic [SCORE_W-1:0] sads_in [T][NEW];
  logic [NEW-1:0] sads_mask;
  for (genvar j = 0; j < NEW; j++) begin : g_smask
    assign sads_mask[j] = (sads_chunk * NEW + j) < DC;
  end
  for (genvar l = 0; l < T; l++) begin : g_sin
    for (genvar j = 0; j < NEW; j++) begin : g_j
      assign sads_in[l][j] = dres[l][(sads_chunk * NEW + j) % DC];
    end
  end

  sads_unit #(.LINES(T), .NEW(NEW)) u_sads (
    .clk, .rst_n, .start(sads_start), .base_idx(sads_base), .radius,
    .in_valid(sads_valid), .in_last(sads_last), .in_mask(sads_mask),
    .in_val(sads_in), .done(sads_done), .top(sads_top),
    .clipped_total(stat_clipped)
  );

  // ---------------- RASS ----------------
  rass_scheduler #(.NQ(NQ), .NK(T), .FIFO(8)) u_rass (
    .clk, .rst_n, .start(rass_start), .key_valid(rass_key_valid),
    .key_mask(rass_key_mask), .fill_last(rass_fill_last),
    .out_valid(rass_out_valid), .out_ready(rass_out_ready), .out_id(rass_out_id),
    .out_phase_first(rass_out_first), .done(rass_done), .phases(stat_phases)
  );

  // ---------------- KV PE array ----------------
  logic signed [15:0] x_col [PE_COLS];
  logic signed [15:0] w_row [2*D];
  logic signed [15:0] kvres [2*D][PE_COLS];
  for (genvar c = 0; c < PE_COLS; c++) begin : g_xcol
    assign x_col[c] = tok_rdata[pe_key[c]*16 +: 16];
  end
  for (genvar r = 0; r < 2*D; r++) begin : g_wrow
    assign w_row[r] = wt_rdata[r*16 +: 16];
  end

  kv_pe_array #(.ROWS(2*D), .COLS(PE_COLS)) u_kv (
    .clk, .rst_n, .clear(pe_clear), .in_valid(pe_valid), .x_col, .w_row,
    .out_shift(kv_shift), .result(kvres)
  );

  // ---------------- SU-FA ----------------
  logic signed [15:0] q_data [T];
  logic signed [15:0] k_in [2][D];
  logic signed [15:0] v_in [2][D];
  logic signed [15:0] o_data [T];
  logic o_valid;
  logic [7:0] o_d;
  for (genvar l = 0; l < T; l++) begin : g_q
    assign q_data[l] = tok_rdata[l*16 +: 16];
    assign dram_wr_data[l*16 +: 16] = o_data[l];
  end
  for (genvar j = 0; j < 2; j++) begin : g_kv
    for (genvar d = 0; d < D; d++) begin : g_d
      assign k_in[j][d] = kvres[d][sf_pair_hi ? 2 + j : j];
      assign v_in[j][d] = kvres[D + d][sf_pair_hi ? 2 + j : j];
    end
  end

  sufa_unit #(.LINES(T), .D(D)) u_sufa (
    .clk, .rst_n, .s_shift, .q_we(sf_q_we), .q_addr(sf_q_addr), .q_data,
    .init(sf_init), .pair_valid(sf_pair_valid), .pair_ready(sf_pair_ready),
    .pair_mode(sf_pair_mode), .sel(sf_sel), .k_in, .v_in,
    .fin_start(sf_fin_start), .o_valid, .o_d, .o_data, .fin_done(sf_fin_done),
    .upd_count(stat_max_upd), .fix_count(stat_max_fix)
  );

  assign dram_wr_valid = o_valid;
  assign dram_wr_addr  = dram_out_base + AW'(o_d);

endmodule
