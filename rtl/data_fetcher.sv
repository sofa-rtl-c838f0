// data_fetcher: moves a block of data from external DRAM into an on-chip
// SRAM (paper Sec. IV-A: it "calculates the physical address and fetches data
// to on-chip SRAM").
//
// A command gives the DRAM start address (in DRAM beats), the SRAM start
// word and the number of SRAM words. The fetcher issues one read request per
// beat (addr = dram_base + word*BEATS + beat) with a valid/ready handshake,
// assembles BEATS returned beats (in order, lowest beat in the low bits) into
// one SRAM word and writes it. done pulses when the last word is written.
// The burst format and handshake are this design's choices.
module data_fetcher #(
  parameter int unsigned DRAM_W = 512,
  parameter int unsigned SRAM_W = 2048,
  parameter int unsigned AW     = 32,
  parameter int unsigned SAW    = 10
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [AW-1:0]     dram_base,
  input  logic [SAW-1:0]    sram_base,
  input  logic [SAW-1:0]    nwords,
  output logic              busy,
  output logic              done,
  // DRAM read channel
  output logic              rd_req,
  output logic [AW-1:0]     rd_addr,
  input  logic              rd_gnt,
  input  logic              rd_rvalid,
  input  logic [DRAM_W-1:0] rd_rdata,
  // SRAM write port
  output logic              sram_we,
  output logic [SAW-1:0]    sram_addr,
  output logic [SRAM_W-1:0] sram_wdata
);
  localparam int unsigned BEATS = SRAM_W / DRAM_W;
  localparam int unsigned BW    = (BEATS > 1) ? $clog2(BEATS) : 1;

  logic [AW-1:0]  req_cnt, total;
  logic [SAW-1:0] wr_word;
  logic [BW-1:0]  beat;
  logic [SRAM_W-1:0] shreg;

  assign total   = AW'(nwords) * AW'(BEATS);
  assign rd_req  = busy && (req_cnt != total);
  assign rd_addr = dram_base + req_cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; req_cnt <= '0; wr_word <= '0; beat <= '0;
      shreg <= '0; sram_we <= 1'b0; sram_addr <= '0; sram_wdata <= '0;
    end else begin
      done    <= 1'b0;
      sram_we <= 1'b0;
      if (start && !busy) begin
        busy    <= 1'b1;
        req_cnt <= '0;
        wr_word <= '0;
        beat    <= '0;
      end else if (busy) begin
        if (rd_req && rd_gnt) req_cnt <= req_cnt + 1'b1;
        if (rd_rvalid) begin
          logic [SRAM_W-1:0] nxt;
          nxt = {rd_rdata, shreg[SRAM_W-1:DRAM_W]};
          shreg <= nxt;
          if (beat == BW'(BEATS-1)) begin
            beat       <= '0;
            sram_we    <= 1'b1;
            sram_addr  <= sram_base + wr_word;
            sram_wdata <= nxt;
            wr_word    <= wr_word + 1'b1;
            if (wr_word == nwords - 1'b1) begin
              busy <= 1'b0;
              done <= 1'b1;
            end
          end else begin
            beat <= beat + 1'b1;
          end
        end
      end
    end
  end
endmodule
