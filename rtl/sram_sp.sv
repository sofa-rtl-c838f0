// sram_sp: single-port on-chip SRAM buffer, written as an array. The design
// uses three: the token SRAM (192 KB), the weight SRAM (96 KB) and the temp
// SRAM (28 KB), all with 2048-bit words (the word width is this design's
// choice: one word holds one element of 128 rows, which is what the
// 128-wide engines consume per cycle).
// One access per cycle: a write when we = 1, otherwise a read whose data
// appears on rdata in the next cycle.
module sram_sp #(
  parameter int unsigned DATA_W = 2048,
  parameter int unsigned DEPTH  = 768
) (
  input  logic                     clk,
  input  logic                     en,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] addr,
  input  logic [DATA_W-1:0]        wdata,
  output logic [DATA_W-1:0]        rdata
);
  logic [DATA_W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (en) begin
      if (we) mem[addr] <= wdata;
      else    rdata     <= mem[addr];
    end
  end
endmodule
