// seq_div: sequential signed-by-unsigned divider (restoring, one quotient
// bit per clock), used as the DIV unit of an SU-FA line for O = o / l.
//
// start loads num (signed) and den (unsigned); DW+1 cycles later done pulses
// and quo holds trunc(num / den), saturated to 16 bits. den = 0 gives 0.
module seq_div #(
  parameter int unsigned DW = 48,
  parameter int unsigned LW = 32
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic signed [DW-1:0] num,
  input  logic [LW-1:0]        den,
  output logic                 done,
  output logic signed [15:0]   quo
);
  logic [DW-1:0]   q, n_abs;
  logic [LW-1:0]   rem;
  logic [LW-1:0]   den_q;
  logic            neg, busy;
  logic [$clog2(DW+1)-1:0] cnt;
  logic [LW:0]     trial;
  logic signed [DW:0] sq;

  always_comb begin
    trial = {rem, q[DW-1]} - {1'b0, den_q};
    n_abs = num[DW-1] ? DW'(-num) : DW'(num);
    sq    = neg ? -$signed({1'b0, q}) : $signed({1'b0, q});
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q <= '0; rem <= '0; den_q <= '0; neg <= 1'b0; busy <= 1'b0;
      cnt <= '0; done <= 1'b0; quo <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        q     <= n_abs;
        rem   <= '0;
        den_q <= den;
        neg   <= num[DW-1];
        busy  <= 1'b1;
        cnt   <= ($clog2(DW+1))'(DW);
      end else if (busy) begin
        if (cnt == '0) begin
          busy <= 1'b0;
          done <= 1'b1;
          if (den_q == '0)                 quo <= '0;
          else if (sq > (DW+1)'(32767))    quo <= 16'sd32767;
          else if (sq < -(DW+1)'(32768))   quo <= -16'sd32768;
          else                             quo <= sq[15:0];
        end else begin
          cnt <= cnt - 1'b1;
          if (!trial[LW]) begin
            rem <= trial[LW-1:0];
            q   <= {q[DW-2:0], 1'b1};
          end else begin
            rem <= {rem[LW-2:0], q[DW-1]};
            q   <= {q[DW-2:0], 1'b0};
          end
        end
      end
    end
  end
endmodule
