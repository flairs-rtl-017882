// div_seq: sequential unsigned restoring divider.
//
// Computes quotient = dividend / divisor and the remainder, one quotient bit
// per clock, so a division takes NW cycles after the start pulse. done pulses
// for one cycle with the result, which then stays on the outputs until the
// next start. A start while busy is ignored. Division by zero gives an
// all-ones quotient; callers test for a zero divisor themselves. This helper
// is shared by the Cosine, Scale and Aggregation PEs for their DIV steps; the
// paper does not say how division is built, so the radix-2 restoring form is
// this design's choice (smallest logic, latency is hidden behind streaming).
module div_seq #(
  parameter int NW = 64,   // dividend and quotient width
  parameter int DW = 64    // divisor and remainder width
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [NW-1:0] dividend,
  input  logic [DW-1:0] divisor,
  output logic          busy,
  output logic          done,
  output logic [NW-1:0] quotient,
  output logic [DW-1:0] remainder
);
  localparam int CNT_W = $clog2(NW + 1);

  logic [DW-1:0]    dvsr;
  logic [CNT_W-1:0] cnt;
  logic [DW:0]      r_sh;
  logic [DW:0]      r_sub;

  assign r_sh  = {remainder, quotient[NW-1]};
  assign r_sub = r_sh - {1'b0, dvsr};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      done      <= 1'b0;
      cnt       <= '0;
      dvsr      <= '0;
      quotient  <= '0;
      remainder <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          busy      <= 1'b1;
          cnt       <= CNT_W'(NW);
          dvsr      <= divisor;
          quotient  <= dividend;
          remainder <= '0;
        end
      end else begin
        if (!r_sub[DW]) begin
          remainder <= r_sub[DW-1:0];
          quotient  <= {quotient[NW-2:0], 1'b1};
        end else begin
          remainder <= r_sh[DW-1:0];
          quotient  <= {quotient[NW-2:0], 1'b0};
        end
        cnt <= cnt - 1'b1;
        if (cnt == CNT_W'(1)) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end
endmodule
