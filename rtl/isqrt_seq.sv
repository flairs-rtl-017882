// isqrt_seq: sequential integer square root, root = floor(sqrt(radicand)).
//
// Digit-by-digit (restoring) method: two radicand bits are consumed per
// clock, so the root is ready W/2 cycles after start; done pulses for one
// cycle and root then holds until the next start. The Preprocessor PE uses it
// for the square root of each client's sum of squared differences: the root of
// a value with 2*FRAC fractional bits has FRAC fractional bits, so no scaling
// is needed. The paper names a square-root function only; this method is this
// design's choice.
module isqrt_seq #(
  parameter int W = 64     // radicand width, even
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  logic [W-1:0]   radicand,
  output logic           busy,
  output logic           done,
  output logic [W/2-1:0] root
);
  localparam int H     = W / 2;
  localparam int CNT_W = $clog2(H + 1);

  logic [W-1:0]     rad;
  logic [H+1:0]     rem;
  logic [CNT_W-1:0] cnt;
  logic [H+1:0]     rem_sh;
  logic [H+1:0]     trial;

  assign rem_sh = {rem[H-1:0], rad[W-1:W-2]};
  assign trial  = {root, 2'b01};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      done <= 1'b0;
      rad  <= '0;
      rem  <= '0;
      root <= '0;
      cnt  <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          busy <= 1'b1;
          rad  <= radicand;
          rem  <= '0;
          root <= '0;
          cnt  <= CNT_W'(H);
        end
      end else begin
        rad <= {rad[W-3:0], 2'b00};
        if (rem_sh >= trial) begin
          rem  <= rem_sh - trial;
          root <= {root[H-2:0], 1'b1};
        end else begin
          rem  <= rem_sh;
          root <= {root[H-2:0], 1'b0};
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
