// scale_pe: Scale PE (model clipping bound) of the FLAIRS aggregation kernel.
//
// As the paper describes it: the L2 norms of the n differential vectors are
// sorted from smallest to largest, the median S_t is taken from the sorted
// list, and every client gets the scale
//     scale[i] = min(1, gamma[i]),   gamma[i] = S_t / L2_norm[i].
// Multiplying d_i by scale[i] clips each update to length at most S_t.
//
// How (this design's choices): the sort is an odd-even transposition network
// over MAX_CLIENTS registers, one compare-exchange layer per cycle for n
// cycles (slots at and above n are filled with all-ones so they sort last).
// For an even n the median is the mean of the two middle values, as in the
// usual definition of the median; the paper only says the median is
// "selected". The divisions use one sequential divider (about 50 cycles per
// client); a zero norm gives scale 1.
// Interface: start samples n_clients and l2_norm; done pulses when median and
// scales are valid; they hold until the next start. All values Q16.16.
module scale_pe
  import flairs_pkg::*;
#(
  parameter int MAX_CLIENTS = 100
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  start,
  input  cidx_t n_clients,
  input  ufix_t l2_norm [MAX_CLIENTS],
  output ufix_t median,
  output ufix_t scales [MAX_CLIENTS],
  output logic  busy,
  output logic  done
);
  localparam int IW = $clog2(MAX_CLIENTS);
  localparam int NW = DATA_W + FRAC;

  typedef enum logic [2:0] {C_IDLE, C_SORT, C_MED, C_DIV, C_DIVW} cstate_t;
  cstate_t state;

  ufix_t sorted [MAX_CLIENTS];
  cidx_t cnt;
  cidx_t i;
  logic  div_start, div_busy, div_done;
  logic [NW-1:0]     quo;
  logic [DATA_W-1:0] rem_unused;
  logic [DATA_W:0]   mid_sum;

  assign busy = (state != C_IDLE);
  assign mid_sum = {1'b0, sorted[IW'((n_clients >> 1) - 1'b1)]} + {1'b0, sorted[IW'(n_clients >> 1)]};
  assign div_start = (state == C_DIV) && (l2_norm[i[IW-1:0]] != '0);

  div_seq #(.NW(NW), .DW(DATA_W)) u_div (
    .clk, .rst_n, .start(div_start),
    .dividend({median, FRAC'(0)}), .divisor(l2_norm[i[IW-1:0]]),
    .busy(div_busy), .done(div_done), .quotient(quo), .remainder(rem_unused)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= C_IDLE;
      median <= '0;
      cnt    <= '0;
      i      <= '0;
      done   <= 1'b0;
      for (int s = 0; s < MAX_CLIENTS; s++) begin
        sorted[s] <= '0;
        scales[s] <= '0;
      end
    end else begin
      done <= 1'b0;
      unique case (state)
        C_IDLE: if (start) begin
          for (int s = 0; s < MAX_CLIENTS; s++)
            sorted[s] <= (cidx_t'(s) < n_clients) ? l2_norm[s] : '1;
          cnt   <= '0;
          state <= C_SORT;
        end
        C_SORT: begin
          // odd-even transposition: even layer on even counts, odd layer on odd
          for (int s = 0; s + 1 < MAX_CLIENTS; s++) begin
            if ((s % 2) == int'(cnt[0]) && sorted[s] > sorted[s+1]) begin
              sorted[s]   <= sorted[s+1];
              sorted[s+1] <= sorted[s];
            end
          end
          cnt <= cnt + 1'b1;
          if (cnt + 1'b1 >= n_clients) state <= C_MED;
        end
        C_MED: begin
          if (n_clients[0]) median <= sorted[IW'(n_clients >> 1)];
          else              median <= mid_sum[DATA_W:1];
          i     <= '0;
          state <= C_DIV;
        end
        C_DIV: begin
          if (l2_norm[i[IW-1:0]] == '0) begin
            scales[i[IW-1:0]] <= ONE;
            if (i == n_clients - 1'b1) begin
              done  <= 1'b1;
              state <= C_IDLE;
            end else i <= i + 1'b1;
          end else state <= C_DIVW;
        end
        C_DIVW: if (div_done) begin
          scales[i[IW-1:0]] <= (quo > NW'(ONE)) ? ONE : quo[DATA_W-1:0];
          if (i == n_clients - 1'b1) begin
            done  <= 1'b1;
            state <= C_IDLE;
          end else begin
            i     <= i + 1'b1;
            state <= C_DIV;
          end
        end
        default: state <= C_IDLE;
      endcase
    end
  end
endmodule
