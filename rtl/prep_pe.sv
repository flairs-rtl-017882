// prep_pe: Preprocessor PE of the FLAIRS aggregation kernel.
//
// What it does (as the paper describes): it first copies the global model g
// from DRAM into an on-chip RAM. It then reads the n local models one after
// another, word by word, and for every word forms the differential value
// d_j[k] = w_j[k] - g[k]. Each differential word is sent both to the
// Cosine-similarity PE (stream port s_*) and back to DRAM (write port wr_*),
// and its square is added to a per-client accumulator. At the end of a vector
// the accumulated sum of squares goes to a square-root unit, whose result is
// the client's L2 norm ||d_j||, reported on norm_*.
//
// Interface and timing (this design's choices; the paper's kernel uses an
// HLS-generated 512-bit AXI4 master instead):
//   - Memory read: rd_valid/rd_ready request handshake carrying rd_addr; the
//     data returns on rd_rvalid/rd_rdata one or more cycles later. Only one
//     read is outstanding, so a word costs at least two cycles.
//   - Memory write: wr_valid/wr_ready handshake with wr_addr/wr_data.
//   - Stream: s_valid/s_ready handshake with a dvec_word_t.
//   - norm_valid pulses once per client with norm_idx/norm_value (Q16.16,
//     saturated to the word width). The square root takes about 40 cycles and
//     overlaps the next vector; a new vector's root waits if the unit is busy.
//   - The global model can be read by the Aggregation PE through g_raddr /
//     g_rdata (combinational read).
// DRAM layout: global model at global_base, model j at model_base + j*P,
// differential vector j written to diff_base + j*P (P = n_params).
module prep_pe
  import flairs_pkg::*;
#(
  parameter int MAX_PARAMS = 1024
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,
  input  cidx_t      n_clients,
  input  pidx_t      n_params,
  input  addr_t      global_base,
  input  addr_t      model_base,
  input  addr_t      diff_base,
  // DRAM read
  output logic       rd_valid,
  input  logic       rd_ready,
  output addr_t      rd_addr,
  input  logic       rd_rvalid,
  input  fix_t       rd_rdata,
  // DRAM write
  output logic       wr_valid,
  input  logic       wr_ready,
  output addr_t      wr_addr,
  output fix_t       wr_data,
  // differential-vector stream to the Cosine PE
  output logic       s_valid,
  input  logic       s_ready,
  output dvec_word_t s_word,
  // L2 norms
  output logic       norm_valid,
  output cidx_t      norm_idx,
  output ufix_t      norm_value,
  // global model read port
  input  pidx_t      g_raddr,
  output fix_t       g_rdata,
  output logic       busy,
  output logic       done
);
  localparam int SQ_W = 2 * DATA_W + 2 * ((PIDX_W + 1) / 2);  // sum of squares, even width

  typedef enum logic [2:0] {S_IDLE, S_GREQ, S_GWAIT, S_CREQ, S_CWAIT, S_COUT, S_SQWAIT, S_FIN} state_t;
  state_t state;

  fix_t g_ram [MAX_PARAMS];

  cidx_t cl;           // current client
  pidx_t k;            // current parameter index
  fix_t  d;            // current differential word
  logic  s_sent, w_sent;
  logic [SQ_W-1:0] sq_acc;
  logic [SQ_W-1:0] sq_hold;    // finished sum waiting for the square-root unit
  cidx_t           sq_hold_cl;
  logic            sq_pending;

  logic            sqrt_start, sqrt_busy, sqrt_done;
  logic [SQ_W/2-1:0] sqrt_root;
  cidx_t           sqrt_cl;

  logic  last_k;
  logic  s_fire, w_fire;
  logic signed [2*DATA_W-1:0] d_sq;

  assign last_k  = (k == n_params - 1'b1);
  assign d_sq    = d * d;
  assign g_rdata = g_ram[g_raddr[$clog2(MAX_PARAMS)-1:0]];

  assign rd_valid = (state == S_GREQ) || (state == S_CREQ);
  assign rd_addr  = (state == S_GREQ) ? global_base + addr_t'(k)
                                      : model_base + addr_t'(cl) * addr_t'(n_params) + addr_t'(k);

  assign s_valid = (state == S_COUT) && !s_sent;
  assign s_word  = '{client: cl, idx: k, data: d, last: last_k};
  assign wr_valid = (state == S_COUT) && !w_sent;
  assign wr_addr  = diff_base + addr_t'(cl) * addr_t'(n_params) + addr_t'(k);
  assign wr_data  = d;
  assign s_fire = s_valid && s_ready;
  assign w_fire = wr_valid && wr_ready;

  assign busy = (state != S_IDLE);
  assign sqrt_start = sq_pending && !sqrt_busy;

  isqrt_seq #(.W(SQ_W)) u_sqrt (
    .clk, .rst_n,
    .start(sqrt_start), .radicand(sq_hold),
    .busy(sqrt_busy), .done(sqrt_done), .root(sqrt_root)
  );

  // norms
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      norm_valid <= 1'b0;
      norm_idx   <= '0;
      norm_value <= '0;
      sqrt_cl    <= '0;
    end else begin
      norm_valid <= 1'b0;
      if (sqrt_start) sqrt_cl <= sq_hold_cl;
      if (sqrt_done) begin
        norm_valid <= 1'b1;
        norm_idx   <= sqrt_cl;
        norm_value <= (|sqrt_root[SQ_W/2-1:DATA_W]) ? '1 : sqrt_root[DATA_W-1:0];
      end
    end
  end

  always_ff @(posedge clk) begin
    if (state == S_GWAIT && rd_rvalid) g_ram[k[$clog2(MAX_PARAMS)-1:0]] <= rd_rdata;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      cl         <= '0;
      k          <= '0;
      d          <= '0;
      s_sent     <= 1'b0;
      w_sent     <= 1'b0;
      sq_acc     <= '0;
      sq_hold    <= '0;
      sq_hold_cl <= '0;
      sq_pending <= 1'b0;
      done       <= 1'b0;
    end else begin
      done <= 1'b0;
      if (sqrt_start) sq_pending <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          k     <= '0;
          cl    <= '0;
          state <= S_GREQ;
        end
        S_GREQ:  if (rd_ready) state <= S_GWAIT;
        S_GWAIT: if (rd_rvalid) begin
          if (last_k) begin
            k      <= '0;
            sq_acc <= '0;
            state  <= S_CREQ;
          end else begin
            k     <= k + 1'b1;
            state <= S_GREQ;
          end
        end
        S_CREQ:  if (rd_ready) state <= S_CWAIT;
        S_CWAIT: if (rd_rvalid) begin
          d      <= rd_rdata - g_ram[k[$clog2(MAX_PARAMS)-1:0]];
          s_sent <= 1'b0;
          w_sent <= 1'b0;
          state  <= S_COUT;
        end
        S_COUT: begin
          if (s_fire) s_sent <= 1'b1;
          if (w_fire) w_sent <= 1'b1;
          if ((s_sent || s_fire) && (w_sent || w_fire)) begin
            if (last_k) begin
              // hand the finished sum to the square-root unit
              if (!sq_pending || sqrt_start) begin
                sq_hold    <= sq_acc + SQ_W'(unsigned'(d_sq));
                sq_hold_cl <= cl;
                sq_pending <= 1'b1;
                sq_acc     <= '0;
                k          <= '0;
                if (cl == n_clients - 1'b1) state <= S_FIN;
                else begin
                  cl    <= cl + 1'b1;
                  state <= S_CREQ;
                end
              end else begin
                state <= S_SQWAIT;
              end
            end else begin
              sq_acc <= sq_acc + SQ_W'(unsigned'(d_sq));
              k      <= k + 1'b1;
              state  <= S_CREQ;
            end
          end
        end
        S_SQWAIT: if (!sq_pending || sqrt_start) begin
          sq_hold    <= sq_acc + SQ_W'(unsigned'(d_sq));
          sq_hold_cl <= cl;
          sq_pending <= 1'b1;
          sq_acc     <= '0;
          k          <= '0;
          if (cl == n_clients - 1'b1) state <= S_FIN;
          else begin
            cl    <= cl + 1'b1;
            state <= S_CREQ;
          end
        end
        S_FIN: if (!sq_pending && !sqrt_busy && !sqrt_start && !sqrt_done) begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // A request must hold its address until it is accepted.
  a_rd_stable: assert property (@(posedge clk) disable iff (!rst_n)
    rd_valid && !rd_ready |=> rd_valid && $stable(rd_addr));
endmodule
