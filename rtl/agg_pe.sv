// agg_pe: Aggregation PE (clipping, aggregation, noising) of the FLAIRS kernel.
//
// For every parameter k it computes, as the paper describes,
//     add_sum[k] = sum over models i with label 1 of ( g[k] + d_i[k] * scale[i] )
//     G[k]       = add_sum[k] / accepted_num + lambda * z_k ,   z_k ~ N(0,1)
// i.e. the global model plus the mean of the clipped updates of the accepted
// models, plus Gaussian noise of standard deviation lambda. G is written to
// DRAM at agg_base + k.
//
// Where the differential vectors come from follows the paper: a model whose
// vector is still held in a cascade stage RAM after the last cosine pass is
// read from there (lk_* port: client lk_client, word lk_idx, answer lk_hit and
// lk_data in the same cycle, no wait), the others from DRAM at
// diff_base + i*n_params + k. local_word pulses for every word taken from a
// stage RAM.
// How (this design's choices): parameters are processed one at a time; for
// each, the accepted clients are visited in order and models labelled 0 are
// skipped without a read; one DRAM read is outstanding at a time. The global
// model is read from the Preprocessor PE's on-chip copy (g_raddr/g_rdata,
// combinational). The division by accepted_num is a sequential signed
// division that truncates toward zero (about 40 cycles). Products d*scale and
// lambda*z are truncated back to Q16.16 by an arithmetic shift. A noise sample
// is taken from the z_* stream for every parameter. done pulses after the
// last write.
module agg_pe
  import flairs_pkg::*;
#(
  parameter int MAX_CLIENTS = 100
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  start,
  input  cidx_t n_clients,
  input  pidx_t n_params,
  input  addr_t diff_base,
  input  addr_t agg_base,
  input  fix_t  lambda,
  input  logic [MAX_CLIENTS-1:0] labels,
  input  cidx_t accepted_num,
  input  ufix_t scales [MAX_CLIENTS],
  // global model (on chip)
  output pidx_t g_raddr,
  input  fix_t  g_rdata,
  // differential vectors held in the cascade stage RAMs
  output cidx_t lk_client,
  output pidx_t lk_idx,
  input  logic  lk_hit,
  input  fix_t  lk_data,
  output logic  local_word,
  // DRAM read
  output logic  rd_valid,
  input  logic  rd_ready,
  output addr_t rd_addr,
  input  logic  rd_rvalid,
  input  fix_t  rd_rdata,
  // DRAM write
  output logic  wr_valid,
  input  logic  wr_ready,
  output addr_t wr_addr,
  output fix_t  wr_data,
  // noise
  input  logic  z_valid,
  output logic  z_ready,
  input  fix_t  z_data,
  output logic  busy,
  output logic  done
);
  localparam int IW    = $clog2(MAX_CLIENTS);
  localparam int ACC_W = DATA_W + CIDX_W + 1;

  typedef enum logic [2:0] {A_IDLE, A_CLI, A_REQ, A_WAIT, A_DIV, A_DIVW, A_NOISE, A_WR} astate_t;
  astate_t state;

  pidx_t k;
  cidx_t i;
  logic signed [ACC_W-1:0] acc;
  fix_t  q, result;
  logic  div_start, div_busy, div_done;
  logic [ACC_W-1:0]  quo;
  logic [CIDX_W-1:0] rem_unused;
  logic [ACC_W-1:0]  mag;

  logic signed [2*DATA_W:0] clipped_full;
  logic signed [2*DATA_W-1:0] noise_full;
  fix_t clipped, noise_scaled, d_sel;
  logic take_local;

  // d * scale: scale is unsigned Q16.16 <= 1.0
  assign take_local   = (state == A_CLI) && (i != n_clients) && labels[i[IW-1:0]] && lk_hit;
  assign local_word   = take_local;
  assign lk_client    = i;
  assign lk_idx       = k;
  assign d_sel        = (state == A_WAIT) ? rd_rdata : lk_data;
  assign clipped_full = d_sel * $signed({1'b0, scales[i[IW-1:0]]});
  assign clipped      = fix_t'(clipped_full >>> FRAC);
  assign noise_full   = lambda * z_data;
  assign noise_scaled = fix_t'(noise_full >>> FRAC);

  assign g_raddr   = k;
  assign rd_valid  = (state == A_REQ);
  assign rd_addr   = diff_base + addr_t'(i) * addr_t'(n_params) + addr_t'(k);
  assign wr_valid  = (state == A_WR);
  assign wr_addr   = agg_base + addr_t'(k);
  assign wr_data   = result;
  assign z_ready   = (state == A_NOISE);
  assign busy      = (state != A_IDLE);
  assign mag       = acc[ACC_W-1] ? ACC_W'(-acc) : ACC_W'(acc);
  assign div_start = (state == A_DIV);

  div_seq #(.NW(ACC_W), .DW(CIDX_W)) u_div (
    .clk, .rst_n, .start(div_start),
    .dividend(mag), .divisor(accepted_num),
    .busy(div_busy), .done(div_done), .quotient(quo), .remainder(rem_unused)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= A_IDLE;
      k      <= '0;
      i      <= '0;
      acc    <= '0;
      q      <= '0;
      result <= '0;
      done   <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        A_IDLE: if (start) begin
          k     <= '0;
          i     <= '0;
          acc   <= '0;
          state <= A_CLI;
        end
        A_CLI: begin
          if (i == n_clients) state <= (accepted_num == '0) ? A_NOISE : A_DIV;
          else if (take_local) begin
            acc <= acc + ACC_W'(g_rdata) + ACC_W'(clipped);
            i   <= i + 1'b1;
          end
          else if (labels[i[IW-1:0]]) state <= A_REQ;
          else i <= i + 1'b1;
          if (i == n_clients && accepted_num == '0) q <= g_rdata;
        end
        A_REQ:  if (rd_ready) state <= A_WAIT;
        A_WAIT: if (rd_rvalid) begin
          acc   <= acc + ACC_W'(g_rdata) + ACC_W'(clipped);
          i     <= i + 1'b1;
          state <= A_CLI;
        end
        A_DIV:  state <= A_DIVW;
        A_DIVW: if (div_done) begin
          q     <= acc[ACC_W-1] ? -fix_t'(quo) : fix_t'(quo);
          state <= A_NOISE;
        end
        A_NOISE: if (z_valid) begin
          result <= q + noise_scaled;
          state  <= A_WR;
        end
        A_WR: if (wr_ready) begin
          i   <= '0;
          acc <= '0;
          if (k == n_params - 1'b1) begin
            done  <= 1'b1;
            state <= A_IDLE;
          end else begin
            k     <= k + 1'b1;
            state <= A_CLI;
          end
        end
        default: state <= A_IDLE;
      endcase
    end
  end

  a_wr_stable: assert property (@(posedge clk) disable iff (!rst_n)
    wr_valid && !wr_ready |=> wr_valid && $stable(wr_data) && $stable(wr_addr));
endmodule
