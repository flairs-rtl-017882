// cosine_pe: Cosine-similarity PE of the FLAIRS aggregation kernel.
//
// Computes the upper triangle of the pairwise cosine distance matrix
//     dist_ij = 1 - (d_i . d_j) / (||d_i|| ||d_j||),   i < j,
// with a cascade of N_STAGES cosine_stage blocks (the paper's cascade
// structure). In pass 0 the cascade is fed directly by the Preprocessor PE's
// differential-vector stream (s_*), so it runs in parallel with it: stage 0
// keeps d_0 and produces row 0, stage 1 keeps d_1 and produces row 1, and so
// on. When there are more clients than stages, the remaining rows need further
// passes: pass p re-reads the differential vectors of clients p*N_STAGES ..
// n-1 from DRAM (rd_* port, at diff_base + j*n_params + k) and sends them
// through the same cascade. Passes repeat until every pair is covered.
//
// Results from the stages are merged by a fixed-priority arbiter (lowest stage
// first) onto the dw_* port, one (i, j, dist_ij) per cycle; the receiver
// always accepts. The cascade advances only when no stage requests a stall
// (stalled is high in such cycles). done pulses once all passes have drained.
// The number of stages is not given by the paper ("depends on the device
// resources"); N_STAGES = 8 is this design's default. The DRAM reader keeps
// one read outstanding, like the rest of this design.
// Once idle, the vectors the stages kept in the last pass remain readable:
// lk_hit says whether client lk_client is held by some stage and lk_data is
// its word lk_idx (combinational). The Aggregation PE uses this to skip DRAM
// reads for those clients, as the paper describes.
module cosine_pe
  import flairs_pkg::*;
#(
  parameter int MAX_CLIENTS = 100,
  parameter int MAX_PARAMS  = 1024,
  parameter int N_STAGES    = 8
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,
  input  cidx_t      n_clients,
  input  pidx_t      n_params,
  input  addr_t      diff_base,
  // stream from the Preprocessor PE (pass 0)
  input  logic       s_valid,
  output logic       s_ready,
  input  dvec_word_t s_word,
  // DRAM read (later passes)
  output logic       rd_valid,
  input  logic       rd_ready,
  output addr_t      rd_addr,
  input  logic       rd_rvalid,
  input  fix_t       rd_rdata,
  // L2 norms
  input  ufix_t      l2_norm [MAX_CLIENTS],
  input  logic [MAX_CLIENTS-1:0] l2_valid,
  // distances
  output logic       dw_valid,
  output cidx_t      dw_i,
  output cidx_t      dw_j,
  output ufix_t      dw_dist,
  // read-back of the vectors held after the last pass
  input  cidx_t      lk_client,
  input  pidx_t      lk_idx,
  output logic       lk_hit,
  output fix_t       lk_data,
  output logic       stalled,
  output cidx_t      pass_idx,
  output logic       busy,
  output logic       done
);
  typedef enum logic [2:0] {P_IDLE, P_FEED, P_DRAIN, P_NEXT} pstate_t;
  pstate_t pstate;

  // reader for passes >= 1
  typedef enum logic [1:0] {R_REQ, R_WAIT, R_HOLD, R_END} rstate_t;
  rstate_t rstate;
  cidx_t r_cl;
  pidx_t r_k;
  fix_t  r_data;

  logic       src_valid;
  dvec_word_t src_word;
  logic       adv;
  logic [7:0] drain_cnt;
  cidx_t      first_cl;     // first client of this pass

  logic       st_valid [N_STAGES+1];
  dvec_word_t st_word  [N_STAGES+1];
  logic [N_STAGES-1:0] st_stall, st_idle, st_dv_valid, st_dv_ready;
  cidx_t      st_dv_i    [N_STAGES];
  cidx_t      st_dv_j    [N_STAGES];
  ufix_t      st_dv_dist [N_STAGES];
  logic       clear_st;
  logic [N_STAGES-1:0] st_held;
  cidx_t      st_held_client [N_STAGES];
  fix_t       st_lk_data     [N_STAGES];

  assign adv     = !(|st_stall);
  assign stalled = (pstate == P_FEED || pstate == P_DRAIN) && !adv;
  assign busy    = (pstate != P_IDLE);

  // ---- source selection ----
  always_comb begin
    if (pass_idx == '0) begin
      src_valid = (pstate == P_FEED) && !clear_st && s_valid;
      src_word  = s_word;
    end else begin
      src_valid = (pstate == P_FEED) && !clear_st && (rstate == R_HOLD);
      src_word  = '{client: r_cl, idx: r_k, data: r_data, last: (r_k == n_params - 1'b1)};
    end
  end
  assign s_ready = (pstate == P_FEED) && !clear_st && (pass_idx == '0) && adv;

  assign st_valid[0] = src_valid;
  assign st_word[0]  = src_word;

  for (genvar s = 0; s < N_STAGES; s++) begin : g_stage
    cosine_stage #(.MAX_CLIENTS(MAX_CLIENTS), .MAX_PARAMS(MAX_PARAMS)) u_stage (
      .clk, .rst_n,
      .clear(clear_st), .adv,
      .in_valid(st_valid[s]), .in_word(st_word[s]),
      .out_valid(st_valid[s+1]), .out_word(st_word[s+1]),
      .stall_req(st_stall[s]), .idle(st_idle[s]),
      .l2_norm, .l2_valid,
      .dv_valid(st_dv_valid[s]), .dv_ready(st_dv_ready[s]),
      .dv_i(st_dv_i[s]), .dv_j(st_dv_j[s]), .dv_dist(st_dv_dist[s]),
      .held(st_held[s]), .held_client(st_held_client[s]),
      .lk_idx, .lk_data(st_lk_data[s])
    );
  end

  // ---- fixed-priority result arbiter ----
  always_comb begin
    st_dv_ready = '0;
    dw_valid    = 1'b0;
    dw_i        = '0;
    dw_j        = '0;
    dw_dist     = '0;
    for (int s = N_STAGES - 1; s >= 0; s--) begin
      if (st_dv_valid[s]) begin
        dw_valid    = 1'b1;
        dw_i        = st_dv_i[s];
        dw_j        = st_dv_j[s];
        dw_dist     = st_dv_dist[s];
        st_dv_ready = '0;
        st_dv_ready[s] = 1'b1;
      end
    end
  end

  // ---- read-back of held vectors (valid while idle) ----
  always_comb begin
    lk_hit  = 1'b0;
    lk_data = '0;
    for (int s = 0; s < N_STAGES; s++) begin
      if (pstate == P_IDLE && st_held[s] && st_held_client[s] == lk_client) begin
        lk_hit  = 1'b1;
        lk_data = st_lk_data[s];
      end
    end
  end

  // ---- DRAM reader ----
  assign rd_valid = (pstate == P_FEED) && (pass_idx != '0) && (rstate == R_REQ);
  assign rd_addr  = diff_base + addr_t'(r_cl) * addr_t'(n_params) + addr_t'(r_k);

  logic src_fire, src_last_word;
  assign src_fire      = src_valid && adv;
  assign src_last_word = src_word.last && (src_word.client == n_clients - 1'b1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pstate    <= P_IDLE;
      rstate    <= R_END;
      pass_idx  <= '0;
      first_cl  <= '0;
      r_cl      <= '0;
      r_k       <= '0;
      r_data    <= '0;
      drain_cnt <= '0;
      clear_st  <= 1'b0;
      done      <= 1'b0;
    end else begin
      done     <= 1'b0;
      clear_st <= 1'b0;
      unique case (pstate)
        P_IDLE: if (start) begin
          pass_idx <= '0;
          first_cl <= '0;
          clear_st <= 1'b1;
          rstate   <= R_END;
          pstate   <= P_FEED;
        end
        P_FEED: begin
          if (pass_idx != '0) begin
            unique case (rstate)
              R_REQ:  if (rd_ready) rstate <= R_WAIT;
              R_WAIT: if (rd_rvalid) begin
                r_data <= rd_rdata;
                rstate <= R_HOLD;
              end
              R_HOLD: if (adv && !clear_st) begin
                if (r_k == n_params - 1'b1) begin
                  r_k  <= '0;
                  r_cl <= r_cl + 1'b1;
                end else begin
                  r_k <= r_k + 1'b1;
                end
                rstate <= src_last_word ? R_END : R_REQ;
              end
              default: ;
            endcase
          end
          if (src_fire && src_last_word) begin
            drain_cnt <= '0;
            pstate    <= P_DRAIN;
          end
        end
        P_DRAIN: begin
          if (adv && drain_cnt <= 8'(N_STAGES)) drain_cnt <= drain_cnt + 1'b1;
          if (drain_cnt > 8'(N_STAGES) && (&st_idle) && !(|st_dv_valid)) pstate <= P_NEXT;
        end
        P_NEXT: begin
          // next pass starts with the first client no stage has held yet
          if (CIDX_W'(32'(first_cl) + N_STAGES) + 1'b1 < n_clients && n_clients > cidx_t'(1)) begin
            first_cl <= first_cl + cidx_t'(N_STAGES);
            pass_idx <= pass_idx + 1'b1;
            r_cl     <= first_cl + cidx_t'(N_STAGES);
            r_k      <= '0;
            rstate   <= R_REQ;
            clear_st <= 1'b1;
            pstate   <= P_FEED;
          end else begin
            done   <= 1'b1;
            pstate <= P_IDLE;
          end
        end
        default: pstate <= P_IDLE;
      endcase
    end
  end

  a_one_grant: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(st_dv_ready));
endmodule
