// flairs_top: FLAIRS backdoor-aware aggregation kernel (FLAME on an FPGA).
//
// The kernel takes n local models and the global model from DRAM and writes
// back one aggregated model, running FLAME's three defence layers in hardware:
// model filtering (cosine distances + HDBSCAN clustering), model clipping
// (median of the update norms) and noising. Its processing elements and their
// connections follow the paper's system architecture:
//   Prep PE   -> differential vectors (to Cosine PE and DRAM), L2 norms
//   Cosine PE -> cosine distance matrix (to HDBSCAN PE)
//   HDBSCAN PE-> labels;  Scale PE -> median and scales   (run in parallel)
//   Agg PE    -> clipped mean of accepted updates + noise -> DRAM
//                (vectors still held in the cascade RAMs are read from there)
// A small phase controller, standing in for the host's kernel trigger, runs
// them in order: phase 1 Prep and Cosine together (Cosine's later passes read
// differential vectors back from DRAM), phase 2 HDBSCAN and Scale together,
// phase 3 Aggregation; done pulses at the end.
//
// Interface: the host supplies the counts, the noise level lambda (Q16.16),
// the noise seed and four DRAM word addresses (the paper's "control & memory
// addresses"): global model, local models (model j at model_base + j*P),
// differential vectors (same layout, written by the kernel) and the
// aggregated model. DRAM is reached through one read port (request
// handshake, later rd_rvalid response, one read outstanding) and one write
// port (handshake), 32-bit words; the paper's kernel uses a 512-bit AXI4
// master with 4 KB bursts instead. Labels, accepted count, median and the
// cascade's pass/stall indicators are brought out for observation, and so is
// agg_local, which pulses for each differential word the Aggregation PE takes
// from a cascade stage RAM instead of DRAM.
// Default sizes: MAX_CLIENTS = 100 (the largest n the paper evaluates),
// MAX_PARAMS = 1024 and N_STAGES = 8 (not given in the paper; this design's
// choice).
module flairs_top
  import flairs_pkg::*;
#(
  parameter int MAX_CLIENTS = 100,
  parameter int MAX_PARAMS  = 1024,
  parameter int N_STAGES    = 8
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  start,
  input  cidx_t n_clients,
  input  pidx_t n_params,
  input  fix_t  lambda,
  input  logic [31:0] seed,
  input  addr_t global_base,
  input  addr_t model_base,
  input  addr_t diff_base,
  input  addr_t agg_base,
  // DRAM read port
  output logic  rd_valid,
  input  logic  rd_ready,
  output addr_t rd_addr,
  input  logic  rd_rvalid,
  input  fix_t  rd_rdata,
  // DRAM write port
  output logic  wr_valid,
  input  logic  wr_ready,
  output addr_t wr_addr,
  output fix_t  wr_data,
  // status and results
  output logic  busy,
  output logic  done,
  output logic [MAX_CLIENTS-1:0] labels,
  output cidx_t accepted_num,
  output ufix_t median,
  output cidx_t cos_pass,
  output logic  cos_stalled,
  output logic  agg_local
);
  typedef enum logic [2:0] {T_IDLE, T_FILTER, T_CLUSTER, T_AGG_START, T_AGG} tstate_t;
  tstate_t state;

  // ---- L2 norm table ----
  ufix_t l2_norm [MAX_CLIENTS];
  logic [MAX_CLIENTS-1:0] l2_valid;
  logic  norm_valid;
  cidx_t norm_idx;
  ufix_t norm_value;

  // ---- PE control ----
  logic prep_start, prep_busy, prep_done, prep_fin;
  logic cos_start, cos_busy, cos_done, cos_fin;
  logic hdb_start, hdb_busy, hdb_done, hdb_fin;
  logic scl_start, scl_busy, scl_done, scl_fin;
  logic agg_start, agg_busy, agg_done;

  // ---- interconnect ----
  logic       s_valid, s_ready;
  dvec_word_t s_word;
  logic       dw_valid;
  cidx_t      dw_i, dw_j;
  ufix_t      dw_dist;
  ufix_t      scales [MAX_CLIENTS];
  pidx_t      g_raddr;
  fix_t       g_rdata;
  logic       z_valid, z_ready;
  fix_t       z_data;
  cidx_t      lk_client;
  pidx_t      lk_idx;
  logic       lk_hit;
  fix_t       lk_data;

  logic  p_rd_valid, c_rd_valid, a_rd_valid;
  addr_t p_rd_addr,  c_rd_addr,  a_rd_addr;
  logic  p_wr_valid, a_wr_valid;
  addr_t p_wr_addr,  a_wr_addr;
  fix_t  p_wr_data,  a_wr_data;

  assign prep_start = (state == T_IDLE) && start;
  assign cos_start  = prep_start;
  assign hdb_start  = (state == T_FILTER) && prep_fin && cos_fin;
  assign scl_start  = hdb_start;
  assign agg_start  = (state == T_AGG_START);
  assign busy       = (state != T_IDLE);

  // ---- memory port sharing: one owner per phase ----
  always_comb begin
    rd_valid = 1'b0;
    rd_addr  = '0;
    wr_valid = 1'b0;
    wr_addr  = '0;
    wr_data  = '0;
    if (state == T_AGG) begin
      rd_valid = a_rd_valid;  rd_addr = a_rd_addr;
      wr_valid = a_wr_valid;  wr_addr = a_wr_addr;  wr_data = a_wr_data;
    end else if (prep_busy) begin
      rd_valid = p_rd_valid;  rd_addr = p_rd_addr;
      wr_valid = p_wr_valid;  wr_addr = p_wr_addr;  wr_data = p_wr_data;
    end else begin
      rd_valid = c_rd_valid;  rd_addr = c_rd_addr;
    end
  end

  prep_pe #(.MAX_PARAMS(MAX_PARAMS)) u_prep (
    .clk, .rst_n, .start(prep_start),
    .n_clients, .n_params, .global_base, .model_base, .diff_base,
    .rd_valid(p_rd_valid), .rd_ready(rd_ready && prep_busy && state != T_AGG), .rd_addr(p_rd_addr),
    .rd_rvalid(rd_rvalid && prep_busy), .rd_rdata,
    .wr_valid(p_wr_valid), .wr_ready(wr_ready && prep_busy && state != T_AGG),
    .wr_addr(p_wr_addr), .wr_data(p_wr_data),
    .s_valid, .s_ready, .s_word,
    .norm_valid, .norm_idx, .norm_value,
    .g_raddr, .g_rdata,
    .busy(prep_busy), .done(prep_done)
  );

  cosine_pe #(.MAX_CLIENTS(MAX_CLIENTS), .MAX_PARAMS(MAX_PARAMS), .N_STAGES(N_STAGES)) u_cos (
    .clk, .rst_n, .start(cos_start),
    .n_clients, .n_params, .diff_base,
    .s_valid, .s_ready, .s_word,
    .rd_valid(c_rd_valid), .rd_ready(rd_ready && !prep_busy && state != T_AGG), .rd_addr(c_rd_addr),
    .rd_rvalid(rd_rvalid && !prep_busy && state != T_AGG), .rd_rdata,
    .l2_norm, .l2_valid,
    .dw_valid, .dw_i, .dw_j, .dw_dist,
    .lk_client, .lk_idx, .lk_hit, .lk_data,
    .stalled(cos_stalled), .pass_idx(cos_pass),
    .busy(cos_busy), .done(cos_done)
  );

  hdbscan_pe #(.MAX_CLIENTS(MAX_CLIENTS)) u_hdb (
    .clk, .rst_n,
    .dw_valid, .dw_i, .dw_j, .dw_dist,
    .start(hdb_start), .n_clients,
    .labels, .accepted_num,
    .busy(hdb_busy), .done(hdb_done)
  );

  scale_pe #(.MAX_CLIENTS(MAX_CLIENTS)) u_scale (
    .clk, .rst_n, .start(scl_start), .n_clients,
    .l2_norm, .median, .scales,
    .busy(scl_busy), .done(scl_done)
  );

  gauss_noise u_noise (
    .clk, .rst_n, .seed_load(prep_start), .seed,
    .z_valid, .z_ready, .z_data
  );

  agg_pe #(.MAX_CLIENTS(MAX_CLIENTS)) u_agg (
    .clk, .rst_n, .start(agg_start),
    .n_clients, .n_params, .diff_base, .agg_base, .lambda,
    .labels, .accepted_num, .scales,
    .g_raddr, .g_rdata,
    .lk_client, .lk_idx, .lk_hit, .lk_data, .local_word(agg_local),
    .rd_valid(a_rd_valid), .rd_ready(rd_ready && state == T_AGG), .rd_addr(a_rd_addr),
    .rd_rvalid(rd_rvalid && state == T_AGG), .rd_rdata,
    .wr_valid(a_wr_valid), .wr_ready(wr_ready && state == T_AGG),
    .wr_addr(a_wr_addr), .wr_data(a_wr_data),
    .z_valid, .z_ready, .z_data,
    .busy(agg_busy), .done(agg_done)
  );

  // ---- norm table and phase control ----
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= T_IDLE;
      l2_valid <= '0;
      prep_fin <= 1'b0;
      cos_fin  <= 1'b0;
      hdb_fin  <= 1'b0;
      scl_fin  <= 1'b0;
      done     <= 1'b0;
      for (int c = 0; c < MAX_CLIENTS; c++) l2_norm[c] <= '0;
    end else begin
      done <= 1'b0;
      if (norm_valid) begin
        l2_norm[norm_idx[$clog2(MAX_CLIENTS)-1:0]]  <= norm_value;
        l2_valid[norm_idx[$clog2(MAX_CLIENTS)-1:0]] <= 1'b1;
      end
      if (prep_done) prep_fin <= 1'b1;
      if (cos_done)  cos_fin  <= 1'b1;
      if (hdb_done)  hdb_fin  <= 1'b1;
      if (scl_done)  scl_fin  <= 1'b1;
      unique case (state)
        T_IDLE: if (start) begin
          l2_valid <= '0;
          prep_fin <= 1'b0;
          cos_fin  <= 1'b0;
          state    <= T_FILTER;
        end
        T_FILTER: if (hdb_start) begin
          hdb_fin <= 1'b0;
          scl_fin <= 1'b0;
          state   <= T_CLUSTER;
        end
        T_CLUSTER: if ((hdb_fin || hdb_done) && (scl_fin || scl_done)) state <= T_AGG_START;
        T_AGG_START: state <= T_AGG;
        T_AGG: if (agg_done) begin
          done  <= 1'b1;
          state <= T_IDLE;
        end
        default: state <= T_IDLE;
      endcase
    end
  end

  a_one_owner: assert property (@(posedge clk) disable iff (!rst_n)
    !(prep_busy && agg_busy));
  a_start_idle: assert property (@(posedge clk) disable iff (!rst_n)
    prep_start |-> !cos_busy && !hdb_busy && !scl_busy);
endmodule
