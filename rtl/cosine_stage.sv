// cosine_stage: one stage of the Cosine-similarity PE's cascade.
//
// Following the paper's cascade structure, the first differential vector that
// reaches a stage in a pass is stored in the stage's RAM (RAM1 holds d_1 in
// stage 1, RAM2 holds d_2 in stage 2, ...) and is not passed on. Every later
// vector d_j is multiplied word by word with the stored vector and accumulated
// (the MUL/ACC loop "cosine_loop2", giving mul_sum = d_i . d_j) and is
// forwarded, one register later, to the next stage. At the end of d_j the
// stage's cosine_process finishes the row entry:
//     denom   = ||d_i|| * ||d_j||          (MUL of the two L2 norms)
//     dist_ij = 1 - mul_sum / denom        (DIV, then SUB from 1)
// and offers (i, j, dist_ij) on the dv_* handshake.
//
// Timing: the cascade moves only when adv is high (one global advance for all
// stages). The stage raises stall_req when a vector ends while the previous
// dist_ij is still being finished, so the whole cascade (and the source) waits.
// The finish step also waits until both norms are valid, since in the first
// pass the norm of d_j appears only after the Preprocessor's square root.
// The DIV is a sequential divider of about 90 cycles, overlapping the next
// vector. Fixed-point choices (this design's own): norms and distances are
// Q16.16; the ratio is clamped to [-1, 1] and a zero denominator gives
// dist = 1. clear empties the stage at the start of each pass.
// After the last pass the stored vector stays in the RAM: held/held_client
// name its client and lk_data returns word lk_idx of it (combinational
// second read port), so the Aggregation PE can use it without a DRAM read,
// as the paper's Aggregation PE does.
module cosine_stage
  import flairs_pkg::*;
#(
  parameter int MAX_CLIENTS = 100,
  parameter int MAX_PARAMS  = 1024
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       clear,
  input  logic       adv,
  input  logic       in_valid,
  input  dvec_word_t in_word,
  output logic       out_valid,
  output dvec_word_t out_word,
  output logic       stall_req,
  output logic       idle,
  input  ufix_t      l2_norm [MAX_CLIENTS],
  input  logic [MAX_CLIENTS-1:0] l2_valid,
  output logic       dv_valid,
  input  logic       dv_ready,
  output cidx_t      dv_i,
  output cidx_t      dv_j,
  output ufix_t      dv_dist,
  // read-back of the stored vector
  output logic       held,
  output cidx_t      held_client,
  input  pidx_t      lk_idx,
  output fix_t       lk_data
);
  localparam int ACC_W = 2 * DATA_W + PIDX_W;     // dot product width
  localparam int NUM_W = ACC_W + FRAC;             // dividend width
  localparam int DEN_W = 2 * DATA_W;               // denominator width
  localparam int AW    = $clog2(MAX_PARAMS);
  localparam int CW    = $clog2(MAX_CLIENTS);

  typedef enum logic [2:0] {F_IDLE, F_NORM, F_MUL, F_DIV, F_OUT} fstate_t;
  fstate_t fstate;

  fix_t ram [MAX_PARAMS];
  logic has_first;
  cidx_t first_idx;
  logic signed [ACC_W-1:0] acc, acc_next;
  logic signed [2*DATA_W-1:0] prod;

  // finish (cosine_process) registers
  logic signed [ACC_W-1:0] mul_sum;
  cidx_t fj;
  logic [DEN_W-1:0] denom;
  logic neg;
  logic div_start, div_busy, div_done;
  logic [NUM_W-1:0] quo;
  logic [DEN_W-1:0] rem_unused;
  logic [ACC_W-1:0] mag;
  logic [NUM_W-1:0] ratio_mag;

  logic take;
  assign take     = adv && in_valid;
  assign prod     = ram[in_word.idx[AW-1:0]] * in_word.data;
  assign acc_next = (in_word.idx == '0 ? '0 : acc) + ACC_W'(prod);

  assign stall_req = in_valid && has_first && in_word.last && (fstate != F_IDLE);
  assign idle      = (fstate == F_IDLE);
  assign held        = has_first;
  assign held_client = first_idx;
  assign lk_data     = ram[lk_idx[AW-1:0]];

  assign mag       = mul_sum[ACC_W-1] ? ACC_W'(-mul_sum) : ACC_W'(mul_sum);
  assign div_start = (fstate == F_MUL) && (denom != '0);
  assign ratio_mag = (quo > NUM_W'(ONE)) ? NUM_W'(ONE) : quo;

  div_seq #(.NW(NUM_W), .DW(DEN_W)) u_div (
    .clk, .rst_n, .start(div_start),
    .dividend({mag, FRAC'(0)}), .divisor(denom),
    .busy(div_busy), .done(div_done), .quotient(quo), .remainder(rem_unused)
  );

  // stored first vector
  always_ff @(posedge clk) begin
    if (take && !has_first) ram[in_word.idx[AW-1:0]] <= in_word.data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      has_first <= 1'b0;
      first_idx <= '0;
      acc       <= '0;
      out_valid <= 1'b0;
      out_word  <= '0;
      fstate    <= F_IDLE;
      mul_sum   <= '0;
      fj        <= '0;
      denom     <= '0;
      neg       <= 1'b0;
      dv_valid  <= 1'b0;
      dv_i      <= '0;
      dv_j      <= '0;
      dv_dist   <= '0;
    end else begin
      // ---- cascade datapath ----
      if (clear) begin
        has_first <= 1'b0;
        out_valid <= 1'b0;
      end else if (adv) begin
        out_valid <= 1'b0;
        if (in_valid) begin
          if (!has_first) begin
            if (in_word.last) begin
              has_first <= 1'b1;
              first_idx <= in_word.client;
            end
          end else begin
            acc       <= acc_next;
            out_valid <= 1'b1;
            out_word  <= in_word;
          end
        end
      end
      // ---- cosine_process finish ----
      unique case (fstate)
        F_IDLE: if (!clear && take && has_first && in_word.last) begin
          mul_sum <= acc_next;
          fj      <= in_word.client;
          fstate  <= F_NORM;
        end
        F_NORM: if (l2_valid[first_idx[CW-1:0]] && l2_valid[fj[CW-1:0]]) begin
          denom  <= l2_norm[first_idx[CW-1:0]] * l2_norm[fj[CW-1:0]];
          neg    <= mul_sum[ACC_W-1];
          fstate <= F_MUL;
        end
        F_MUL: begin
          if (denom == '0) begin
            dv_valid <= 1'b1;
            dv_i     <= first_idx;
            dv_j     <= fj;
            dv_dist  <= ONE;
            fstate   <= F_OUT;
          end else begin
            fstate <= F_DIV;
          end
        end
        F_DIV: if (div_done) begin
          dv_valid <= 1'b1;
          dv_i     <= first_idx;
          dv_j     <= fj;
          dv_dist  <= neg ? ONE + ufix_t'(ratio_mag) : ONE - ufix_t'(ratio_mag);
          fstate   <= F_OUT;
        end
        F_OUT: if (dv_ready) begin
          dv_valid <= 1'b0;
          fstate   <= F_IDLE;
        end
        default: fstate <= F_IDLE;
      endcase
    end
  end

  a_dv_hold: assert property (@(posedge clk) disable iff (!rst_n)
    dv_valid && !dv_ready |=> dv_valid && $stable(dv_dist) && $stable(dv_j));
endmodule
