// hdbscan_pe: HDBSCAN PE (model filtering) of the FLAIRS aggregation kernel.
//
// The paper runs a simplified HDBSCAN that only has to find the one cluster
// holding the majority of the models, at least n/2+1 of them, and treats all
// other models as noise. It does not spell the simplification out. This block
// implements it as single-linkage clustering, which is what HDBSCAN reduces to
// with min_samples = 1 (core distance zero, mutual reachability = distance):
//   1. Prim's algorithm builds the minimum spanning tree of the complete graph
//      whose edge weights are the cosine distances (n steps, each a select
//      scan and an update scan of n cycles).
//   2. The tree edges are merged in increasing weight order (Kruskal over the
//      tree, one edge per select scan, the component relabel is one cycle).
//      The first component to reach min_cluster_size = n/2+1 is the cluster.
//   3. Its members get label 1 (benign), all others 0; accepted_num is its
//      size.
// Ties in the minimum searches go to the lowest index. Cost is about 3n^2
// cycles, small next to the cosine distances.
//
// Interface: the Cosine PE writes dist_ij (i < j) into the block's distance
// RAM through dw_* (always accepted; the diagonal reads as 0 and the lower
// triangle mirrors the upper). start runs the clustering on the first
// n_clients models; done pulses when labels and accepted_num are valid, and
// they hold until the next start.
module hdbscan_pe
  import flairs_pkg::*;
#(
  parameter int MAX_CLIENTS = 100
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  dw_valid,
  input  cidx_t dw_i,
  input  cidx_t dw_j,
  input  ufix_t dw_dist,
  input  logic  start,
  input  cidx_t n_clients,
  output logic [MAX_CLIENTS-1:0] labels,
  output cidx_t accepted_num,
  output logic  busy,
  output logic  done
);
  localparam int IW = $clog2(MAX_CLIENTS);

  typedef enum logic [2:0] {H_IDLE, H_UPD, H_SEL, H_KINIT, H_KSEL, H_KMERGE, H_LABEL} hstate_t;
  hstate_t state;

  ufix_t dm [MAX_CLIENTS][MAX_CLIENTS];

  logic [MAX_CLIENTS-1:0] in_tree, used;
  ufix_t key    [MAX_CLIENTS];
  cidx_t parent [MAX_CLIENTS];
  cidx_t comp   [MAX_CLIENTS];
  cidx_t csize  [MAX_CLIENTS];

  cidx_t u, v, best, tree_cnt, winner, min_size;
  ufix_t best_w;
  logic  best_ok;
  ufix_t d_uv;

  // distance lookup, symmetric with a zero diagonal
  always_comb begin
    if (u == v)     d_uv = '0;
    else if (u < v) d_uv = dm[u[IW-1:0]][v[IW-1:0]];
    else            d_uv = dm[v[IW-1:0]][u[IW-1:0]];
  end

  always_ff @(posedge clk) begin
    if (dw_valid) dm[dw_i[IW-1:0]][dw_j[IW-1:0]] <= dw_dist;
  end

  assign busy = (state != H_IDLE);

  cidx_t ca, cb;
  assign ca = comp[best[IW-1:0]];
  assign cb = comp[parent[best[IW-1:0]][IW-1:0]];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= H_IDLE;
      labels       <= '0;
      accepted_num <= '0;
      done         <= 1'b0;
      in_tree      <= '0;
      used         <= '0;
      u            <= '0;
      v            <= '0;
      best         <= '0;
      best_w       <= '0;
      best_ok      <= 1'b0;
      tree_cnt     <= '0;
      winner       <= '0;
      min_size     <= '0;
      for (int i = 0; i < MAX_CLIENTS; i++) begin
        key[i]    <= '1;
        parent[i] <= '0;
        comp[i]   <= '0;
        csize[i]  <= '0;
      end
    end else begin
      done <= 1'b0;
      unique case (state)
        H_IDLE: if (start) begin
          min_size <= (n_clients >> 1) + 1'b1;
          in_tree  <= MAX_CLIENTS'(1);   // tree starts at model 0
          tree_cnt <= cidx_t'(1);
          u        <= '0;
          v        <= '0;
          for (int i = 0; i < MAX_CLIENTS; i++) begin
            key[i]    <= '1;
            parent[i] <= '0;
          end
          state <= (n_clients > cidx_t'(1)) ? H_UPD : H_KINIT;
        end
        // Prim: relax the keys of all models outside the tree against u
        H_UPD: begin
          if (!in_tree[v[IW-1:0]] && d_uv < key[v[IW-1:0]]) begin
            key[v[IW-1:0]]    <= d_uv;
            parent[v[IW-1:0]] <= u;
          end
          if (v == n_clients - 1'b1) begin
            v       <= '0;
            best_ok <= 1'b0;
            state   <= H_SEL;
          end else v <= v + 1'b1;
        end
        // Prim: pick the closest model outside the tree
        H_SEL: begin
          if (!in_tree[v[IW-1:0]] && (!best_ok || key[v[IW-1:0]] < best_w)) begin
            best    <= v;
            best_w  <= key[v[IW-1:0]];
            best_ok <= 1'b1;
          end
          if (v == n_clients - 1'b1) begin
            v <= '0;
            if (!in_tree[v[IW-1:0]] && (!best_ok || key[v[IW-1:0]] < best_w)) begin
              u <= v;
              in_tree[v[IW-1:0]] <= 1'b1;
            end else begin
              u <= best;
              in_tree[best[IW-1:0]] <= 1'b1;
            end
            tree_cnt <= tree_cnt + 1'b1;
            state    <= (tree_cnt + 1'b1 == n_clients) ? H_KINIT : H_UPD;
          end else v <= v + 1'b1;
        end
        H_KINIT: begin
          for (int i = 0; i < MAX_CLIENTS; i++) begin
            comp[i]  <= cidx_t'(i);
            csize[i] <= cidx_t'(1);
          end
          used    <= MAX_CLIENTS'(1);   // model 0 is the root and has no edge
          v       <= cidx_t'(1);
          best_ok <= 1'b0;
          winner  <= '0;
          state   <= (min_size <= cidx_t'(1)) ? H_LABEL : H_KSEL;
        end
        // Kruskal over the tree edges (v, parent[v], key[v])
        H_KSEL: begin
          if (!used[v[IW-1:0]] && (!best_ok || key[v[IW-1:0]] < best_w)) begin
            best    <= v;
            best_w  <= key[v[IW-1:0]];
            best_ok <= 1'b1;
          end
          if (v == n_clients - 1'b1) state <= H_KMERGE;
          else v <= v + 1'b1;
        end
        H_KMERGE: begin
          for (int i = 0; i < MAX_CLIENTS; i++)
            if (comp[i] == cb) comp[i] <= ca;
          csize[ca[IW-1:0]] <= csize[ca[IW-1:0]] + csize[cb[IW-1:0]];
          used[best[IW-1:0]] <= 1'b1;
          v       <= cidx_t'(1);
          best_ok <= 1'b0;
          if (csize[ca[IW-1:0]] + csize[cb[IW-1:0]] >= min_size) begin
            winner <= ca;
            state  <= H_LABEL;
          end else state <= H_KSEL;
        end
        H_LABEL: begin
          for (int i = 0; i < MAX_CLIENTS; i++)
            labels[i] <= (cidx_t'(i) < n_clients) && (comp[i] == winner);
          accepted_num <= csize[winner[IW-1:0]];
          done  <= 1'b1;
          state <= H_IDLE;
        end
        default: state <= H_IDLE;
      endcase
    end
  end
endmodule
