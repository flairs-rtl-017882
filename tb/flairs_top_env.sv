// flairs_top_env: stimulus, DRAM model and reference checker for the whole
// FLAIRS kernel, used by the end-to-end testbenches.
//
// It builds a federated-learning round in DRAM: a global model and N_RUN
// local models of P_RUN parameters. N_BAD of the clients are "poisoned": their
// updates point in another direction and are several times larger than the
// benign ones, which are a common direction plus small per-client noise. It
// starts the kernel, waits for done and recomputes everything in software:
// differential vectors, floor square-root norms, cosine distances, the
// majority cluster (Kruskal over all pairs until a component holds n/2+1
// models), the median and clip scales, and the aggregated model with the
// noise drawn from a software MT19937 with the same seed. It checks labels,
// accepted count, median, every differential word in DRAM and every
// aggregated word bit-exactly, and counts the mechanisms the run must show:
// cascade stalls, more than one cascade pass, refused DRAM requests, rejected
// models, clipped models, non-zero noise and differential words the
// Aggregation PE took from the cascade RAMs (their number must equal P_RUN
// times the accepted clients among those held by the last pass). A mechanism that never occurs
// counts as a failure (the stall only where EXPECT_STALL is set: with long
// vectors the division finishes before the next vector ends).
// With USE_AXI set, memory is the AXI4 slave model on the m_* ports instead
// of the word-port model; the run must then also show read bursts, reads
// served from the bridge's buffer, and no AXI protocol error.
module flairs_top_env
  import flairs_pkg::*;
  import flairs_ref_pkg::*;
#(
  parameter int MAX_CLIENTS = 100,
  parameter int N_RUN       = 10,
  parameter int P_RUN       = 8,
  parameter int N_BAD       = 3,
  parameter int MAX_CYCLES  = 1000000,
  parameter int N_STAGES    = 8,       // cascade stages of the kernel under test
  parameter bit EXPECT_STALL = 1'b1,   // long vectors hide the divider, so no stall
  parameter bit EXPECT_LOCAL = 1'b1,   // an accepted model among those the last pass holds
  parameter bit USE_AXI      = 1'b0    // memory on the AXI4 ports instead of the word ports
) (
  input  logic  clk,
  output logic  rst_n,
  output logic  start,
  output cidx_t n_clients,
  output pidx_t n_params,
  output fix_t  lambda,
  output logic [31:0] seed,
  output addr_t global_base,
  output addr_t model_base,
  output addr_t diff_base,
  output addr_t agg_base,
  input  logic  rd_valid,
  output logic  rd_ready,
  input  addr_t rd_addr,
  output logic  rd_rvalid,
  output fix_t  rd_rdata,
  input  logic  wr_valid,
  output logic  wr_ready,
  input  addr_t wr_addr,
  input  fix_t  wr_data,
  input  logic  busy,
  input  logic  done,
  input  logic [MAX_CLIENTS-1:0] labels,
  input  cidx_t accepted_num,
  input  ufix_t median,
  input  cidx_t cos_pass,
  input  logic  cos_stalled,
  input  logic  agg_local,
  // AXI4 slave side (used when USE_AXI is set)
  input  logic         m_arvalid,
  output logic         m_arready,
  input  logic [63:0]  m_araddr,
  input  logic [7:0]   m_arlen,
  input  logic [2:0]   m_arsize,
  input  logic [1:0]   m_arburst,
  output logic         m_rvalid,
  input  logic         m_rready,
  output logic [511:0] m_rdata,
  output logic         m_rlast,
  input  logic         m_awvalid,
  output logic         m_awready,
  input  logic [63:0]  m_awaddr,
  input  logic [7:0]   m_awlen,
  input  logic [2:0]   m_awsize,
  input  logic [1:0]   m_awburst,
  input  logic         m_wvalid,
  output logic         m_wready,
  input  logic [511:0] m_wdata,
  input  logic [63:0]  m_wstrb,
  input  logic         m_wlast,
  output logic         m_bvalid,
  input  logic         m_bready,
  input  logic         burst_start
);
  localparam int WORDS = P_RUN * (2 * N_RUN + 2) + 16;
  int rd_stalls, wr_count;
  int bursts, beats, words_written, wbursts, ar_stalls, proto_errors, burst_pulses = 0;
  int checks = 0, failures = 0;
  int stall_cycles = 0, max_pass = 0, cycles = 0, local_words = 0;

  dram_model #(.WORDS(WORDS)) mem (.clk, .rd_valid, .rd_ready, .rd_addr, .rd_rvalid, .rd_rdata,
    .wr_valid, .wr_ready, .wr_addr, .wr_data, .rd_stalls, .wr_count);
  axi_mem_model #(.WORDS(WORDS)) axm (.*);

  function automatic void mem_put(addr_t a, fix_t v);
    if (USE_AXI) axm.mem[a] = v;
    else         mem.mem[a] = v;
  endfunction

  function automatic fix_t mem_get(addr_t a);
    return USE_AXI ? fix_t'(axm.mem[a]) : mem.mem[a];
  endfunction

  // software copy of the round
  longint g [P_RUN];
  longint w [N_RUN][P_RUN];
  longint d [N_RUN][P_RUN];
  longint nrm [N_RUN];
  longint cdist [N_RUN][N_RUN];
  longint scl [N_RUN];
  logic [MAX_CLIENTS-1:0] exp_lab;
  int exp_acc;
  longint med;

  initial begin
    repeat (MAX_CYCLES) @(posedge clk);
    failures++;
    $display("watchdog expired after %0d cycles", MAX_CYCLES);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && busy) begin
    cycles++;
    if (cos_stalled) stall_cycles++;
    if (agg_local) local_words++;
    if (burst_start) burst_pulses++;
    if (int'(cos_pass) > max_pass) max_pass = int'(cos_pass);
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  task automatic make_round();
    longint base [P_RUN];
    longint evil [P_RUN];
    for (int k = 0; k < P_RUN; k++) begin
      g[k]    = longint'($urandom_range(0, 2 * 65536)) - 65536;
      base[k] = longint'($urandom_range(0, 32768)) - 16384;
      evil[k] = longint'($urandom_range(0, 131072)) - 65536;
    end
    for (int c = 0; c < N_RUN; c++)
      for (int k = 0; k < P_RUN; k++) begin
        if (c % (N_RUN / N_BAD) == 1 && c / (N_RUN / N_BAD) < N_BAD)
          d[c][k] = evil[k] + longint'($urandom_range(0, 4096)) - 2048;
        else
          d[c][k] = base[k] + longint'($urandom_range(0, 8192)) - 4096;
        w[c][k] = g[k] + d[c][k];
      end
  endtask

  task automatic reference();
    int comp [N_RUN];
    int sz [N_RUN];
    int need, bi, bj, a, b;
    longint bw, s;
    longint v [$];
    for (int c = 0; c < N_RUN; c++) begin
      s = 0;
      for (int k = 0; k < P_RUN; k++) s += d[c][k] * d[c][k];
      nrm[c] = longint'(isqrt(longint'(s)));
    end
    for (int i = 0; i < N_RUN; i++)
      for (int j = i + 1; j < N_RUN; j++) begin
        s = 0;
        for (int k = 0; k < P_RUN; k++) s += d[i][k] * d[j][k];
        cdist[i][j] = cos_dist(s, nrm[i], nrm[j]);
      end
    // majority cluster
    need = N_RUN / 2 + 1;
    for (int i = 0; i < N_RUN; i++) begin comp[i] = i; sz[i] = 1; end
    exp_lab = '0;
    exp_acc = 0;
    while (exp_acc == 0) begin
      bw = -1;
      for (int i = 0; i < N_RUN; i++)
        for (int j = i + 1; j < N_RUN; j++)
          if (comp[i] != comp[j] && (bw < 0 || cdist[i][j] < bw)) begin bw = cdist[i][j]; bi = i; bj = j; end
      a = comp[bi]; b = comp[bj];
      for (int i = 0; i < N_RUN; i++) if (comp[i] == b) comp[i] = a;
      sz[a] += sz[b];
      if (sz[a] >= need) begin
        for (int i = 0; i < N_RUN; i++) exp_lab[i] = (comp[i] == a);
        exp_acc = sz[a];
      end
    end
    // median and scales
    for (int c = 0; c < N_RUN; c++) v.push_back(nrm[c]);
    v.sort();
    med = (N_RUN % 2 != 0) ? v[N_RUN/2] : (v[N_RUN/2-1] + v[N_RUN/2]) / 2;
    for (int c = 0; c < N_RUN; c++) scl[c] = clip_scale(med, nrm[c]);
  endtask

  initial begin
    int unsigned st[624];
    int idx, rejected, clipped, noisy, last_first, exp_local;
    longint sum, z, exp;
    rst_n = 0; start = 0;
    n_clients = cidx_t'(N_RUN);
    n_params  = pidx_t'(P_RUN);
    lambda    = fix_t'(65536 / 1000);    // 0.001
    seed      = 32'd2023;
    global_base = 0;
    model_base  = addr_t'(P_RUN);
    diff_base   = addr_t'(P_RUN * (N_RUN + 1));
    agg_base    = addr_t'(P_RUN * (2 * N_RUN + 1));
    make_round();
    for (int k = 0; k < P_RUN; k++) mem_put(global_base + k, fix_t'(g[k]));
    for (int c = 0; c < N_RUN; c++)
      for (int k = 0; k < P_RUN; k++) mem_put(model_base + c * P_RUN + k, fix_t'(w[c][k]));
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    $display("kernel finished after %0d cycles (n=%0d, P=%0d)", cycles, N_RUN, P_RUN);
    reference();
    check(labels[N_RUN-1:0] == exp_lab[N_RUN-1:0], $sformatf("labels %b expected %b", labels[N_RUN-1:0], exp_lab[N_RUN-1:0]));
    check(int'(accepted_num) == exp_acc, $sformatf("accepted %0d expected %0d", accepted_num, exp_acc));
    check(longint'(median) == med, $sformatf("median %0d expected %0d", median, med));
    for (int c = 0; c < N_RUN; c++)
      for (int k = 0; k < P_RUN; k++)
        check(longint'(mem_get(diff_base + c * P_RUN + k)) == d[c][k], "differential vector in DRAM");
    mt_seed(st, 2023); idx = 624;
    rejected = 0; clipped = 0; noisy = 0;
    for (int c = 0; c < N_RUN; c++) begin
      if (!exp_lab[c]) rejected++;
      else if (scl[c] < longint'(ONE)) clipped++;
    end
    for (int k = 0; k < P_RUN; k++) begin
      z = 0;
      for (int t = 0; t < 12; t++) z += longint'(mt_next(st, idx)) >> 16;
      z -= 6 * ONE;
      sum = 0;
      for (int c = 0; c < N_RUN; c++) if (exp_lab[c]) sum += g[k] + fmul(d[c][k], scl[c]);
      exp = sdiv(sum, longint'(exp_acc)) + fmul(longint'(lambda), z);
      if (fmul(longint'(lambda), z) != 0) noisy++;
      check(longint'(mem_get(agg_base + k)) == exp,
            $sformatf("aggregated k=%0d got %0d exp %0d", k, mem_get(agg_base + k), exp));
    end
    // clients whose vectors the last cascade pass keeps in its stage RAMs
    last_first = 0;
    while (last_first + N_STAGES + 1 < N_RUN) last_first += N_STAGES;
    exp_local = 0;
    for (int c = last_first; c < N_RUN && c < last_first + N_STAGES; c++)
      if (exp_lab[c]) exp_local += P_RUN;
    check(local_words == exp_local, $sformatf("words from cascade RAMs %0d expected %0d", local_words, exp_local));
    $display("mechanisms: stall cycles %0d, cascade passes %0d, DRAM refusals %0d, rejected %0d, clipped %0d, noisy params %0d, words from cascade RAMs %0d",
             stall_cycles, max_pass + 1, rd_stalls, rejected, clipped, noisy, local_words);
    if (EXPECT_STALL) check(stall_cycles > 0, "cascade stall happened");
    check(max_pass > 0, "more than one cascade pass");
    if (USE_AXI) begin
      $display("AXI: read bursts %0d, write bursts %0d carrying %0d words, AR refusals %0d, protocol errors %0d",
               bursts, wbursts, words_written, ar_stalls, proto_errors);
      // Prep writes every difference word and Agg every result word; each
      // 4 KB block of them must have gone out in few bursts
      check(words_written >= (N_RUN + 1) * P_RUN && wbursts > 0 && wbursts * 8 < words_written,
            $sformatf("%0d write bursts for %0d words", wbursts, words_written));
      check(proto_errors == 0, "AXI protocol errors");
      check(bursts > 0 && burst_pulses == bursts, $sformatf("read bursts %0d, pulses %0d", bursts, burst_pulses));
      // the Prep PE alone reads (N_RUN+1)*P_RUN words; far fewer bursts means
      // most reads were served from the bridge's block buffer
      check(bursts < (N_RUN + 1) * P_RUN, "word reads served from the burst buffer");
      check(ar_stalls > 0, "DRAM refused a request");
    end else begin
      check(rd_stalls > 0, "DRAM refused a request");
    end
    check(rejected > 0, "a model was rejected");
    check(clipped > 0, "an accepted model was clipped");
    check(noisy > 0, "noise was added");
    if (EXPECT_LOCAL) check(local_words > 0, "aggregation used vectors held in the cascade");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
