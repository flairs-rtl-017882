// cosine_pe_tb: Cosine-similarity PE with a 3-stage cascade and 8 clients,
// so three passes are needed: pass 0 is fed from the stream port (random
// gaps), passes 1 and 2 re-read the differential vectors from the DRAM model
// (random refusals). Norms become valid only some cycles after each vector
// has been streamed, as the Preprocessor's square root would. The test checks
// that every pair i<j is produced exactly once with the bit-exact distance,
// that no other pair appears, that three passes ran, and that stalls occurred.
// After each run the read-back port must report exactly the clients the last
// pass kept (6 and 7 for 8 clients, 0 and 1 for 2) and return their vectors.
// A second run with 2 clients checks the single-pair case.
module cosine_pe_tb;
  import flairs_pkg::*;
  import flairs_ref_pkg::*;
  localparam int NC = 10, NP = 16, S = 3, P = 5;
  logic clk = 0, rst_n = 0, start = 0;
  cidx_t n_clients;
  pidx_t n_params;
  addr_t diff_base = 100;
  logic s_valid = 0, s_ready;
  dvec_word_t s_word;
  logic rd_valid, rd_ready, rd_rvalid, wr_valid = 0, wr_ready;
  addr_t rd_addr, wr_addr = 0;
  fix_t rd_rdata, wr_data = 0;
  ufix_t l2_norm [NC];
  logic [NC-1:0] l2_valid;
  logic dw_valid;
  cidx_t dw_i, dw_j;
  ufix_t dw_dist;
  logic stalled, busy, done;
  cidx_t pass_idx;
  cidx_t lk_client = '0;
  pidx_t lk_idx = '0;
  logic lk_hit;
  fix_t lk_data;
  int rd_stalls, wr_count;
  int checks = 0, failures = 0, stall_cycles = 0, max_pass = 0;
  longint d [NC][P];
  longint nrm [NC];
  int seen [NC][NC];

  always #5 clk = ~clk;

  cosine_pe #(.MAX_CLIENTS(NC), .MAX_PARAMS(NP), .N_STAGES(S)) dut (.*);
  dram_model #(.WORDS(256)) mem (.clk, .rd_valid, .rd_ready, .rd_addr, .rd_rvalid, .rd_rdata,
    .wr_valid, .wr_ready, .wr_addr, .wr_data, .rd_stalls, .wr_count);

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  function automatic longint dot(int a, int b);
    longint s = 0;
    for (int k = 0; k < P; k++) s += d[a][k] * d[b][k];
    return s;
  endfunction

  always @(posedge clk) if (rst_n) begin
    if (stalled) stall_cycles++;
    if (int'(pass_idx) > max_pass) max_pass = int'(pass_idx);
    if (dw_valid) begin
      check(dw_i < dw_j && int'(dw_j) < int'(n_clients), $sformatf("pair %0d,%0d in range", dw_i, dw_j));
      if (dw_i < dw_j && int'(dw_j) < int'(n_clients)) begin
        seen[dw_i][dw_j]++;
        check(longint'(dw_dist) == cos_dist(dot(dw_i, dw_j), nrm[dw_i], nrm[dw_j]),
              $sformatf("dist %0d,%0d got %0d exp %0d", dw_i, dw_j, dw_dist,
                        cos_dist(dot(dw_i, dw_j), nrm[dw_i], nrm[dw_j])));
      end
    end
  end

  task automatic run(input int n);
    int lf;
    n_clients = cidx_t'(n);
    n_params  = pidx_t'(P);
    l2_valid  = '0;
    for (int c = 0; c < NC; c++) for (int e = 0; e < NC; e++) seen[c][e] = 0;
    for (int c = 0; c < n; c++) begin
      longint s = 0;
      for (int k = 0; k < P; k++) begin
        d[c][k] = longint'($urandom_range(0, 131072)) - 65536;
        s += d[c][k] * d[c][k];
        mem.mem[diff_base + c * P + k] = fix_t'(d[c][k]);
      end
      nrm[c] = longint'(isqrt(longint'(s)));
      l2_norm[c] = ufix_t'(nrm[c]);
    end
    max_pass = 0;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    // pass 0: stream the vectors like the Preprocessor
    for (int c = 0; c < n; c++) begin
      for (int k = 0; k < P; k++) begin
        s_word  = '{client: cidx_t'(c), idx: pidx_t'(k), data: fix_t'(d[c][k]), last: (k == P - 1)};
        s_valid = 1;
        @(posedge clk);
        while (!s_ready) @(posedge clk);
        #1 s_valid = 0;
        if ($urandom_range(0, 2) == 0) begin @(posedge clk); #1; end
      end
      fork
        automatic int cc = c;
        begin repeat (40) @(posedge clk); l2_valid[cc] = 1; end
      join_none
    end
    while (!done) @(negedge clk);
    for (int i = 0; i < n; i++)
      for (int j = i + 1; j < n; j++)
        check(seen[i][j] == 1, $sformatf("pair %0d,%0d seen %0d times", i, j, seen[i][j]));
    // first client of the last pass, as the pass rule gives it
    lf = 0;
    while (lf + S + 1 < n) lf += S;
    @(negedge clk);
    for (int c = 0; c < n; c++) begin
      automatic bit exp_hit = (c >= lf && c < lf + S);
      lk_client = cidx_t'(c);
      for (int k = 0; k < P; k++) begin
        lk_idx = pidx_t'(k);
        #1;
        check(lk_hit == exp_hit, $sformatf("client %0d held %0d", c, lk_hit));
        if (exp_hit) check(longint'(lk_data) == d[c][k], $sformatf("read-back client %0d word %0d", c, k));
      end
    end
  endtask

  initial begin
    s_word = '0;
    l2_valid = '0;
    for (int c = 0; c < NC; c++) l2_norm[c] = '0;
    n_clients = '0; n_params = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(8);
    check(max_pass == 2, $sformatf("passes %0d", max_pass + 1));
    check(stall_cycles > 0, "cascade stalled");
    run(2);
    $display("stall cycles %0d, DRAM refusals %0d", stall_cycles, rd_stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
