// prep_pe_tb: Preprocessor PE test. Random global and local models are placed
// in the DRAM model (with random request refusal); the test checks every
// differential word on the stream (client, index, value, last flag), every
// differential word written back to DRAM, each client's L2 norm against
// floor(sqrt(sum d^2)) and the on-chip copy of the global model. The stream
// sink applies random back-pressure, and the run is repeated with a second
// client count.
module prep_pe_tb;
  import flairs_pkg::*;
  import flairs_ref_pkg::*;
  localparam int WORDS = 2048;
  logic clk = 0, rst_n = 0, start = 0;
  cidx_t n_clients;
  pidx_t n_params;
  addr_t global_base = 0, model_base = 64, diff_base = 1024;
  logic rd_valid, rd_ready, rd_rvalid, wr_valid, wr_ready;
  addr_t rd_addr, wr_addr;
  fix_t rd_rdata, wr_data;
  logic s_valid, s_ready;
  dvec_word_t s_word;
  logic norm_valid;
  cidx_t norm_idx;
  ufix_t norm_value;
  pidx_t g_raddr;
  fix_t g_rdata;
  logic busy, done;
  int rd_stalls, wr_count;
  int checks = 0, failures = 0;
  longint gm [64];
  longint wm [16][64];
  longint sq [16];
  int norms_seen;
  int exp_client, exp_idx;

  always #5 clk = ~clk;

  prep_pe dut (.*);
  dram_model #(.WORDS(WORDS)) mem (.clk, .rd_valid, .rd_ready, .rd_addr, .rd_rvalid, .rd_rdata,
    .wr_valid, .wr_ready, .wr_addr, .wr_data, .rd_stalls, .wr_count);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  // stream monitor
  always @(posedge clk) begin
    s_ready <= ($urandom_range(0, 3) != 0);
    if (s_valid && s_ready) begin
      longint d;
      d = wm[exp_client][exp_idx] - gm[exp_idx];
      check(s_word.client == cidx_t'(exp_client) && s_word.idx == pidx_t'(exp_idx), "stream order");
      check(longint'(s_word.data) == d, $sformatf("stream value c%0d k%0d got %0d exp %0d", exp_client, exp_idx, s_word.data, d));
      check(s_word.last == (exp_idx == int'(n_params) - 1), "last flag");
      if (exp_idx == int'(n_params) - 1) begin exp_idx = 0; exp_client++; end
      else exp_idx++;
    end
    if (norm_valid) begin
      check(norm_value == ufix_t'(isqrt(longint'(sq[norm_idx]))),
            $sformatf("norm %0d got %0d exp %0d", norm_idx, norm_value, isqrt(longint'(sq[norm_idx]))));
      check(int'(norm_idx) == norms_seen, "norm order");
      norms_seen++;
    end
  end

  task automatic run(input int n, input int p);
    n_clients = cidx_t'(n);
    n_params  = pidx_t'(p);
    for (int k = 0; k < p; k++) begin
      gm[k] = longint'($urandom_range(0, 2 * 65536)) - 65536;
      mem.mem[global_base + k] = fix_t'(gm[k]);
    end
    for (int c = 0; c < n; c++) begin
      sq[c] = 0;
      for (int k = 0; k < p; k++) begin
        wm[c][k] = gm[k] + longint'($urandom_range(0, 65536)) - 32768;
        mem.mem[model_base + c * p + k] = fix_t'(wm[c][k]);
        sq[c] += (wm[c][k] - gm[k]) * (wm[c][k] - gm[k]);
      end
    end
    exp_client = 0; exp_idx = 0; norms_seen = 0;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    check(norms_seen == n, "all norms reported");
    check(exp_client == n, "all vectors streamed");
    for (int c = 0; c < n; c++)
      for (int k = 0; k < p; k++)
        check(longint'(mem.mem[diff_base + c * p + k]) == wm[c][k] - gm[k], "diff written to DRAM");
    for (int k = 0; k < p; k++) begin
      g_raddr = pidx_t'(k);
      #1;
      check(longint'(g_rdata) == gm[k], "global model on chip");
    end
  endtask

  initial begin
    g_raddr = '0;
    n_clients = '0; n_params = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(5, 24);
    run(3, 4);       // short vectors: square root overlaps and must wait
    $display("DRAM read stalls %0d", rd_stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
