// agg_pe_tb: Aggregation PE. Random differential vectors in the DRAM model,
// random labels (accepted models are the label-1 ones), random clip scales
// (some 1.0, some below), a random global model and a noise stream fed by the
// test. For every parameter k the test checks the written value
//   sum_{label 1}(g[k] + (d_i[k]*scale_i >> 16)) / accepted  +  (lambda*z_k >> 16)
// bit-exactly (division truncating toward zero). The test plays the cascade
// RAMs on the lk_* port: odd-numbered clients are "held" there, so their
// words must be taken from that port and never read from DRAM. It checks that
// only label-1 models that are not held were read, that local_word pulsed once
// per word of every accepted held model, and runs a second time with
// lambda = 0.
module agg_pe_tb;
  import flairs_pkg::*;
  import flairs_ref_pkg::*;
  localparam int NC = 8, P = 12;
  logic clk = 0, rst_n = 0, start = 0;
  cidx_t n_clients;
  pidx_t n_params;
  addr_t diff_base = 0, agg_base = 200;
  fix_t lambda;
  logic [NC-1:0] labels;
  cidx_t accepted_num;
  ufix_t scales [NC];
  pidx_t g_raddr;
  fix_t g_rdata;
  logic rd_valid, rd_ready, rd_rvalid, wr_valid, wr_ready;
  addr_t rd_addr, wr_addr;
  fix_t rd_rdata, wr_data;
  logic z_valid, z_ready;
  fix_t z_data;
  cidx_t lk_client;
  pidx_t lk_idx;
  logic lk_hit, local_word;
  fix_t lk_data;
  int locals = 0, exp_locals = 0;
  logic busy, done;
  int rd_stalls, wr_count;
  int checks = 0, failures = 0, bad_reads = 0, reads = 0;
  longint g [P];
  longint d [NC][P];
  longint z [$];
  int zi;

  always #5 clk = ~clk;
  assign g_rdata = fix_t'(g[g_raddr]);
  assign lk_hit  = lk_client[0];
  assign lk_data = (int'(lk_client) < NC && int'(lk_idx) < P) ? fix_t'(d[lk_client][lk_idx]) : '0;

  agg_pe #(.MAX_CLIENTS(NC)) dut (.*);
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

  // noise source: a new random sample whenever the last one was taken
  always @(posedge clk) begin
    if (!rst_n) begin
      z_valid <= 1'b0;
    end else begin
      if (z_valid && z_ready) begin
        z.push_back(longint'(z_data));
        z_valid <= 1'b0;
      end else if (!z_valid && $urandom_range(0, 1)) begin
        z_valid <= 1'b1;
        z_data  <= fix_t'(longint'($urandom_range(0, 6 * 65536)) - 3 * 65536);
      end
      if (local_word) locals++;
      if (rd_valid && rd_ready) begin
        reads++;
        if (!labels[(rd_addr - diff_base) / P] || ((rd_addr - diff_base) / P) % 2 == 1) bad_reads++;
      end
    end
  end

  task automatic run(input int n, input longint lam);
    int acc_n = 0;
    longint sum, exp;
    n_clients = cidx_t'(n);
    n_params  = pidx_t'(P);
    lambda    = fix_t'(lam);
    labels    = '0;
    for (int k = 0; k < P; k++) g[k] = longint'($urandom_range(0, 4 * 65536)) - 2 * 65536;
    for (int c = 0; c < n; c++) begin
      labels[c] = ($urandom_range(0, 3) != 0) || c == 0;
      if (labels[c]) acc_n++;
      if (labels[c] && c % 2 == 1) exp_locals += P;
      scales[c] = (c % 3 == 0) ? ONE : ufix_t'($urandom_range(1000, 65535));
      for (int k = 0; k < P; k++) begin
        d[c][k] = longint'($urandom_range(0, 65536)) - 32768;
        mem.mem[diff_base + c * P + k] = fix_t'(d[c][k]);
      end
    end
    accepted_num = cidx_t'(acc_n);
    z.delete();
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    @(negedge clk);
    check(z.size() == P, $sformatf("noise samples used %0d", z.size()));
    for (int k = 0; k < P; k++) begin
      sum = 0;
      for (int c = 0; c < n; c++)
        if (labels[c]) sum += g[k] + fmul(d[c][k], longint'(scales[c]));
      exp = sdiv(sum, acc_n) + fmul(lam, z[k]);
      check(longint'(mem.mem[agg_base + k]) == exp,
            $sformatf("k=%0d got %0d exp %0d", k, mem.mem[agg_base + k], exp));
    end
  endtask

  initial begin
    n_clients = '0; n_params = '0; lambda = '0; labels = '0; accepted_num = '0;
    for (int c = 0; c < NC; c++) scales[c] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(8, 65536 / 100);      // lambda = 0.01
    run(5, 0);
    check(bad_reads == 0, $sformatf("%0d reads of rejected models", bad_reads));
    check(reads > 0, "reads happened");
    check(locals == exp_locals && locals > 0, $sformatf("words from the cascade %0d expected %0d", locals, exp_locals));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
