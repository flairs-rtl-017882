// scale_pe_tb: Scale PE. Random L2 norms (including repeated values and a
// zero) for odd and even client counts; the test checks the median (middle
// value for odd n, mean of the two middle values for even n, from a software
// sort) and every scale min(1, S_t / norm) bit-exactly, and that both the
// clipping case (scale < 1) and the pass-through case (scale = 1) occur.
module scale_pe_tb;
  import flairs_pkg::*;
  import flairs_ref_pkg::*;
  localparam int NC = 16;
  logic clk = 0, rst_n = 0, start = 0;
  cidx_t n_clients;
  ufix_t l2_norm [NC];
  ufix_t median;
  ufix_t scales [NC];
  logic busy, done;
  int checks = 0, failures = 0, clipped = 0, unclipped = 0;

  always #5 clk = ~clk;

  scale_pe #(.MAX_CLIENTS(NC)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  task automatic run(input int n);
    longint v [$];
    longint med, sc;
    for (int c = 0; c < NC; c++) l2_norm[c] = '0;
    for (int c = 0; c < n; c++) begin
      l2_norm[c] = ufix_t'($urandom_range(1, 8 * 65536));
      if (c == 3) l2_norm[c] = l2_norm[1];   // a repeated value
      if (c == 5) l2_norm[c] = '0;           // a zero-length update
      v.push_back(longint'(l2_norm[c]));
    end
    v.sort();
    med = (n % 2) ? v[n/2] : (v[n/2-1] + v[n/2]) / 2;
    n_clients = cidx_t'(n);
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    check(longint'(median) == med, $sformatf("n=%0d median got %0d exp %0d", n, median, med));
    for (int c = 0; c < n; c++) begin
      sc = clip_scale(med, longint'(l2_norm[c]));
      check(longint'(scales[c]) == sc, $sformatf("n=%0d scale %0d got %0d exp %0d", n, c, scales[c], sc));
      if (sc < ONE) clipped++; else unclipped++;
    end
  endtask

  initial begin
    n_clients = '0;
    for (int c = 0; c < NC; c++) l2_norm[c] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(11);
    run(16);
    run(10);
    run(1);
    run(2);
    check(clipped > 0 && unclipped > 0, "both clipping cases seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
