// hdbscan_pe_tb: HDBSCAN PE. Distances are written through the dw_* port,
// then clustering runs. Cases: (1) a planted majority cluster of 7 of 10
// models with small mutual distances and 3 outliers, which must be labelled
// 0; (2) random symmetric matrices for several n, checked against a reference
// that runs Kruskal's algorithm over all pairs (not over a spanning tree) and
// stops when a component reaches n/2+1 models; (3) n = 1. Labels and
// accepted_num are compared; the cycle count is checked to be within 4 n^2.
module hdbscan_pe_tb;
  import flairs_pkg::*;
  localparam int NC = 12;
  logic clk = 0, rst_n = 0, start = 0;
  logic dw_valid = 0;
  cidx_t dw_i = 0, dw_j = 0;
  ufix_t dw_dist = 0;
  cidx_t n_clients;
  logic [NC-1:0] labels;
  cidx_t accepted_num;
  logic busy, done;
  int checks = 0, failures = 0;
  longint dm [NC][NC];

  always #5 clk = ~clk;

  hdbscan_pe #(.MAX_CLIENTS(NC)) dut (.*);

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

  function automatic void reference(input int n, output logic [NC-1:0] lab, output int acc);
    int comp [NC];
    int sz [NC];
    int need, bi, bj, a, b;
    longint bw;
    need = n / 2 + 1;
    for (int i = 0; i < n; i++) begin comp[i] = i; sz[i] = 1; end
    lab = '0;
    if (need <= 1) begin lab[0] = 1; acc = 1; return; end
    forever begin
      bw = -1;
      for (int i = 0; i < n; i++)
        for (int j = i + 1; j < n; j++)
          if (comp[i] != comp[j] && (bw < 0 || dm[i][j] < bw)) begin bw = dm[i][j]; bi = i; bj = j; end
      a = comp[bi]; b = comp[bj];
      for (int i = 0; i < n; i++) if (comp[i] == b) comp[i] = a;
      sz[a] += sz[b];
      if (sz[a] >= need) begin
        for (int i = 0; i < n; i++) lab[i] = (comp[i] == a);
        acc = sz[a];
        return;
      end
    end
  endfunction

  task automatic run(input int n, input string name);
    logic [NC-1:0] exp_lab;
    int exp_acc, cyc;
    for (int i = 0; i < n; i++)
      for (int j = i + 1; j < n; j++) begin
        @(negedge clk);
        dw_valid = 1; dw_i = cidx_t'(i); dw_j = cidx_t'(j); dw_dist = ufix_t'(dm[i][j]);
      end
    @(negedge clk); dw_valid = 0;
    n_clients = cidx_t'(n);
    start = 1; @(negedge clk); start = 0;
    cyc = 0;
    while (!done) begin @(negedge clk); cyc++; end
    reference(n, exp_lab, exp_acc);
    check(labels == exp_lab, $sformatf("%s labels %b expected %b", name, labels, exp_lab));
    check(int'(accepted_num) == exp_acc, $sformatf("%s accepted %0d expected %0d", name, accepted_num, exp_acc));
    check(cyc <= 4 * n * n + 10, $sformatf("%s took %0d cycles", name, cyc));
  endtask

  initial begin
    n_clients = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // (1) planted cluster: models 0,2,3,5,6,9 benign; 1,4,7,8 poisoned
    for (int i = 0; i < 10; i++)
      for (int j = 0; j < 10; j++) begin
        automatic bit bi = !(i == 1 || i == 4 || i == 7 || i == 8);
        automatic bit bj = !(j == 1 || j == 4 || j == 7 || j == 8);
        dm[i][j] = (bi && bj) ? 3000 + (i * 7 + j * 13) % 500 : 60000 + (i * 11 + j * 3) % 900;
      end
    for (int i = 0; i < 10; i++) for (int j = 0; j < i; j++) dm[i][j] = dm[j][i];
    run(10, "planted");
    check(labels[9:0] == 10'b1001101101, $sformatf("planted labels %b", labels[9:0]));
    // (2) random matrices
    for (int t = 0; t < 6; t++) begin
      automatic int n = 2 + t * 2;
      for (int i = 0; i < n; i++)
        for (int j = i + 1; j < n; j++) dm[i][j] = longint'($urandom_range(0, 131071));
      run(n, $sformatf("random n=%0d", n));
    end
    // (3) single model
    run(1, "n=1");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
