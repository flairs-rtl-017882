// mt19937_tb: checks the MT19937 generator against the published first output
// for seed 5489 (3499211612) and against a software model of the generator for
// 2000 outputs (crossing the 624-word regeneration three times), with random
// back-pressure, then reseeds and checks again.
module mt19937_tb;
  import flairs_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  logic seed_load = 0;
  logic [31:0] seed = 0;
  logic out_valid, out_ready;
  logic [31:0] out_data;
  int checks = 0, failures = 0;
  int unsigned st[624];
  int idx;

  always #5 clk = ~clk;

  mt19937 dut (.clk, .rst_n, .seed_load, .seed, .out_valid, .out_ready, .out_data);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input int unsigned s, input int count);
    int got;
    int unsigned exp;
    int t0;
    @(negedge clk); seed = s; seed_load = 1;
    @(negedge clk); seed_load = 0;
    mt_seed(st, s); idx = 624;
    t0 = 0;
    // initialisation takes 624 cycles before the first word
    while (!out_valid) begin @(negedge clk); t0++; end
    checks++;
    if (t0 < 623 || t0 > 630) begin failures++; $display("init took %0d cycles", t0); end
    got = 0;
    while (got < count) begin
      out_ready = ($urandom_range(0, 3) != 0);
      @(posedge clk);
      if (out_valid && out_ready) begin
        exp = mt_next(st, idx);
        checks++;
        if (out_data != exp) begin
          failures++;
          if (failures < 10) $display("word %0d: got %0d expected %0d", got, out_data, exp);
        end
        if (s == 5489 && got == 0) begin
          checks++;
          if (out_data != 32'd3499211612) failures++;
        end
        got++;
      end
      @(negedge clk);
    end
    out_ready = 0;
  endtask

  initial begin
    out_ready = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(5489, 2000);
    run(32'h1234_5678, 700);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
