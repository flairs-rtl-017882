// gauss_noise_tb: checks each noise sample bit-exactly against
// sum(upper 16 bits of 12 MT19937 words) - 6.0 computed from a software
// MT19937, and checks that 3000 samples have mean near 0 and variance near 1
// (the N(0,1) the Aggregation PE expects). Random back-pressure on z_ready.
module gauss_noise_tb;
  import flairs_pkg::*;
  import flairs_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  logic seed_load = 0;
  logic [31:0] seed = 0;
  logic z_valid, z_ready;
  fix_t z_data;
  int checks = 0, failures = 0;
  int unsigned st[624];
  int idx;
  real sum = 0, sumsq = 0, mean, var_z;

  always #5 clk = ~clk;

  gauss_noise dut (.clk, .rst_n, .seed_load, .seed, .z_valid, .z_ready, .z_data);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int got;
    longint exp;
    z_ready = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk); seed = 32'd42; seed_load = 1;
    @(negedge clk); seed_load = 0;
    mt_seed(st, 42); idx = 624;
    got = 0;
    while (got < 3000) begin
      z_ready = ($urandom_range(0, 2) != 0);
      @(posedge clk);
      if (z_valid && z_ready) begin
        exp = 0;
        for (int t = 0; t < 12; t++) exp += longint'(mt_next(st, idx) >> 16);
        exp -= 6 * ONE;
        checks++;
        if (longint'(z_data) != exp) begin
          failures++;
          if (failures < 10) $display("sample %0d: got %0d expected %0d", got, z_data, exp);
        end
        sum   += real'(z_data) / 65536.0;
        sumsq += (real'(z_data) / 65536.0) ** 2;
        got++;
      end
      @(negedge clk);
    end
    mean  = sum / 3000.0;
    var_z = sumsq / 3000.0 - mean * mean;
    $display("mean %f variance %f", mean, var_z);
    checks++;
    if (mean > 0.1 || mean < -0.1) failures++;
    checks++;
    if (var_z < 0.85 || var_z > 1.15) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
