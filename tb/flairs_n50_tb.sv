// flairs_n50_tb: a 50-client round (the paper's mid-size evaluation point)
// with 1024 parameters on the kernel at its default sizes, over AXI4; 10
// clients are poisoned. Stimulus and checks are in flairs_top_env. The two
// clients the last cascade pass keeps (48 and 49) fall outside the majority
// cluster in this round, so no word is taken from the cascade RAMs; the env
// still checks that this count is exactly right (zero).
module flairs_n50_tb;
  import flairs_pkg::*;
  logic clk = 0;
  logic rst_n, start, busy, done;
  cidx_t n_clients, accepted_num, cos_pass;
  pidx_t n_params;
  fix_t lambda;
  logic [31:0] seed;
  addr_t global_base, model_base, diff_base, agg_base;
  logic cos_stalled, agg_local;
  logic [99:0] labels;
  ufix_t median;
  // AXI4 bus between kernel and memory model
  logic m_arvalid, m_arready, m_rvalid, m_rready, m_rlast;
  logic m_awvalid, m_awready, m_wvalid, m_wready, m_wlast, m_bvalid, m_bready;
  logic [63:0] m_araddr, m_awaddr, m_wstrb;
  logic [7:0] m_arlen, m_awlen;
  logic [2:0] m_arsize, m_awsize;
  logic [1:0] m_arburst, m_awburst;
  logic [511:0] m_rdata, m_wdata;
  logic burst_start;
  // the environment's word-port memory is unused on the AXI kernel
  logic rd_valid = 1'b0, wr_valid = 1'b0, rd_ready, rd_rvalid, wr_ready;
  addr_t rd_addr = '0, wr_addr = '0;
  fix_t rd_rdata, wr_data = '0;

  always #5 clk = ~clk;

  // backstop: the environment has its own, earlier watchdog
  initial begin
    repeat (16000000) @(posedge clk);
    $display("TB_RESULT checks=0 failures=1");
    $finish;
  end

  flairs_kernel dut (.*);
  flairs_top_env #(.MAX_CLIENTS(100), .N_RUN(50), .P_RUN(1024), .N_BAD(10), .MAX_CYCLES(15000000), .EXPECT_STALL(1'b0), .EXPECT_LOCAL(1'b0), .USE_AXI(1'b1)) env (.*);
endmodule
