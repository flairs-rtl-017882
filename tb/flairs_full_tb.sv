// flairs_full_tb: one complete aggregation round on the FLAIRS kernel with
// every parameter at its default (100 client slots, 1024 parameter slots, an
// 8-stage cascade, 512-bit AXI4 with 4 KB bursts). The round uses all 100
// clients and all 1024 parameters, 20 of the clients poisoned, so the cascade
// runs 13 passes. Memory is the AXI4 slave model. Stimulus and checks are in
// flairs_top_env.
module flairs_full_tb;
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
    repeat (31000000) @(posedge clk);
    $display("TB_RESULT checks=0 failures=1");
    $finish;
  end

  flairs_kernel dut (.*);
  flairs_top_env #(.MAX_CLIENTS(100), .N_RUN(100), .P_RUN(1024), .N_BAD(20), .MAX_CYCLES(30000000), .EXPECT_STALL(1'b0), .USE_AXI(1'b1)) env (.*);
endmodule
