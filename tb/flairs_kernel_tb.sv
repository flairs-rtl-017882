// flairs_kernel_tb: end-to-end test of the whole kernel, PEs plus AXI4
// bridge, at reduced size (at most 12 clients, 16 parameters, a 3-stage
// cascade) with a round of 10 clients, 3 of them poisoned, and 8 parameters,
// so the cascade needs several passes and stalls. Memory is the AXI4 slave
// model with random readiness; stimulus and checks are in flairs_top_env.
module flairs_kernel_tb;
  import flairs_pkg::*;
  logic clk = 0;
  logic rst_n, start, busy, done;
  cidx_t n_clients, accepted_num, cos_pass;
  pidx_t n_params;
  fix_t lambda;
  logic [31:0] seed;
  addr_t global_base, model_base, diff_base, agg_base;
  logic cos_stalled, agg_local;
  logic [11:0] labels;
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
    repeat (500000) @(posedge clk);
    $display("TB_RESULT checks=0 failures=1");
    $finish;
  end

  flairs_kernel #(.MAX_CLIENTS(12), .MAX_PARAMS(16), .N_STAGES(3)) dut (.*);
  flairs_top_env #(.MAX_CLIENTS(12), .N_RUN(10), .P_RUN(8), .N_BAD(3), .MAX_CYCLES(400000), .N_STAGES(3), .USE_AXI(1'b1)) env (.*);
endmodule
