// flairs_top_tb: end-to-end test of the FLAIRS PE subsystem (word memory
// port, no AXI bridge) at reduced size
// (at most 12 clients, 16 parameters, a 3-stage cascade) with a round of 10
// clients, 3 of them poisoned, and 8 parameters, so that the cascade needs
// several passes and stalls. Stimulus and checks are in flairs_top_env.
module flairs_top_tb;
  import flairs_pkg::*;
  localparam int MC = 12;
  logic clk = 0;
  logic rst_n, start, busy, done;
  cidx_t n_clients, accepted_num, cos_pass;
  pidx_t n_params;
  fix_t lambda, rd_rdata, wr_data;
  logic [31:0] seed;
  addr_t global_base, model_base, diff_base, agg_base, rd_addr, wr_addr;
  logic rd_valid, rd_ready, rd_rvalid, wr_valid, wr_ready, cos_stalled, agg_local;
  logic [MC-1:0] labels;
  ufix_t median;
  // the environment's AXI memory model is unused on the word-port subsystem
  logic m_arvalid = 1'b0, m_awvalid = 1'b0, m_wvalid = 1'b0, m_wlast = 1'b0;
  logic m_rready = 1'b0, m_bready = 1'b0, burst_start = 1'b0;
  logic m_arready, m_rvalid, m_rlast, m_awready, m_wready, m_bvalid;
  logic [63:0] m_araddr = '0, m_awaddr = '0, m_wstrb = '0;
  logic [7:0] m_arlen = '0, m_awlen = '0;
  logic [2:0] m_arsize = '0, m_awsize = '0;
  logic [1:0] m_arburst = '0, m_awburst = '0;
  logic [511:0] m_rdata, m_wdata = '0;

  always #5 clk = ~clk;

  flairs_top #(.MAX_CLIENTS(MC), .MAX_PARAMS(16), .N_STAGES(3)) dut (.*);
  flairs_top_env #(.MAX_CLIENTS(MC), .N_RUN(10), .P_RUN(8), .N_BAD(3), .MAX_CYCLES(200000), .N_STAGES(3)) env (.*);
endmodule
