// flairs_kernel: the complete FLAIRS aggregation kernel as the host sees it,
// with its 512-bit AXI4 memory master.
//
// It joins the PE subsystem (flairs_top: Prep, Cosine, HDBSCAN, Scale and
// Agg PEs, the noise source and the phase controller, with a 32-bit word
// memory port) to the AXI4 burst bridge (axi_burst_bridge), which reads DRAM
// and writes it in 4 KB bursts of 512-bit beats (writes are gathered per block).
// Host side: start/busy/done, the runtime sizes, lambda, the noise seed and
// the four DRAM base addresses (word addresses; the AXI byte address is four
// times the word address). The results the PEs produce along the way
// (labels, accepted count, median, cascade pass and stall, words taken from
// the cascade RAMs) and a pulse per read burst are brought out for
// observation. When the PEs finish, the bridge is told to send the writes it
// is still gathering, and done pulses only after their write response, so
// the host may read the result at once. Widths
// and sizes follow the paper (512-bit AXI4, 4 KB bursts,
// up to 100 clients); MAX_PARAMS and N_STAGES are this design's choices.
module flairs_kernel
  import flairs_pkg::*;
#(
  parameter int MAX_CLIENTS = 100,
  parameter int MAX_PARAMS  = 1024,
  parameter int N_STAGES    = 8,
  parameter int AXI_DW      = 512,
  parameter int AXI_AW      = 64,
  parameter int BURST_BYTES = 4096
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  start,
  input  cidx_t n_clients,
  input  pidx_t n_params,
  input  fix_t  lambda,
  input  logic [31:0] seed,
  input  addr_t global_base,
  input  addr_t model_base,
  input  addr_t diff_base,
  input  addr_t agg_base,
  // AXI4 master
  output logic              m_arvalid,
  input  logic              m_arready,
  output logic [AXI_AW-1:0] m_araddr,
  output logic [7:0]        m_arlen,
  output logic [2:0]        m_arsize,
  output logic [1:0]        m_arburst,
  input  logic              m_rvalid,
  output logic              m_rready,
  input  logic [AXI_DW-1:0] m_rdata,
  input  logic              m_rlast,
  output logic              m_awvalid,
  input  logic              m_awready,
  output logic [AXI_AW-1:0] m_awaddr,
  output logic [7:0]        m_awlen,
  output logic [2:0]        m_awsize,
  output logic [1:0]        m_awburst,
  output logic              m_wvalid,
  input  logic              m_wready,
  output logic [AXI_DW-1:0] m_wdata,
  output logic [AXI_DW/8-1:0] m_wstrb,
  output logic              m_wlast,
  input  logic              m_bvalid,
  output logic              m_bready,
  // status and results
  output logic  busy,
  output logic  done,
  output logic [MAX_CLIENTS-1:0] labels,
  output cidx_t accepted_num,
  output ufix_t median,
  output cidx_t cos_pass,
  output logic  cos_stalled,
  output logic  agg_local,
  output logic  burst_start
);
  logic  rd_valid, rd_ready, rd_rvalid, wr_valid, wr_ready;
  logic  pes_busy, pes_done, wr_idle, done_pend;
  addr_t rd_addr, wr_addr;
  fix_t  rd_rdata, wr_data;

  flairs_top #(.MAX_CLIENTS(MAX_CLIENTS), .MAX_PARAMS(MAX_PARAMS), .N_STAGES(N_STAGES)) u_pes (
    .clk, .rst_n, .start, .n_clients, .n_params, .lambda, .seed,
    .global_base, .model_base, .diff_base, .agg_base,
    .rd_valid, .rd_ready, .rd_addr, .rd_rvalid, .rd_rdata,
    .wr_valid, .wr_ready, .wr_addr, .wr_data,
    .busy(pes_busy), .done(pes_done), .labels, .accepted_num, .median, .cos_pass, .cos_stalled, .agg_local
  );

  axi_burst_bridge #(.AXI_DW(AXI_DW), .AXI_AW(AXI_AW), .BURST_BYTES(BURST_BYTES)) u_axi (
    .clk, .rst_n,
    .rd_valid, .rd_ready, .rd_addr, .rd_rvalid, .rd_rdata,
    .wr_valid, .wr_ready, .wr_addr, .wr_data, .wr_flush(pes_done || done_pend),
    .m_arvalid, .m_arready, .m_araddr, .m_arlen, .m_arsize, .m_arburst,
    .m_rvalid, .m_rready, .m_rdata, .m_rlast,
    .m_awvalid, .m_awready, .m_awaddr, .m_awlen, .m_awsize, .m_awburst,
    .m_wvalid, .m_wready, .m_wdata, .m_wstrb, .m_wlast,
    .m_bvalid, .m_bready,
    .burst_start, .wr_idle
  );

  // done waits until the last aggregated word has its write response
  assign busy = pes_busy || done_pend;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      done_pend <= 1'b0;
      done      <= 1'b0;
    end else begin
      done <= 1'b0;
      if (pes_done) done_pend <= 1'b1;
      if ((pes_done || done_pend) && wr_idle && !wr_valid) begin
        done_pend <= 1'b0;
        done      <= 1'b1;
      end
    end
  end
endmodule
