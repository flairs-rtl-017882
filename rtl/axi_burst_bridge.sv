// axi_burst_bridge: connects the kernel's 32-bit word memory ports to a wide
// AXI4 memory-mapped master, moving DRAM data in long bursts.
//
// The FLAIRS kernel talks to DRAM through an AXI4 master that is AXI_DW = 512
// bits wide and moves BURST_BYTES = 4096 bytes per burst. The PEs themselves
// ask for one 32-bit word at a time (word addresses). This bridge turns those
// requests into AXI4 traffic:
//   - Reads go through a line buffer that holds one aligned 4 KB block
//     (64 beats of 512 bits). A read that hits the block is answered from the
//     buffer one cycle after it is accepted. A miss fetches the whole block
//     with one INCR burst (ARLEN = 63, ARSIZE = 64 bytes) and then answers.
//   - Writes are gathered in a write buffer that also covers one aligned 4 KB
//     block, with a byte-strobe mask. The buffer is sent as one 64-beat INCR
//     burst (beats with no written word carry WSTRB = 0) when a write to
//     another block arrives, when a read misses on the block being gathered,
//     or when wr_flush is raised. A write that falls in the read line's block
//     also updates the line (write-through), so later reads see it.
//   - AXI4 does not order reads against writes, so a read miss on the block
//     being gathered first flushes it and waits for its B response; a miss on
//     another block waits only for a burst that is still in flight.
// Bursts follow the paper's interface settings; the two buffers and the
// flush policy are this design's choices (the original kernel's HLS tool
// generated its own adapter). Byte address = 4 * word address. wr_idle is
// high when nothing is gathered and no burst is in flight, so the kernel
// signals done only then. RRESP and BRESP are not checked. One read burst and
// one write burst are in flight at most.
module axi_burst_bridge
  import flairs_pkg::*;
#(
  parameter int AXI_DW      = 512,
  parameter int AXI_AW      = 64,
  parameter int BURST_BYTES = 4096
) (
  input  logic  clk,
  input  logic  rst_n,
  // word side (from the kernel)
  input  logic  rd_valid,
  output logic  rd_ready,
  input  addr_t rd_addr,
  output logic  rd_rvalid,
  output fix_t  rd_rdata,
  input  logic  wr_valid,
  output logic  wr_ready,
  input  addr_t wr_addr,
  input  fix_t  wr_data,
  input  logic  wr_flush,     // send the gathered writes now
  // AXI4 read address / data
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
  // AXI4 write address / data / response
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
  // status
  output logic              burst_start,  // pulses when a read burst is issued
  output logic              wr_idle       // nothing gathered, no write burst in flight
);
  localparam int LANES = AXI_DW / DATA_W;             // words per beat (16)
  localparam int BEATS = BURST_BYTES / (AXI_DW / 8);  // beats per burst (64)
  localparam int LW    = $clog2(LANES);
  localparam int BW    = $clog2(BEATS);
  localparam int OFS_W = LW + BW;                     // word offset in a block
  localparam int TAG_W = ADDR_W - OFS_W;

  typedef enum logic [1:0] {RD_IDLE, RD_AR, RD_DATA} rstate_t;
  typedef enum logic [1:0] {WR_IDLE, WR_SEND, WR_RESP} wstate_t;
  rstate_t rstate;
  wstate_t wstate;

  logic [AXI_DW-1:0] lbuf [BEATS];
  logic              tag_ok;
  logic [TAG_W-1:0]  tag;
  logic [BW-1:0]     beat;
  logic [AXI_DW-1:0]   wbuf [BEATS];
  logic [BEATS-1:0][AXI_DW/8-1:0] wmask;
  logic                wb_any;                         // something gathered
  logic [TAG_W-1:0]    wtag;
  logic [BW-1:0]       wbeat;
  logic                aw_done;

  logic rd_hit, wr_hit, wr_valid_hit_now, wr_same, rd_on_wblk, flush_now;
  assign rd_hit = tag_ok && (rd_addr[ADDR_W-1:OFS_W] == tag);
  assign wr_hit = tag_ok && (wr_addr[ADDR_W-1:OFS_W] == tag);
  assign wr_same    = !wb_any || (wr_addr[ADDR_W-1:OFS_W] == wtag);
  assign rd_on_wblk = wb_any && (rd_addr[ADDR_W-1:OFS_W] == wtag);
  // a write into the read line's block is taken first, so a read never races it
  assign wr_valid_hit_now = wr_valid && wr_ready && wr_hit;
  assign flush_now = (wstate == WR_IDLE) && wb_any && !(wr_valid && wr_ready) &&
                     (wr_flush || (wr_valid && !wr_same) ||
                      (rstate == RD_IDLE && rd_valid && !rd_hit && rd_on_wblk));

  // ---- read side ----
  assign rd_ready  = (rstate == RD_IDLE) && rd_hit && !wr_valid_hit_now;
  assign m_arvalid = (rstate == RD_AR);
  assign m_araddr  = AXI_AW'({rd_addr[ADDR_W-1:OFS_W], OFS_W'(0), 2'b00});
  assign m_arlen   = 8'(BEATS - 1);
  assign m_arsize  = 3'($clog2(AXI_DW / 8));
  assign m_arburst = 2'b01;                           // INCR
  assign m_rready  = (rstate == RD_DATA);
  assign burst_start = m_arvalid && m_arready;
  assign wr_idle     = (wstate == WR_IDLE) && !wb_any;


  // ---- write side ----
  assign wr_ready  = (wstate == WR_IDLE) && (rstate == RD_IDLE) && wr_same;
  assign m_awvalid = (wstate != WR_IDLE) && !aw_done;       // AW may trail W
  assign m_awaddr  = AXI_AW'({wtag, OFS_W'(0), 2'b00});
  assign m_awlen   = 8'(BEATS - 1);
  assign m_awsize  = 3'($clog2(AXI_DW / 8));
  assign m_awburst = 2'b01;
  assign m_wvalid  = (wstate == WR_SEND);
  assign m_wdata   = wbuf[wbeat];
  assign m_wstrb   = wmask[wbeat];
  assign m_wlast   = (wbeat == BW'(BEATS - 1));
  assign m_bready  = (wstate == WR_RESP);

  always_ff @(posedge clk) begin
    if (wr_valid && wr_ready)
      wbuf[wr_addr[OFS_W-1:LW]][DATA_W * wr_addr[LW-1:0] +: DATA_W] <= wr_data;
  end

  always_ff @(posedge clk) begin
    if (m_rvalid && m_rready) lbuf[beat] <= m_rdata;
    else if (wr_valid_hit_now)
      lbuf[wr_addr[OFS_W-1:LW]][DATA_W * wr_addr[LW-1:0] +: DATA_W] <= wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rstate    <= RD_IDLE;
      wstate    <= WR_IDLE;
      tag_ok    <= 1'b0;
      tag       <= '0;
      beat      <= '0;
      rd_rvalid <= 1'b0;
      rd_rdata  <= '0;
      wb_any    <= 1'b0;
      wmask     <= '0;
      wtag      <= '0;
      wbeat     <= '0;
      aw_done   <= 1'b0;
    end else begin
      rd_rvalid <= 1'b0;
      unique case (rstate)
        RD_IDLE: begin
          if (rd_valid && rd_ready) begin
            rd_rdata <= lbuf[rd_addr[OFS_W-1:LW]][DATA_W * rd_addr[LW-1:0] +: DATA_W];
            rd_rvalid <= 1'b1;
          end else if (rd_valid && !rd_hit && wstate == WR_IDLE && !wr_valid && !rd_on_wblk) begin
            tag_ok <= 1'b0;
            rstate <= RD_AR;
          end
        end
        RD_AR: if (m_arready) begin
          tag    <= rd_addr[ADDR_W-1:OFS_W];
          beat   <= '0;
          rstate <= RD_DATA;
        end
        RD_DATA: if (m_rvalid) begin
          beat <= beat + 1'b1;
          if (m_rlast) begin
            tag_ok <= 1'b1;
            rstate <= RD_IDLE;
          end
        end
        default: rstate <= RD_IDLE;
      endcase

      unique case (wstate)
        WR_IDLE: begin
          if (wr_valid && wr_ready) begin
            wb_any <= 1'b1;
            wtag   <= wr_addr[ADDR_W-1:OFS_W];
            wmask[wr_addr[OFS_W-1:LW]][4 * wr_addr[LW-1:0] +: 4] <= 4'hf;
          end else if (flush_now) begin
            wbeat   <= '0;
            aw_done <= 1'b0;
            wstate  <= WR_SEND;
          end
        end
        WR_SEND: begin
          if (m_awvalid && m_awready) aw_done <= 1'b1;
          if (m_wready) begin
            wbeat <= wbeat + 1'b1;
            if (m_wlast) wstate <= WR_RESP;
          end
        end
        WR_RESP: begin
          if (m_awvalid && m_awready) aw_done <= 1'b1;
          if (m_bvalid && (aw_done || m_awready)) begin
            wb_any <= 1'b0;
            wmask  <= '0;
            wstate <= WR_IDLE;
          end
        end
        default: wstate <= WR_IDLE;
      endcase
    end
  end

  a_ar_hold: assert property (@(posedge clk) disable iff (!rst_n)
    m_arvalid && !m_arready |=> m_arvalid && $stable(m_araddr));
  a_aw_hold: assert property (@(posedge clk) disable iff (!rst_n)
    m_awvalid && !m_awready |=> m_awvalid && $stable(m_awaddr));
  a_w_hold: assert property (@(posedge clk) disable iff (!rst_n)
    m_wvalid && !m_wready |=> m_wvalid && $stable(m_wdata) && $stable(m_wstrb) && $stable(m_wlast));
endmodule
