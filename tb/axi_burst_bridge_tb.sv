// axi_burst_bridge_tb: the word-to-AXI4 bridge against the AXI memory model
// (random AR/R/AW/W readiness). The test keeps a shadow copy of memory and
//   1. reads one whole 4 KB block word by word: every word must match and
//      exactly one read burst may be issued for it;
//   2. writes words inside the buffered block and reads them back at once
//      (write-through: no new burst, new values returned);
//   3. writes 200 scattered words of one block with no reads in between,
//      flushes, and expects exactly one write burst carrying all 200 words;
//   4. runs 3000 random reads and writes over four blocks, checking every
//      read against the shadow copy (reads of a block still being gathered
//      must force its flush first), flushes, and checks memory at the end;
// and requires that the model saw no protocol error (burst length, size,
// alignment, WLAST, partial lanes) and that read bursts, buffer hits,
// write-through updates and write combining all occurred.
module axi_burst_bridge_tb;
  import flairs_pkg::*;
  localparam int WORDS = 4096, BLK = 1024;
  logic clk = 0, rst_n = 0;
  logic rd_valid = 0, rd_ready, rd_rvalid, wr_valid = 0, wr_ready;
  addr_t rd_addr = '0, wr_addr = '0;
  fix_t rd_rdata, wr_data = '0;
  logic m_arvalid, m_arready, m_rvalid, m_rready, m_rlast;
  logic [63:0] m_araddr, m_awaddr;
  logic [7:0] m_arlen, m_awlen;
  logic [2:0] m_arsize, m_awsize;
  logic [1:0] m_arburst, m_awburst;
  logic [511:0] m_rdata, m_wdata;
  logic [63:0] m_wstrb;
  logic m_awvalid, m_awready, m_wvalid, m_wready, m_wlast, m_bvalid, m_bready;
  logic burst_start, wr_idle, wr_flush = 0;
  int bursts, beats, words_written, wbursts, ar_stalls, proto_errors;
  int checks = 0, failures = 0, hits = 0, wt_hits = 0, reads = 0;
  logic [31:0] shadow [WORDS];

  always #5 clk = ~clk;

  axi_burst_bridge dut (.*);
  axi_mem_model #(.WORDS(WORDS)) mem (.*);

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  task automatic rd(input int a);
    int b0 = bursts;
    rd_addr = addr_t'(a);
    rd_valid = 1;
    @(posedge clk);
    while (!rd_ready) @(posedge clk);
    #1 rd_valid = 0;
    while (!rd_rvalid) begin @(posedge clk); #1; end
    reads++;
    if (bursts == b0) hits++;
    check(rd_rdata == shadow[a], $sformatf("read %0d got %h exp %h", a, rd_rdata, shadow[a]));
  endtask

  task automatic wr(input int a, input logic [31:0] v);
    wr_addr = addr_t'(a);
    wr_data = v;
    wr_valid = 1;
    @(posedge clk);
    while (!wr_ready) @(posedge clk);
    if (dut.wr_hit) wt_hits++;
    #1 wr_valid = 0;
    shadow[a] = v;
  endtask

  initial begin
    int b0, wb0, ww0;
    for (int i = 0; i < WORDS; i++) begin
      shadow[i] = $urandom;
      mem.mem[i] = shadow[i];
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    // 1. one block, sequentially
    b0 = bursts;
    for (int a = BLK; a < 2 * BLK; a++) rd(a);
    check(bursts - b0 == 1, $sformatf("bursts for one block: %0d", bursts - b0));
    // 2. write-through
    b0 = bursts;
    for (int a = BLK + 5; a < BLK + 40; a += 7) begin
      wr(a, $urandom);
      rd(a);
    end
    check(bursts == b0, "write-through reads needed no burst");
    // 3. one block of writes goes out as one burst
    wr_flush = 1;
    while (!wr_idle) @(posedge clk);
    #1 wr_flush = 0;
    wb0 = wbursts;
    ww0 = words_written;
    for (int j = 0; j < 200; j++) wr(3 * BLK + (j * 37) % BLK, $urandom);
    repeat (20) @(posedge clk);
    check(wbursts == wb0, "nothing sent before the flush");
    #1 wr_flush = 1;
    while (!wr_idle) @(posedge clk);
    #1 wr_flush = 0;
    check(wbursts - wb0 == 1 && words_written - ww0 == 200,
          $sformatf("gathered block: %0d bursts, %0d words", wbursts - wb0, words_written - ww0));
    for (int j = 0; j < 200; j += 13) rd(3 * BLK + (j * 37) % BLK);
    // 4. random mix
    for (int t = 0; t < 3000; t++) begin
      automatic int a = ($urandom_range(0, 3) == 0) ? int'($urandom_range(0, WORDS - 1))
                                                    : BLK * int'($urandom_range(0, 3)) + int'($urandom_range(0, 63));
      if ($urandom_range(0, 2) == 0) wr(a, $urandom);
      else rd(a);
    end
    #1 wr_flush = 1;
    while (!wr_idle) @(posedge clk);
    #1 wr_flush = 0;
    repeat (2) @(posedge clk);
    for (int i = 0; i < WORDS; i++)
      if (mem.mem[i] != shadow[i]) check(1'b0, $sformatf("memory word %0d", i));
    check(proto_errors == 0, $sformatf("%0d AXI protocol errors", proto_errors));
    check(beats == 64 * bursts, $sformatf("beats %0d for %0d bursts", beats, bursts));
    check(hits > 0 && wt_hits > 0 && bursts > 1, "hits, write-through and bursts all happened");
    check(wbursts > 1 && wbursts < words_written, $sformatf("%0d write bursts for %0d words", wbursts, words_written));
    $display("reads %0d, buffer hits %0d, read bursts %0d, words written %0d in %0d bursts (%0d into the read line), AR refusals %0d",
             reads, hits, bursts, words_written, wbursts, wt_hits, ar_stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
