// dram_model: behavioural model of the off-chip DRAM used by the testbenches.
//
// Not synthesizable design logic: a word array with the kernel's simple
// memory protocol. A read request is accepted (rd_ready) on a random subset
// of cycles, at about STALL_PCT percent of cycles it is refused, and the data
// returns on rd_rvalid 1 to 3 cycles after acceptance. Writes are accepted
// with the same random refusal. Only one read may be outstanding, which the
// kernel guarantees. rd_stalls counts cycles with a refused request.
module dram_model
  import flairs_pkg::*;
#(
  parameter int WORDS     = 4096,
  parameter int STALL_PCT = 25
) (
  input  logic  clk,
  input  logic  rd_valid,
  output logic  rd_ready,
  input  addr_t rd_addr,
  output logic  rd_rvalid,
  output fix_t  rd_rdata,
  input  logic  wr_valid,
  output logic  wr_ready,
  input  addr_t wr_addr,
  input  fix_t  wr_data,
  output int    rd_stalls,
  output int    wr_count
);
  fix_t  mem [WORDS];
  int    lat;
  addr_t pend_addr;
  logic  pend;

  initial begin
    rd_ready  = 1'b0;
    wr_ready  = 1'b0;
    rd_rvalid = 1'b0;
    rd_rdata  = '0;
    rd_stalls = 0;
    wr_count  = 0;
    pend      = 1'b0;
    lat       = 0;
    pend_addr = '0;
    for (int a = 0; a < WORDS; a++) mem[a] = '0;
  end

  always @(posedge clk) begin
    rd_rvalid <= 1'b0;
    if (pend) begin
      if (lat <= 1) begin
        rd_rvalid <= 1'b1;
        rd_rdata  <= mem[pend_addr];
        pend      <= 1'b0;
      end else lat <= lat - 1;
    end
    if (rd_valid && rd_ready) begin
      if (rd_addr >= addr_t'(WORDS)) $error("dram_model: read address %0d out of range", rd_addr);
      pend      <= 1'b1;
      pend_addr <= rd_addr;
      lat       <= 1 + int'($urandom_range(0, 2));
    end
    if (rd_valid && !rd_ready) rd_stalls <= rd_stalls + 1;
    if (wr_valid && wr_ready) begin
      if (wr_addr >= addr_t'(WORDS)) $error("dram_model: write address %0d out of range", wr_addr);
      else mem[wr_addr] <= wr_data;
      wr_count <= wr_count + 1;
    end
    rd_ready <= ($urandom_range(0, 99) >= STALL_PCT);
    wr_ready <= ($urandom_range(0, 99) >= STALL_PCT);
  end
endmodule
