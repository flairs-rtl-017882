// axi_mem_model: behavioural AXI4 slave memory used by the testbenches.
//
// Not synthesizable design logic: a 32-bit word array (mem, word address =
// byte address / 4) behind a 512-bit AXI4 slave. Read bursts: AR is accepted
// on random cycles, then ARLEN+1 beats follow, each after a random gap, with
// RLAST on the last one. Writes: AW and W are accepted independently on random
// cycles, the enabled 4-byte lanes of each beat are stored, and B follows once
// both have arrived (single-beat write bursts only). One read burst and one
// write are handled at a time. It counts read bursts, read beats, written
// words and refused AR cycles, and counts protocol errors: a read burst that
// is not ARLEN = 63 / ARSIZE = 64 bytes / INCR / 4 KB aligned, or a write that
// is not a single beat with WLAST.
module axi_mem_model #(
  parameter int WORDS     = 4096,
  parameter int AXI_DW    = 512,
  parameter int AXI_AW    = 64,
  parameter int STALL_PCT = 25
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              m_arvalid,
  output logic              m_arready,
  input  logic [AXI_AW-1:0] m_araddr,
  input  logic [7:0]        m_arlen,
  input  logic [2:0]        m_arsize,
  input  logic [1:0]        m_arburst,
  output logic              m_rvalid,
  input  logic              m_rready,
  output logic [AXI_DW-1:0] m_rdata,
  output logic              m_rlast,
  input  logic              m_awvalid,
  output logic              m_awready,
  input  logic [AXI_AW-1:0] m_awaddr,
  input  logic [7:0]        m_awlen,
  input  logic [2:0]        m_awsize,
  input  logic [1:0]        m_awburst,
  input  logic              m_wvalid,
  output logic              m_wready,
  input  logic [AXI_DW-1:0] m_wdata,
  input  logic [AXI_DW/8-1:0] m_wstrb,
  input  logic              m_wlast,
  output logic              m_bvalid,
  input  logic              m_bready,
  output int                bursts,
  output int                beats,
  output int                words_written,
  output int                wbursts,
  output int                ar_stalls,
  output int                proto_errors
);
  localparam int LANES = AXI_DW / 32;
  logic [31:0] mem [WORDS];

  logic        r_busy, have_aw, w_end;
  int          r_word;
  int          r_left;
  int          aw_word, w_beat, w_total;

  function automatic logic [AXI_DW-1:0] beat_at(int w);
    logic [AXI_DW-1:0] b = '0;
    for (int l = 0; l < LANES; l++)
      if (w + l >= 0 && w + l < WORDS) b[32*l +: 32] = mem[w + l];
    return b;
  endfunction

  initial begin
    bursts = 0; beats = 0; words_written = 0; wbursts = 0; ar_stalls = 0; proto_errors = 0;
    m_arready = 0; m_rvalid = 0; m_rdata = '0; m_rlast = 0;
    m_awready = 0; m_wready = 0; m_bvalid = 0;
    r_busy = 0; have_aw = 0; w_end = 0; r_word = 0; r_left = 0;
    aw_word = 0; w_beat = 0; w_total = 0;
    for (int i = 0; i < WORDS; i++) mem[i] = '0;
  end

  always @(posedge clk) begin
    if (rst_n) begin
      // ---- read channel ----
      if (m_arvalid && m_arready) begin
        bursts++;
        if (m_arlen != 8'd63 || m_arsize != 3'd6 || m_arburst != 2'b01 || m_araddr[11:0] != '0)
          proto_errors++;
        r_busy = 1;
        r_word = int'(m_araddr >> 2);
        r_left = int'(m_arlen) + 1;
      end else if (m_arvalid) ar_stalls++;
      if (m_rvalid && m_rready) begin
        beats++;
        r_word += LANES;
        r_left--;
        if (r_left == 0) r_busy = 0;
      end
      m_arready <= !r_busy && !(m_arvalid && m_arready) && ($urandom_range(0, 99) >= STALL_PCT);
      if (r_busy && (!m_rvalid || m_rready) && $urandom_range(0, 99) >= STALL_PCT) begin
        m_rvalid <= 1'b1;
        m_rdata  <= beat_at(r_word);
        m_rlast  <= (r_left == 1);
      end else if (m_rvalid && m_rready) begin
        m_rvalid <= 1'b0;
        m_rlast  <= 1'b0;
      end
      // ---- write channels ----
      if (m_awvalid && m_awready) begin
        if (m_awlen != 8'd63 || m_awsize != 3'd6 || m_awburst != 2'b01 || m_awaddr[11:0] != '0)
          proto_errors++;
        have_aw = 1;
        aw_word = int'(m_awaddr >> 2);
        w_beat  = 0;
        w_total = int'(m_awlen) + 1;
      end
      if (m_wvalid && m_wready) begin
        if (m_wlast != (w_beat == w_total - 1)) proto_errors++;
        for (int l = 0; l < LANES; l++)
          if (|m_wstrb[4*l +: 4]) begin
            if (m_wstrb[4*l +: 4] != 4'hf) proto_errors++;
            if (aw_word + LANES * w_beat + l < WORDS) mem[aw_word + LANES * w_beat + l] = m_wdata[32*l +: 32];
            words_written++;
          end
        w_beat++;
        if (m_wlast) w_end = 1;
      end
      if (m_bvalid && m_bready) m_bvalid <= 1'b0;
      if (w_end && !m_bvalid) begin
        wbursts++;
        have_aw = 0;
        w_end   = 0;
        m_bvalid <= 1'b1;
      end
      m_awready <= !have_aw && !(m_awvalid && m_awready) && ($urandom_range(0, 99) >= STALL_PCT);
      m_wready  <= have_aw && !w_end && !(m_wvalid && m_wready && m_wlast) &&
                   ($urandom_range(0, 99) >= STALL_PCT);
    end
  end
endmodule
