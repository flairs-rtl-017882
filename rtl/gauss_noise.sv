// gauss_noise: approximately normal N(0,1) noise samples for the Aggregation PE.
//
// The paper uses the Vitis library's MT19937IcnRng: MT19937 uniform numbers
// turned into normal ones by the inverse cumulative normal function. The
// library's inverse-CDF approximation is not given, so this block keeps the
// exact MT19937 source (mt19937) and forms each normal sample by the
// Irwin-Hall sum instead:
//     z = u_1 + u_2 + ... + u_12 - 6,   u_k uniform in [0, 1),
// which has mean 0 and variance 1 and is close to normal within +-6.
// Each u_k is the upper FRAC bits of one 32-bit MT19937 word, so a sample
// takes 12 cycles. z is Q16.16 on a valid/ready stream; a sample is held
// until taken, and the next one is built meanwhile only after it is taken.
// seed_load reseeds the generator (624 cycles before the first sample).
module gauss_noise
  import flairs_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        seed_load,
  input  logic [31:0] seed,
  output logic        z_valid,
  input  logic        z_ready,
  output fix_t        z_data
);
  localparam int TERMS = 12;

  logic        u_valid, u_ready;
  logic [31:0] u_data;
  logic [3:0]  n;
  logic [FRAC+3:0] sum;

  mt19937 u_mt (
    .clk, .rst_n, .seed_load, .seed,
    .out_valid(u_valid), .out_ready(u_ready), .out_data(u_data)
  );

  assign u_ready = !z_valid && !seed_load;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      n       <= '0;
      sum     <= '0;
      z_valid <= 1'b0;
      z_data  <= '0;
    end else if (seed_load) begin
      n       <= '0;
      sum     <= '0;
      z_valid <= 1'b0;
    end else begin
      if (z_valid && z_ready) z_valid <= 1'b0;
      if (u_valid && u_ready) begin
        if (n == 4'(TERMS - 1)) begin
          z_data  <= fix_t'(DATA_W'(sum + (FRAC+4)'(u_data[31 -: FRAC]))) - fix_t'(6 << FRAC);
          z_valid <= 1'b1;
          sum     <= '0;
          n       <= '0;
        end else begin
          sum <= sum + (FRAC+4)'(u_data[31 -: FRAC]);
          n   <= n + 1'b1;
        end
      end
    end
  end
endmodule
