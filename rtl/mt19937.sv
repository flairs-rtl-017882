// mt19937: Mersenne Twister MT19937 uniform random number generator.
//
// The paper draws its noise from the Vitis library's MT19937IcnRng, whose
// uniform source is the standard 32-bit Mersenne Twister (Matsumoto and
// Nishimura, 1998). This block implements that generator exactly:
//   - seed_load starts the initialisation mt[0] = seed,
//     mt[i] = 1812433253 * (mt[i-1] ^ (mt[i-1] >> 30)) + i, one word per cycle
//     (624 cycles);
//   - then one tempered 32-bit word is produced per cycle. Each output updates
//     mt[i] in place from mt[i], mt[i+1] and mt[i+397] (indices mod 624) and
//     tempers the new word, which is the standard recurrence evaluated one
//     element at a time.
// Output is a valid/ready stream; out_valid stays low until a seed has been
// loaded. With seed 5489 the first outputs are 3499211612, 581869302, ...
module mt19937 (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        seed_load,
  input  logic [31:0] seed,
  output logic        out_valid,
  input  logic        out_ready,
  output logic [31:0] out_data
);
  localparam int N = 624;
  localparam int M = 397;
  localparam logic [31:0] MATRIX_A = 32'h9908_b0df;

  typedef enum logic [1:0] {M_OFF, M_INIT, M_RUN} mstate_t;
  mstate_t state;

  logic [31:0] mt [N];
  logic [9:0]  idx;
  logic [31:0] prev;
  logic [9:0]  idx1, idxm;
  logic [31:0] y, mt_new, t1, t2, t3, tempered, init_word;

  assign idx1 = (idx == 10'(N - 1)) ? '0 : idx + 1'b1;
  assign idxm = (idx >= 10'(N - M)) ? idx - 10'(N - M) : idx + 10'(M);
  assign y        = {mt[idx][31], mt[idx1][30:0]};
  assign mt_new   = mt[idxm] ^ (y >> 1) ^ (y[0] ? MATRIX_A : 32'h0);
  assign t1       = mt_new ^ (mt_new >> 11);
  assign t2       = t1 ^ ((t1 << 7) & 32'h9d2c_5680);
  assign t3       = t2 ^ ((t2 << 15) & 32'hefc6_0000);
  assign tempered = t3 ^ (t3 >> 18);
  assign init_word = 32'd1812433253 * (prev ^ (prev >> 30)) + 32'(idx);

  logic step;
  assign step = (state == M_RUN) && (!out_valid || out_ready);

  always_ff @(posedge clk) begin
    if (seed_load)                    mt[0]   <= seed;
    else if (state == M_INIT)         mt[idx] <= init_word;
    else if (step)                    mt[idx] <= mt_new;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= M_OFF;
      idx       <= '0;
      prev      <= '0;
      out_valid <= 1'b0;
      out_data  <= '0;
    end else if (seed_load) begin
      state     <= M_INIT;
      idx       <= 10'd1;
      prev      <= seed;
      out_valid <= 1'b0;
    end else begin
      unique case (state)
        M_INIT: begin
          prev <= init_word;
          if (idx == 10'(N - 1)) begin
            idx   <= '0;
            state <= M_RUN;
          end else idx <= idx + 1'b1;
        end
        M_RUN: if (step) begin
          out_valid <= 1'b1;
          out_data  <= tempered;
          idx       <= idx1;
        end
        default: ;
      endcase
    end
  end
endmodule
