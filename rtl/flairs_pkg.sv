// flairs_pkg: types and constants shared by the FLAIRS aggregation kernel.
//
// All model values (global model, local models, differential vectors, norms,
// distances, scales, noise) are fixed point with FRAC fractional bits in a
// DATA_W-bit word (Q16.16 by default). The paper's kernel was written in HLS
// C++ and does not state its number format; fixed point is this design's
// choice. Differential-vector words travel between the PEs as dvec_word_t:
// the client number, the parameter index, the value and a flag on the last
// word of each vector.
package flairs_pkg;

  localparam int DATA_W = 32;          // width of one model value
  localparam int FRAC   = 16;          // fractional bits of every fixed-point value
  localparam int ADDR_W = 32;          // word address into DRAM
  localparam int CIDX_W = 8;           // client index / count field (up to 255 clients)
  localparam int PIDX_W = 16;          // parameter index / count field (up to 65535 parameters)

  typedef logic signed [DATA_W-1:0] fix_t;   // signed Q(DATA_W-FRAC).FRAC
  typedef logic        [DATA_W-1:0] ufix_t;  // unsigned Q(DATA_W-FRAC).FRAC (norms, scales)
  typedef logic        [ADDR_W-1:0] addr_t;
  typedef logic        [CIDX_W-1:0] cidx_t;
  typedef logic        [PIDX_W-1:0] pidx_t;

  localparam ufix_t ONE = ufix_t'(1) << FRAC;    // 1.0

  // One word of a differential vector on the PE-to-PE stream.
  typedef struct packed {
    cidx_t client;   // which local model the word belongs to
    pidx_t idx;      // parameter index k
    fix_t  data;     // d_client[k] = w_client[k] - g[k]
    logic  last;     // idx == n_params-1
  } dvec_word_t;

endpackage
