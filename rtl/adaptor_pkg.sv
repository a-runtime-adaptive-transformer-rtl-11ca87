// adaptor_pkg: number format, size limits and arithmetic helpers shared by
// the transformer encoder accelerator.
//
// All activations, weights and biases are held on chip as signed 16-bit
// fixed point with 8 fraction bits (fx_t, Q7.8). Products of two fx_t values
// are Q.16 and are summed in 40-bit accumulators (acc_t) so that a dot
// product over the largest embedding (768) or hidden (3072) dimension cannot
// overflow. A result goes back to fx_t by an arithmetic shift of FRAC bits
// followed by saturation.
//
// The size limits below are the synthesis-time maxima. The runtime values
// written to the configuration registers (sequence length, heads, embedding,
// hidden dimension, layers) may be anything up to these limits, subject to
// the divisibility rules listed with each constant. The tile sizes TS_MHA=64
// and TS_FFN=128, the embedding 768, 12 heads and hidden 3072 are the
// numbers of the published configuration. The word format (Q7.8) is this
// design's own choice: the source gives no bit width.
package adaptor_pkg;

  localparam int DW    = 16;          // data word width
  localparam int FRAC  = 8;           // fraction bits of fx_t
  localparam int ACCW  = 40;          // accumulator width

  typedef logic signed [DW-1:0]   fx_t;
  typedef logic signed [ACCW-1:0] acc_t;

  // Synthesis-time maxima (published configuration).
  localparam int SL_MAX  = 128;       // sequence length (64 in the base run, 128 in the latency table)
  localparam int D_MAX   = 768;       // embedding dimension d_model
  localparam int H_MAX   = 12;        // attention heads (head instances)
  localparam int DK_MAX  = 96;        // d_model / heads; 96 lets 8 heads of 768 run
  localparam int HID_MAX = 3072;      // hidden (intermediate) dimension = 4 d_model
  localparam int TS_MHA  = 64;        // attention tile size (columns of W per load)
  localparam int TS_FFN  = 128;       // FFN tile size

  localparam fx_t FX_MAX = fx_t'({1'b0, {(DW-1){1'b1}}});
  localparam fx_t FX_MIN = fx_t'({1'b1, {(DW-1){1'b0}}});

  // Runtime configuration, as written by the host into the register file.
  typedef struct packed {
    logic [15:0] seq_len;     // Sequence
    logic [15:0] heads;       // Heads
    logic [15:0] layers_enc;  // Layers_enc
    logic [15:0] layers_dec;  // Layers_dec (stored, not executed)
    logic [15:0] d_model;     // Embeddings
    logic [15:0] hidden;      // Hidden
    logic [15:0] n_out;       // Out (stored, not executed)
    logic [31:0] in_addr;     // byte address of the input token matrix
    logic [31:0] wt_addr;     // byte address of the first layer's parameters
  } cfg_t;

  // Saturate a wide signed value to fx_t.
  function automatic fx_t sat_fx(input logic signed [63:0] v);
    if (v > 64'(signed'(FX_MAX)))      return FX_MAX;
    else if (v < 64'(signed'(FX_MIN))) return FX_MIN;
    else                               return fx_t'(v);
  endfunction

  // Q.16 accumulator to fx_t: arithmetic shift by FRAC, then saturate.
  function automatic fx_t acc_to_fx(input acc_t a);
    logic signed [63:0] w;
    w = 64'(a) >>> FRAC;
    return sat_fx(w);
  endfunction

  // e^x for x <= 0 given in Q.8; result in Q.16 (65536 = 1.0).
  // e^x = 2^(x*log2 e); the integer part of the exponent becomes a right
  // shift, the fraction f is evaluated with a cubic fit of 2^f on [0,1).
  localparam int LOG2E_Q8 = 369;      // log2(e) * 256
  localparam int C1 = 45426;          // 0.693147 * 65536
  localparam int C2 = 15743;          // 0.240227 * 65536
  localparam int C3 = 3638;           // 0.055504 * 65536
  function automatic logic [16:0] fx_exp(input fx_t x);
    logic signed [31:0] y;            // x * log2e, Q.16, <= 0
    logic signed [31:0] ip;           // floor(y / 65536), <= 0
    logic [15:0]        f;            // fractional part, Q.16
    logic [47:0]        t;
    logic [16:0]        p;
    int unsigned        n;
    if (x > 0) return 17'd65536;
    y  = 32'(x) * LOG2E_Q8;
    ip = y >>> 16;
    f  = y[15:0];
    t  = (48'(f) * 48'(C3)) >> 16;
    t  = (48'(f) * (48'(C2) + t)) >> 16;
    t  = (48'(f) * (48'(C1) + t)) >> 16;
    p  = 17'(48'd65536 + t);
    n  = unsigned'(-ip);
    if (n >= 17) return '0;
    return p >> n;
  endfunction

endpackage
