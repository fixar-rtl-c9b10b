// fixar_pkg: types and constants shared by the FIXAR accelerator.
//
// Number formats. Weights, gradients and full-precision activations are
// 32-bit two's-complement fixed point with FRAC_W = 16 fractional bits
// (Q16.16). After the quantization delay, activations are 16-bit signed
// fixed point with a dynamic fractional length F chosen by the quantizer;
// two such activations share one 32-bit slot ([31:16] and [15:0]), so the
// memory layout does not change between the two precisions.
//
// Memory words are 512 bits = 16 elements; element i sits in bits
// [32*i+31 : 32*i]. The 16x16 array, the 512-bit line buffer, the 512-bit
// weight memory, the 2.94 KB activation memory, the 1.05 MB weight and
// gradient memories and N = 2 cores are the paper's numbers. The
// instruction format below is this design's own.
package fixar_pkg;

  localparam int unsigned DATA_W     = 32;
  localparam int unsigned FRAC_W     = 16;
  localparam int unsigned HALF_W     = 16;
  localparam int unsigned ARR        = 16;            // PE rows = PE columns = elements per word
  localparam int unsigned N_CORES    = 2;
  localparam int unsigned WMEM_DEPTH = 16384;         // 16384 x 64 B = 1.05 MB
  localparam int unsigned ACT_DEPTH  = 47;            // 47 x 64 B = 2.94 KB
  localparam int unsigned WADDR_W    = 14;
  localparam int unsigned AADDR_W    = 6;
  localparam int unsigned DIM_W      = 10;            // layer dimensions up to 1023

  typedef logic signed [DATA_W-1:0] fx_t;
  typedef logic signed [HALF_W-1:0] hx_t;
  typedef logic [ARR-1:0][DATA_W-1:0] word_t;

  typedef enum logic [2:0] {
    OP_NOP  = 3'd0,
    OP_FWD  = 3'd1,   // forward MVM, intra-layer parallelism over cores
    OP_BWD  = 3'd2,   // transposed MVM, intra-batch parallelism over cores
    OP_GRAD = 3'd3,   // outer product error x activation, added into gradient memory
    OP_ADAM = 3'd4,   // Adam update of a range of weight words
    OP_CFG  = 3'd5    // set quantization delay, learning rate, noise scale
  } op_e;

  typedef enum logic [1:0] {
    AF_NONE      = 2'd0,
    AF_RELU      = 2'd1,
    AF_TANH      = 2'd2,
    AF_RELU_GRAD = 2'd3   // multiply by ReLU'(stored activation)
  } afn_e;

  // One host instruction. W is the layer matrix, P rows (outputs) by Q columns
  // (inputs). wt_t = 1 means W is stored transposed (row q of W^T per word row).
  typedef struct packed {
    op_e                op;
    afn_e               afn;
    logic               wt_t;
    logic               to_host;   // FWD: send the result word to the host
    logic               noise;     // FWD: add PRNG noise before the activation function
    logic               step;      // FWD: this result ends a timestep (QAT counter)
    logic [1:0]         lane;      // GRAD in half precision: 1 = [31:16], 0 = [15:0]
    logic [1:0]         core;      // FWD/GRAD source: activation memory that holds the vector
    logic [WADDR_W-1:0] wbase;     // weight/gradient word base address
    logic [WADDR_W-1:0] nwords;    // ADAM: number of words
    logic [DIM_W-1:0]   p;         // rows of W
    logic [DIM_W-1:0]   q;         // columns of W
    logic [AADDR_W-1:0] src;       // input vector (activation memory word address)
    logic [AADDR_W-1:0] dst;       // output vector
    logic [AADDR_W-1:0] aux;       // stored activations for AF_RELU_GRAD; GRAD: a vector
    logic [63:0]        imm;       // CFG: [63:32] quantization delay d (timesteps),
                                   //      [31:8] Adam step size (Q0.24), [4:0] noise shift
  } instr_t;

  // Number of 16-element tiles covering n elements.
  function automatic int unsigned tiles(input logic [DIM_W-1:0] n);
    return (int'(n) + ARR - 1) / ARR;
  endfunction

  // Half-precision lane with F = FRAC_W - s fractional bits, widened to Q16.16.
  function automatic fx_t widen(input hx_t h, input logic [4:0] s);
    fx_t w;
    w = fx_t'(h);
    return w <<< s;
  endfunction

  // Q16.16 narrowed to a 16-bit lane with FRAC_W - s fractional bits, saturating.
  function automatic hx_t narrow(input fx_t a, input logic [4:0] s);
    fx_t t;
    t = a >>> s;
    if (t > 32767)       return hx_t'(16'sh7fff);
    else if (t < -32768) return hx_t'(-16'sh8000);
    else                 return t[HALF_W-1:0];
  endfunction

endpackage
