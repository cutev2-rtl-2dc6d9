// cute_pkg: types and constants shared by the matrix unit.
//
// The matrix unit is driven by one asynchronous matrix-multiplication task
// C = A x B^T + bias.  A task is described by the interface registers
// (matrix sizes M, N, K, a base address and a row stride for A, B, bias and
// C, the data type, the bias type and a transpose flag); task_t carries them.
// Internally a task is cut into scratchpad tiles and turned into two kinds of
// micro-instructions: ld_uop_t for the Memory Loader (base address, stride,
// load mode, size) and dc_uop_t for the three Data Controllers (size, loop).
//
// Layout convention of this implementation (the paper does not fix one):
//   A is M x K, row-major, element (m,k) at base_a + m*stride_a + k*esize.
//   B is given as N x K (each output column's K values contiguous),
//     element (n,k) at base_b + n*stride_b + k*esize.
//   Bias and C hold 32-bit elements (int32 for INT8, fp32 otherwise);
//     C(m,n) at base_c + m*stride_c + 4n, or base_c + n*stride_c + 4m when
//     the transpose flag is set.
//   Base addresses and strides are multiples of BUS_BYTES.
// The memory port moves BUS_BYTES = 64 bytes per beat, equal to the 64-byte
// K depth of the scratchpad in the paper's case-study configuration.
package cute_pkg;

  localparam int unsigned ADDR_W    = 64;
  localparam int unsigned BUS_BYTES = 64;
  localparam int unsigned BUS_W     = BUS_BYTES * 8;
  localparam int unsigned WORDS_PER_BEAT = BUS_BYTES / 4;  // 32-bit C words

  // Data precision of A and B (the DataType register).
  typedef enum logic [2:0] {
    DT_INT8 = 3'd0,
    DT_FP8  = 3'd1,   // E4M3
    DT_FP16 = 3'd2,
    DT_BF16 = 3'd3,
    DT_TF32 = 3'd4    // 1/8/10 bits, held in the upper 19 bits of a 32-bit word
  } dtype_e;

  // The BiasType register.
  typedef enum logic [1:0] {
    BIAS_ZERO = 2'd0,
    BIAS_ROW  = 2'd1,   // one row of N values repeated for every row
    BIAS_FULL = 2'd2    // a full M x N matrix
  } bias_e;

  // One task: the interface registers at the time asyncMatMul was issued.
  typedef struct packed {
    logic [31:0]       m;
    logic [31:0]       n;
    logic [31:0]       k;
    logic [ADDR_W-1:0] base_a;
    logic [ADDR_W-1:0] base_b;
    logic [ADDR_W-1:0] base_bias;
    logic [ADDR_W-1:0] base_c;
    logic [31:0]       stride_a;
    logic [31:0]       stride_b;
    logic [31:0]       stride_bias;
    logic [31:0]       stride_c;
    dtype_e            dtype;
    bias_e             bias_type;
    logic              transpose;
  } task_t;

  // Memory Loader load modes.
  typedef enum logic [1:0] {
    LD_A    = 2'd0,   // rows of A into an A bank
    LD_B    = 2'd1,   // rows of B into a B bank
    LD_BIAS = 2'd2,   // rows of bias into the C scratchpad
    ST_C    = 2'd3    // rows of the C scratchpad out to memory
  } ld_mode_e;

  // Memory Loader micro-instruction.  For LD_A/LD_B, 'rows' rows of
  // 'row_bytes' valid bytes each (the rest of the 64-byte row is zeroed).
  // For LD_BIAS/ST_C, 'rows' memory rows of 'words' 32-bit words each.
  typedef struct packed {
    ld_mode_e          mode;
    logic              bank;
    logic [ADDR_W-1:0] base;
    logic [31:0]       stride;
    logic [15:0]       rows;
    logic [15:0]       row_bytes;
    logic [15:0]       words;
    logic              transpose;
  } ld_uop_t;

  // Data Controller micro-instruction: one pass over a resident tile.
  typedef struct packed {
    logic        bank;     // A/B bank to read
    logic [15:0] mb;       // PE-row blocks (size)
    logic [15:0] nb;       // PE-column blocks (size)
    logic        zero_c;   // first K step with zero bias: C operand is 0
    logic        last_k;   // last K step of this output tile
    dtype_e      dtype;
  } dc_uop_t;

  function automatic logic [31:0] elem_bytes(input dtype_e dt);
    unique case (dt)
      DT_INT8, DT_FP8:  return 32'd1;
      DT_FP16, DT_BF16: return 32'd2;
      default:          return 32'd4;
    endcase
  endfunction

  function automatic logic [31:0] ceil_div(input logic [31:0] a, input logic [31:0] b);
    return (a + b - 32'd1) / b;
  endfunction

endpackage
