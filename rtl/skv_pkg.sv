// skv_pkg: shared constants and types of the SwiftKV-MHA accelerator.
//
// Number formats. Attention runs in 32-bit fixed point FXP32 = Q15.17 (two's
// complement, 17 fraction bits). GEMV runs on INT8 activations and INT4 weights and
// produces INT32 sums. Everything that needs the shared sizes (32 heads of 128
// dimensions, 4096-wide hidden vector, 128-DSP public MAC array) reads them from here.
// The sizes are those of the paper's main configuration (LLaMA2-7B-class models).
package skv_pkg;

  // ---- sizes -----------------------------------------------------------------
  localparam int unsigned FRAC      = 17;           // Q15.17 fraction bits
  localparam int unsigned NPROC     = 32;           // SKV processors = heads
  localparam int unsigned DHEAD     = 128;          // dimensions per head
  localparam int unsigned NDSP      = 128;          // DSPs per public MAC array
  localparam int unsigned FXP_LANES = NDSP / 4;     // FXP32 products per cycle (32)
  localparam int unsigned NCHUNK    = DHEAD / FXP_LANES; // cycles per q.k (4)

  typedef logic signed [31:0] fxp_t;   // Q15.17
  typedef logic signed [31:0] int32_t_;
  typedef logic signed [7:0]  int8_t_;
  typedef logic signed [3:0]  int4_t_;

  localparam fxp_t FXP_ONE = 32'sd1 <<< FRAC;

  // MAC array operating mode (Fig. 5(b)): same DSPs, two number formats.
  typedef enum logic {
    MODE_GEMV = 1'b0,   // INT8 x INT4 -> INT32, 128 products per cycle
    MODE_ATTN = 1'b1    // FXP32 x FXP32 -> FXP32, 32 products per cycle
  } mac_mode_e;

  // Which vector of the SKV unit buffer a dispatcher write targets.
  typedef enum logic [1:0] {
    BUF_X = 2'd0,   // 128 x INT8 GEMV input chunk (one 1024-bit word)
    BUF_Q = 2'd1,   // 128 x FXP32 query, four 1024-bit chunks
    BUF_K = 2'd2,   // 128 x FXP32 key of the new token
    BUF_V = 2'd3    // 128 x FXP32 value of the new token
  } buf_sel_e;

  // SFU operations (Fig. 4 lists EM-Add, quantization, Hadamard product, SiLU, RMS norm).
  typedef enum logic [2:0] {
    SFU_ADD      = 3'd0,  // elementwise add of two INT32/FXP32 streams
    SFU_HADAMARD = 3'd1,  // elementwise FXP32 product
    SFU_I32_FXP  = 3'd2,  // INT32 -> FXP32 dequantization, times scale
    SFU_FXP_I8   = 3'd3,  // FXP32 -> INT8 quantization, times scale, saturate
    SFU_SILU     = 3'd4,  // FXP32 SiLU
    SFU_RMSNORM  = 3'd5   // FXP32 RMS normalization times gain stream
  } sfu_op_e;

  // Dispatcher commands.
  typedef enum logic [2:0] {
    CMD_GEMV    = 3'd0,  // x (INT8) from GB split to processors, INT32 outputs to GB
    CMD_SCATTER = 3'd1,  // FXP32 vector from GB split per head into q/k/v buffers
    CMD_ATTN    = 3'd2,  // every processor: RoPE + attention, outputs gathered into GB
    CMD_SFU     = 3'd3   // GB vector(s) through the SFU back into GB
  } cmd_e;

  typedef struct packed {
    cmd_e          cmd;
    sfu_op_e       sfu_op;
    buf_sel_e      bsel;      // CMD_SCATTER target
    logic [15:0]   src_a;     // GB word address
    logic [15:0]   src_b;     // GB word address (second operand / RMS gain)
    logic [15:0]   dst;       // GB word address
    logic [15:0]   len;       // GEMV: outputs; SFU: GB words; ATTN: context tokens
    fxp_t          scale;     // SFU quantization scale
  } cmd_t;

  // Signed multiply of two Q15.17 numbers, result truncated toward -inf to Q15.17.
  function automatic fxp_t fxp_mul(fxp_t a, fxp_t b);
    logic signed [63:0] p;
    p = 64'(a) * 64'(b);
    return fxp_t'(p >>> FRAC);
  endfunction

endpackage
