// skv_sfu: Special Function Unit (Fig. 4): the operations that are not multiply-accumulate.
//
//  * EM-Add (em_*): adds the NPROC INT32 partial sums of a distributed GEMV, one output
//    element per cycle through a registered adder tree (1 cycle). This is how the 32
//    processors' partial dot products become one GEMV output (paper Sec. IV-B). With
//    em_scale_i non-zero the sum is also dequantized in the same cycle (sum * em_scale_i,
//    Q15.17), so a GEMV can write FXP32 directly: the conversion overlaps the GEMV, as in
//    the paper's "Most data type conversions are overlapped with computation via
//    pipelining". With em_scale_i = 0 the INT32 sum is passed on.
//  * Elementwise stream (in_* -> out_*), one element per accepted input, op_i chosen per
//    element:
//      SFU_ADD       a + b (32-bit, wraps): residual addition
//      SFU_HADAMARD  a * b in FXP32 (Q15.17)
//      SFU_I32_FXP   INT32 -> FXP32: a * scale, scale in Q15.17 (dequantization)
//      SFU_FXP_I8    FXP32 -> INT8: round(a * scale), saturated to [-128, 127]
//      SFU_SILU      a * sigmoid(a) = a / (1 + exp(-a)), with exp(-|a|) from skv_exp_unit
//                    and a pipelined divider: one element per cycle, result after
//                    SILU_LAT = 54 cycles
//      SFU_RMSNORM   two passes over a vector of rms_n_i elements. Pass 0 (rms_pass_i=0)
//                    accumulates a*a, and on rms_last_i computes
//                    inv = 1/sqrt(mean(a^2) + eps) with sequential divide and square root.
//                    Pass 1 returns a * inv * b, b being the RMS gain.
//    These six functions are those the paper lists for the SFU (Sec. IV-A, Fig. 5(c)). How
//    each is computed, and the element-serial organization, are this design's choices; the
//    paper gives the functions only.
//
// Timing: the simple ops give out_valid_o one cycle after acceptance, back to back. SiLU
// takes one element per cycle too and answers SILU_LAT cycles later, in order. While SiLU
// results are outstanding only further SiLU elements are accepted (in_ready_o is low for
// another op), so the two result paths never collide. The end of an RMS pass 0 deasserts
// in_ready_o for the sequential mean, square root and reciprocal (about 150 cycles, once
// per vector). Pass 0 gives no output. Accumulation is 64-bit, which holds 4096 squares of
// values below 2^8.
module skv_sfu
  import skv_pkg::*;
#(
  parameter int unsigned NIN = NPROC     // EM-Add inputs (paper: 32 processors)
) (
  input  logic                clk,
  input  logic                rst_n,
  // EM-Add
  input  logic                em_valid_i,
  input  logic [NIN*32-1:0]   em_i,
  input  fxp_t                em_scale_i,
  output logic                em_valid_o,
  output logic signed [31:0]  em_o,
  // elementwise stream
  input  logic                in_valid_i,
  output logic                in_ready_o,
  input  sfu_op_e             op_i,
  input  fxp_t                a_i,
  input  fxp_t                b_i,
  input  fxp_t                scale_i,
  input  logic                rms_pass_i,
  input  logic                rms_last_i,
  input  logic [15:0]         rms_n_i,
  output logic                out_valid_o,
  output logic [31:0]         out_o
);
  // RMS epsilon 1e-5 in Q30.34 (mean of squares is kept with 34 fraction bits)
  localparam logic [63:0] EPS_Q34 = 64'd171799;

  // ---------------- EM-Add ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      em_valid_o <= 1'b0; em_o <= '0;
    end else begin
      logic signed [31:0] s;
      s = '0;
      for (int i = 0; i < NIN; i++) s += $signed(em_i[i*32 +: 32]);
      em_valid_o <= em_valid_i;
      em_o       <= (em_scale_i != '0) ? 32'(64'(s) * 64'(em_scale_i)) : s;
    end
  end

  // ---------------- sequential helpers ----------------
  logic        ex_valid_i, ex_valid_o;
  fxp_t        ex_x, ex_y;
  skv_exp_unit u_exp (.clk, .rst_n, .valid_i(ex_valid_i), .x_i(ex_x), .valid_o(ex_valid_o), .y_o(ex_y));

  logic        dv_start, dv_busy, dv_done;
  logic [63:0] dv_num, dv_q;
  logic [31:0] dv_den;
  skv_divu #(.NW(64), .DW(32)) u_div (
    .clk, .rst_n, .start_i(dv_start), .dividend_i(dv_num), .divisor_i(dv_den),
    .busy_o(dv_busy), .done_o(dv_done), .quot_o(dv_q)
  );

  logic        sq_start, sq_busy, sq_done;
  logic [63:0] sq_rad;
  logic [31:0] sq_root;
  skv_isqrt #(.NW(64)) u_sqrt (
    .clk, .rst_n, .start_i(sq_start), .rad_i(sq_rad), .busy_o(sq_busy), .done_o(sq_done),
    .root_o(sq_root)
  );

  // ---------------- elementwise FSM ----------------
  typedef enum logic [2:0] {
    F_IDLE, F_RMS_MEAN, F_RMS_SQRT, F_RMS_INV
  } fstate_e;
  fstate_e     st;
  logic [63:0] acc;
  fxp_t        inv_rms;

  // ---------------- SiLU pipeline ----------------
  // exp(-|a|) (EXP_LAT cycles) -> numerator/denominator -> pipelined divide (DIV_W cycles)
  localparam int unsigned EXP_LAT  = 4;
  localparam int unsigned DIV_W    = 32 + FRAC - 1;     // 48-bit dividend |a| << 17
  localparam int unsigned SILU_LAT = EXP_LAT + DIV_W + 2;
  logic               silu_acc;
  logic [EXP_LAT-1:0] sp_v;
  logic               sp_neg [EXP_LAT];
  fxp_t               sp_abs [EXP_LAT];
  logic               dp_v, dp_neg, dq_v, dq_neg;
  logic [DIV_W-1:0]   dp_num, dq_q;
  logic [FRAC+1:0]    dp_den;
  logic [7:0]         silu_cnt;                        // SiLU results outstanding

  assign in_ready_o = (st == F_IDLE) && !(silu_cnt != 0 && op_i != SFU_SILU);
  assign silu_acc   = in_valid_i && in_ready_o && op_i == SFU_SILU;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sp_v <= '0; dp_v <= 1'b0; dp_neg <= 1'b0; dp_num <= '0; dp_den <= '0; silu_cnt <= '0;
      for (int i = 0; i < EXP_LAT; i++) begin sp_neg[i] <= 1'b0; sp_abs[i] <= '0; end
    end else begin
      sp_v      <= {sp_v[EXP_LAT-2:0], silu_acc};
      sp_neg[0] <= (a_i < 0);
      sp_abs[0] <= (a_i < 0) ? -a_i : a_i;
      for (int i = 1; i < EXP_LAT; i++) begin sp_neg[i] <= sp_neg[i-1]; sp_abs[i] <= sp_abs[i-1]; end
      // x >= 0: x / (1 + e^-x);  x < 0: |x| e^-|x| / (1 + e^-|x|), negated at the end
      dp_v   <= ex_valid_o;
      dp_neg <= sp_neg[EXP_LAT-1];
      dp_num <= sp_neg[EXP_LAT-1] ? (DIV_W'(fxp_mul(sp_abs[EXP_LAT-1], ex_y)) << FRAC)
                                  : (DIV_W'(sp_abs[EXP_LAT-1]) << FRAC);
      dp_den <= (FRAC+2)'(FXP_ONE + ex_y);
      silu_cnt <= silu_cnt + 8'(silu_acc) - 8'(dq_v);
    end
  end

  skv_divp #(.NW(DIV_W), .DW(FRAC + 2), .TW(1)) u_divp (
    .clk, .rst_n, .valid_i(dp_v), .dividend_i(dp_num), .divisor_i(dp_den), .tag_i(dp_neg),
    .valid_o(dq_v), .quot_o(dq_q), .tag_o(dq_neg)
  );

  function automatic logic [31:0] sat_i8(logic signed [63:0] v);
    if (v > 64'sd127)  return 32'sd127;
    if (v < -64'sd128) return -32'sd128;
    return 32'(v);
  endfunction

  assign ex_valid_i = silu_acc;
  assign ex_x       = (a_i < 0) ? a_i : -a_i;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= F_IDLE; acc <= '0; inv_rms <= FXP_ONE;
      out_valid_o <= 1'b0; out_o <= '0;
      dv_start <= 1'b0; dv_num <= '0; dv_den <= '0; sq_start <= 1'b0; sq_rad <= '0;
    end else begin
      out_valid_o <= 1'b0;
      dv_start    <= 1'b0;
      sq_start    <= 1'b0;
      if (dq_v) begin                                   // SiLU result
        out_valid_o <= 1'b1;
        out_o       <= dq_neg ? -dq_q[31:0] : dq_q[31:0];
      end
      unique case (st)
        F_IDLE: if (in_valid_i && in_ready_o) begin
          unique case (op_i)
            SFU_ADD:      begin out_valid_o <= 1'b1; out_o <= a_i + b_i; end
            SFU_HADAMARD: begin out_valid_o <= 1'b1; out_o <= fxp_mul(a_i, b_i); end
            SFU_I32_FXP:  begin out_valid_o <= 1'b1; out_o <= 32'(64'(a_i) * 64'(scale_i)); end
            SFU_FXP_I8: begin
              logic signed [63:0] p;
              p = 64'(a_i) * 64'(scale_i);
              out_valid_o <= 1'b1;
              out_o <= sat_i8((p + (64'sd1 <<< (2 * FRAC - 1))) >>> (2 * FRAC));
            end
            SFU_RMSNORM: begin
              if (!rms_pass_i) begin
                logic [63:0] nacc;
                nacc = acc + 64'(64'(a_i) * 64'(a_i));
                acc  <= nacc;
                if (rms_last_i) begin
                  dv_num   <= nacc;
                  dv_den   <= 32'(rms_n_i);
                  dv_start <= 1'b1;
                  st       <= F_RMS_MEAN;
                end
              end else begin
                out_valid_o <= 1'b1;
                out_o       <= fxp_mul(fxp_mul(a_i, inv_rms), b_i);
              end
            end
            default: ;
          endcase
        end
        F_RMS_MEAN: if (dv_done) begin
          sq_rad   <= dv_q + EPS_Q34;          // mean square, Q30.34
          sq_start <= 1'b1;
          st       <= F_RMS_SQRT;
        end
        F_RMS_SQRT: if (sq_done) begin       // rms, Q15.17
          dv_num   <= 64'd1 << (2 * FRAC);
          dv_den   <= (sq_root == 0) ? 32'd1 : sq_root;
          dv_start <= 1'b1;
          st       <= F_RMS_INV;
        end
        F_RMS_INV: if (dv_done) begin
          inv_rms <= fxp_t'(dv_q[31:0]);
          acc     <= '0;
          st      <= F_IDLE;
        end
        default: st <= F_IDLE;
      endcase
    end
  end
  a_silu_align: assert property (@(posedge clk) disable iff (!rst_n) ex_valid_o == sp_v[EXP_LAT-1])
    else $error("skv_sfu: exp latency differs from EXP_LAT");
  a_out_collide: assert property (@(posedge clk) disable iff (!rst_n)
                                  !(dq_v && in_valid_i && in_ready_o && st == F_IDLE && op_i != SFU_SILU))
    else $error("skv_sfu: result paths collide");
endmodule
