// skv_unit: one SKV Unit (Fig. 4): operand MUX, unit buffer, RoPE module, Public MAC Array
// and SwiftKV Core, able to run one head's whole decode attention by itself and, in the
// other mode, its 128-row slice of an INT8 x INT4 GEMV.
//
// Operations, started by a one-cycle command while idle:
//  * GEMV (gemv_i, len_i = number of outputs J): the INT8 input chunk x (128 elements) in
//    the buffer is multiplied with J weight words from the KV-Weight Memory, one per cycle;
//    each gives one INT32 partial sum on g_valid_o/g_data_o two cycles later (one output
//    element per cycle, paper Sec. IV-B). The dispatcher adds the 32 heads' partials.
//  * ATTN (attn_i, len_i = context length N including the new token):
//      1. RoPE: q then k of the new token (already in the buffer) pass through the RoPE
//         module pair by pair and are written back, k with the position commit
//         (128 cycles + 3). q stays in the buffer (paper Sec. IV-C).
//      2. Write-back: RoPE(k) and v leave on wb_* as four KV-memory words, to be appended
//         to the head's KV cache in HBM.
//      3. Attention: N tokens x 4 words are read from the KV-Weight Memory; each word's key
//         quarter goes with the q quarter through the MAC array in FXP32 mode, its value
//         quarter to the core. The core's result, four chunks of 32 FXP32, leaves on a_*;
//         done_o pulses after the last chunk.
// The order RoPE, write-back, attention, and that the stream must already contain the
// new token's (k, v), are this design's choices; the paper says RoPE(k) goes to HBM and
// attention follows once v is ready.
//
// Buffer writes (bw_*) come from the dispatcher: BUF_X takes one 1024-bit word of 128
// INT8; BUF_Q/K/V take chunk bw_idx_i (32 FXP32) of q/k/v. rope_init_i resets the RoPE
// position to 0. Words from the KV-Weight Memory use valid/ready.
module skv_unit
  import skv_pkg::*;
#(
  parameter int unsigned D = DHEAD        // head dimension (paper: 128)
) (
  input  logic          clk,
  input  logic          rst_n,
  // dispatcher side
  input  logic          bw_valid_i,
  input  buf_sel_e      bw_sel_i,
  input  logic [1:0]    bw_idx_i,
  input  logic [1023:0] bw_data_i,
  input  logic          gemv_i,
  input  logic          attn_i,
  input  logic [15:0]   len_i,
  input  logic          rope_init_i,
  output logic          g_valid_o,
  output logic signed [31:0] g_data_o,
  output logic          a_valid_o,
  output logic [1:0]    a_idx_o,
  output logic [1023:0] a_data_o,
  output logic          done_o,
  output logic          busy_o,
  // KV-Weight Memory side
  input  logic          kv_valid_i,
  output logic          kv_ready_o,
  input  logic [2047:0] kv_data_i,
  // KV cache write-back toward HBM
  output logic          wb_valid_o,
  output logic [2047:0] wb_data_o
);
  localparam int unsigned NCH = D / FXP_LANES;   // 4
  localparam int unsigned NP  = D / 2;

  // ---------------- unit buffer ----------------
  logic [1023:0] x_buf;
  fxp_t q_buf [D];
  fxp_t k_buf [D];
  fxp_t v_buf [D];

  // ---------------- sequencer ----------------
  typedef enum logic [2:0] {S_IDLE, S_GEMV, S_ROPE, S_WB, S_ATTN, S_FIN} state_e;
  state_e        st;
  logic [15:0]   remain;          // GEMV outputs / attention tokens still to read
  logic [1:0]    chunk;
  logic [7:0]    rcnt;            // RoPE feed counter (0..2*NP-1), then drain
  mac_mode_e     mode;

  // RoPE
  logic          r_in_valid, r_commit, r_out_valid;
  logic [$clog2(NP)-1:0] r_in_idx, r_out_idx;
  fxp_t          r_x0, r_x1, r_y0, r_y1;
  logic [2:0]    r_which_pipe;    // 1 = k, aligned with the 3-cycle RoPE latency

  assign r_in_valid = (st == S_ROPE) && (rcnt < 8'(2 * NP));
  assign r_in_idx   = rcnt[$clog2(NP)-1:0];
  assign r_commit   = rcnt[$clog2(NP)];
  assign r_x0       = r_commit ? k_buf[2*r_in_idx] : q_buf[2*r_in_idx];
  assign r_x1       = r_commit ? k_buf[2*r_in_idx+1] : q_buf[2*r_in_idx+1];

  skv_rope #(.D(D)) u_rope (
    .clk, .rst_n, .init_i(rope_init_i),
    .ld_valid_i(1'b0), .ld_idx_i('0), .ld_cos_i('0), .ld_sin_i('0),
    .in_valid_i(r_in_valid), .in_idx_i(r_in_idx), .in_commit_i(r_commit),
    .in_x0_i(r_x0), .in_x1_i(r_x1),
    .out_valid_o(r_out_valid), .out_idx_o(r_out_idx), .out_x0_o(r_y0), .out_x1_o(r_y1)
  );

  // MAC array with its operand MUX (buffer x or q chunk)
  logic          m_valid, m_out_valid;
  logic [1023:0] m_a, m_b;
  logic signed [47:0] m_sum;
  logic          kv_pop;
  logic [1:0]    last_pipe;
  logic          pop_d1;

  assign kv_ready_o = ((st == S_GEMV) || (st == S_ATTN)) && (remain != 0);
  assign kv_pop     = kv_valid_i && kv_ready_o;
  assign m_valid    = kv_pop;
  always_comb begin
    m_a = x_buf;
    if (mode == MODE_ATTN)
      for (int l = 0; l < FXP_LANES; l++) m_a[l*32 +: 32] = q_buf[chunk*FXP_LANES + l];
  end
  assign m_b = kv_data_i[1023:0];

  skv_public_mac_array u_mac (
    .clk, .rst_n, .mode_i(mode), .valid_i(m_valid), .a_i(m_a), .b_i(m_b),
    .valid_o(m_out_valid), .sum_o(m_sum)
  );

  // SwiftKV core
  logic core_start, core_finish, core_done, core_busy;
  logic [2:0] fin_pipe;
  fxp_t core_mu, core_z;
  skv_core #(.D(D)) u_core (
    .clk, .rst_n, .start_i(core_start), .finish_i(core_finish),
    .part_valid_i(m_out_valid && mode == MODE_ATTN), .part_i(m_sum),
    .part_last_i(last_pipe[1]),
    .v_valid_i(kv_pop && mode == MODE_ATTN), .v_i(kv_data_i[2047:1024]),
    .out_valid_o(a_valid_o), .out_idx_o(a_idx_o), .out_o(a_data_o), .done_o(core_done),
    .busy_o(core_busy), .mu_o(core_mu), .z_o(core_z)
  );

  assign g_valid_o = m_out_valid && (mode == MODE_GEMV);
  assign g_data_o  = m_sum[31:0];

  assign core_start  = (st == S_WB) && (chunk == 2'(NCH - 1));
  assign core_finish = fin_pipe[2];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; remain <= '0; chunk <= '0; rcnt <= '0; mode <= MODE_GEMV;
      r_which_pipe <= '0; last_pipe <= '0; fin_pipe <= '0; pop_d1 <= 1'b0; x_buf <= '0;
      wb_valid_o <= 1'b0; wb_data_o <= '0; done_o <= 1'b0;
      for (int i = 0; i < D; i++) begin q_buf[i] <= '0; k_buf[i] <= '0; v_buf[i] <= '0; end
    end else begin
      done_o     <= 1'b0;
      wb_valid_o <= 1'b0;
      last_pipe  <= {last_pipe[0], kv_pop && (chunk == 2'(NCH - 1))};
      fin_pipe   <= {fin_pipe[1:0], 1'b0};
      pop_d1     <= kv_pop;
      r_which_pipe <= {r_which_pipe[1:0], r_commit};

      // buffer writes from the dispatcher
      if (bw_valid_i) begin
        unique case (bw_sel_i)
          BUF_X: x_buf <= bw_data_i;
          BUF_Q: for (int l = 0; l < FXP_LANES; l++) q_buf[bw_idx_i*FXP_LANES + l] <= fxp_t'(bw_data_i[l*32 +: 32]);
          BUF_K: for (int l = 0; l < FXP_LANES; l++) k_buf[bw_idx_i*FXP_LANES + l] <= fxp_t'(bw_data_i[l*32 +: 32]);
          BUF_V: for (int l = 0; l < FXP_LANES; l++) v_buf[bw_idx_i*FXP_LANES + l] <= fxp_t'(bw_data_i[l*32 +: 32]);
          default: ;
        endcase
      end
      // RoPE results back into the buffer
      if (r_out_valid) begin
        if (r_which_pipe[2]) begin
          k_buf[2*r_out_idx] <= r_y0; k_buf[2*r_out_idx+1] <= r_y1;
        end else begin
          q_buf[2*r_out_idx] <= r_y0; q_buf[2*r_out_idx+1] <= r_y1;
        end
      end

      unique case (st)
        S_IDLE: begin
          chunk <= '0;
          if (gemv_i) begin
            st <= S_GEMV; remain <= len_i; mode <= MODE_GEMV;
          end else if (attn_i) begin
            st <= S_ROPE; remain <= len_i; mode <= MODE_ATTN; rcnt <= '0;
          end
        end
        S_GEMV: begin
          if (kv_pop) remain <= remain - 1'b1;
          if (remain == 0 && !pop_d1 && !m_out_valid) begin st <= S_IDLE; done_o <= 1'b1; end
        end
        S_ROPE: begin
          rcnt <= rcnt + 1'b1;
          if (rcnt == 8'(2 * NP + 3)) begin st <= S_WB; chunk <= '0; end
        end
        S_WB: begin
          wb_valid_o <= 1'b1;
          for (int l = 0; l < FXP_LANES; l++) begin
            wb_data_o[l*32 +: 32]        <= k_buf[chunk*FXP_LANES + l];
            wb_data_o[1024 + l*32 +: 32] <= v_buf[chunk*FXP_LANES + l];
          end
          chunk <= chunk + 1'b1;
          if (chunk == 2'(NCH - 1)) begin st <= S_ATTN; chunk <= '0; end
        end
        S_ATTN: begin
          if (kv_pop) begin
            chunk <= chunk + 1'b1;
            if (chunk == 2'(NCH - 1)) begin
              remain <= remain - 1'b1;
              if (remain == 16'd1) begin fin_pipe[0] <= 1'b1; st <= S_FIN; end
            end
          end
          if (remain == 0) begin fin_pipe[0] <= 1'b1; st <= S_FIN; end
        end
        S_FIN: if (core_done) begin st <= S_IDLE; done_o <= 1'b1; end
        default: st <= S_IDLE;
      endcase
    end
  end

  assign busy_o = (st != S_IDLE);

  a_cmd_idle: assert property (@(posedge clk) disable iff (!rst_n) !((gemv_i || attn_i) && st != S_IDLE))
    else $error("skv_unit: command while busy");
endmodule
