// skv_dispatcher: moves data between the Global Buffer, the SKV Processor Array and the
// SFU (Fig. 4), one command at a time.
//
// Commands (cmd_t, accepted on cmd_valid_i while cmd_ready_o; done_o pulses at the end):
//  CMD_GEMV    x = 4096 INT8 at GB words src_a .. src_a+NP-1 is split into NP chunks of 128,
//              one per processor (paper: "splits x in R^{1x4096} to 32 processors"). Every
//              processor then produces len partial INT32 sums from its weight stream; the
//              dispatcher lines the partials up, the SFU's EM-Add sums them, and the INT32
//              outputs are packed 32 per GB word from dst on. One output per cycle.
//              A non-zero scale makes the EM-Add dequantize on the way (INT32 * scale,
//              FXP32 out), so no separate SFU_I32_FXP pass is needed.
//  CMD_SCATTER a 4096-element FXP32 vector (128 GB words from src_a) is split by head: head
//              p gets words src_a+4p .. src_a+4p+3 as q, k or v (bsel).
//  CMD_ATTN    all processors run RoPE + attention over len tokens in parallel; their
//              4 result chunks each are collected and written, concatenated by head, to
//              128 GB words from dst (paper: "collects results into the Global Buffer").
//  CMD_SFU     len GB words from src_a (and src_b) go element by element through the SFU
//              (sfu_op) and back to GB words from dst. SFU_RMSNORM makes two passes: the
//              first accumulates, the second applies the gain vector at src_b.
//              SFU_FXP_I8 packs its INT8 results 128 per word (four input words per
//              output word, element i of input word w at byte 32*(w mod 4)+i), the layout
//              CMD_GEMV reads its input in.
// The command set, the word layouts and the alignment FIFOs are this design's choices; the
// paper gives the dispatcher's function only. GEMV partials from different processors are
// aligned in NP small FIFOs (depth 8), so processors whose weight streams start a few
// cycles apart still add up correctly; an assertion flags overflow.
module skv_dispatcher
  import skv_pkg::*;
#(
  parameter int unsigned NP    = NPROC,   // processors (paper: 32)
  parameter int unsigned GB_AW = 12       // Global Buffer address width
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // command
  input  logic                  cmd_valid_i,
  output logic                  cmd_ready_o,
  input  cmd_t                  cmd_i,
  output logic                  done_o,
  // Global Buffer
  output logic                  ra_en_o,
  output logic [GB_AW-1:0]      ra_addr_o,
  input  logic [1023:0]         ra_data_i,
  output logic                  rb_en_o,
  output logic [GB_AW-1:0]      rb_addr_o,
  input  logic [1023:0]         rb_data_i,
  output logic                  w_en_o,
  output logic [GB_AW-1:0]      w_addr_o,
  output logic [1023:0]         w_data_o,
  // processor array
  output logic [NP-1:0]         p_bw_valid_o,
  output buf_sel_e              p_bw_sel_o,
  output logic [1:0]            p_bw_idx_o,
  output logic [1023:0]         p_bw_data_o,
  output logic                  p_gemv_o,
  output logic                  p_attn_o,
  output logic [15:0]           p_len_o,
  input  logic [NP-1:0]         p_g_valid_i,
  input  logic [NP-1:0][31:0]   p_g_data_i,
  input  logic [NP-1:0]         p_a_valid_i,
  input  logic [NP-1:0][1:0]    p_a_idx_i,
  input  logic [NP-1:0][1023:0] p_a_data_i,
  input  logic [NP-1:0]         p_done_i,
  // SFU
  output logic                  em_valid_o,
  output logic [NP*32-1:0]      em_o,
  output fxp_t                  em_scale_o,
  input  logic                  em_valid_i,
  input  logic signed [31:0]    em_i,
  output logic                  s_valid_o,
  input  logic                  s_ready_i,
  output sfu_op_e               s_op_o,
  output fxp_t                  s_a_o,
  output fxp_t                  s_b_o,
  output fxp_t                  s_scale_o,
  output logic                  s_rms_pass_o,
  output logic                  s_rms_last_o,
  output logic [15:0]           s_rms_n_o,
  input  logic                  s_out_valid_i,
  input  logic [31:0]           s_out_i
);
  typedef enum logic [3:0] {
    D_IDLE, D_GX, D_GRUN, D_SCAT, D_ATTN, D_ADRAIN, D_SRD, D_SLAT, D_SWAIT, D_SFEED, D_SWR, D_DONE
  } dstate_e;
  dstate_e     st;
  cmd_t        c;
  logic [15:0] cnt;          // general counter (words read / outputs written)
  logic [15:0] ocnt;         // GEMV outputs written
  logic [5:0]  e;            // SFU element index within a word
  logic [5:0]  oe;           // SFU outputs collected within a word
  logic        rms_pass;
  logic [1023:0] wa, wb, wo; // SFU operand and result words
  logic [1023:0] pack;       // GEMV output word
  logic [NP-1:0] pdone;

  assign cmd_ready_o = (st == D_IDLE);

  // ---------------- GEMV alignment FIFOs ----------------
  localparam int unsigned FD = 8;
  logic [31:0] gf [NP][FD];
  logic [2:0]  gwp [NP];
  logic [2:0]  grp;
  logic [3:0]  gcnt [NP];
  logic        all_avail;
  always_comb begin
    all_avail = 1'b1;
    for (int p = 0; p < NP; p++) if (gcnt[p] == 0) all_avail = 1'b0;
  end
  logic gpop;
  assign gpop = (st == D_GRUN) && all_avail;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      grp <= '0;
      for (int p = 0; p < NP; p++) begin gwp[p] <= '0; gcnt[p] <= '0; end
    end else begin
      if (gpop) grp <= grp + 1'b1;
      for (int p = 0; p < NP; p++) begin
        if (p_g_valid_i[p]) begin
          gf[p][gwp[p]] <= p_g_data_i[p];
          gwp[p] <= gwp[p] + 1'b1;
        end
        gcnt[p] <= gcnt[p] + (p_g_valid_i[p] ? 4'd1 : 4'd0) - (gpop ? 4'd1 : 4'd0);
      end
    end
  end

  always_comb begin
    em_valid_o = gpop;
    em_scale_o = c.scale;
    for (int p = 0; p < NP; p++) em_o[p*32 +: 32] = gf[p][grp];
  end

  // ---------------- attention result collection ----------------
  logic [1023:0] abuf [NP*4];
  always_ff @(posedge clk) begin
    for (int p = 0; p < NP; p++)
      if (p_a_valid_i[p]) abuf[p*4 + int'(p_a_idx_i[p])] <= p_a_data_i[p];
  end

  // ---------------- SFU feed ----------------
  assign s_valid_o    = (st == D_SFEED) && (e < 6'd32);
  assign s_op_o       = c.sfu_op;
  assign s_a_o        = fxp_t'(wa[e[4:0]*32 +: 32]);
  assign s_b_o        = fxp_t'(wb[e[4:0]*32 +: 32]);
  assign s_scale_o    = c.scale;
  assign s_rms_pass_o = rms_pass;
  assign s_rms_last_o = !rms_pass && (e == 6'd31) && (cnt == c.len - 1'b1);
  assign s_rms_n_o    = 16'(c.len * 32);
  logic rms_op, i8_op;
  assign rms_op = (c.sfu_op == SFU_RMSNORM);
  assign i8_op  = (c.sfu_op == SFU_FXP_I8);

  // ---------------- main FSM ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= D_IDLE; c <= '0; cnt <= '0; ocnt <= '0; e <= '0; oe <= '0; rms_pass <= 1'b0;
      wa <= '0; wb <= '0; wo <= '0; pack <= '0; pdone <= '0; done_o <= 1'b0;
      ra_en_o <= 1'b0; ra_addr_o <= '0; rb_en_o <= 1'b0; rb_addr_o <= '0;
      w_en_o <= 1'b0; w_addr_o <= '0; w_data_o <= '0;
      p_bw_valid_o <= '0; p_bw_sel_o <= BUF_X; p_bw_idx_o <= '0; p_bw_data_o <= '0;
      p_gemv_o <= 1'b0; p_attn_o <= 1'b0; p_len_o <= '0;
    end else begin
      done_o <= 1'b0; ra_en_o <= 1'b0; rb_en_o <= 1'b0; w_en_o <= 1'b0;
      p_bw_valid_o <= '0; p_gemv_o <= 1'b0; p_attn_o <= 1'b0;
      unique case (st)
        D_IDLE: if (cmd_valid_i) begin
          c <= cmd_i; cnt <= '0; ocnt <= '0; pdone <= '0; rms_pass <= 1'b0;
          unique case (cmd_i.cmd)
            CMD_GEMV:    st <= D_GX;
            CMD_SCATTER: st <= D_SCAT;
            CMD_ATTN:    begin st <= D_ATTN; p_attn_o <= 1'b1; p_len_o <= cmd_i.len; end
            default:     st <= D_SRD;
          endcase
        end
        // ---- GEMV: distribute x, then collect ----
        D_GX: begin
          if (cnt < 16'(NP)) begin
            ra_en_o <= 1'b1; ra_addr_o <= GB_AW'(c.src_a + cnt);
          end
          if (cnt >= 2) begin                 // address and RAM registers: 2 cycles
            p_bw_valid_o[cnt - 2] <= 1'b1;
            p_bw_sel_o  <= BUF_X;
            p_bw_data_o <= ra_data_i;
          end
          cnt <= cnt + 1'b1;
          if (cnt == 16'(NP + 1)) begin
            st <= D_GRUN; p_gemv_o <= 1'b1; p_len_o <= c.len; pack <= '0;
          end
        end
        D_GRUN: if (em_valid_i) begin
          logic [1023:0] np_;
          np_ = pack;
          np_[ocnt[4:0]*32 +: 32] = em_i;
          pack <= np_;
          if (ocnt[4:0] == 5'd31 || ocnt == c.len - 1'b1) begin
            w_en_o <= 1'b1; w_addr_o <= GB_AW'(c.dst + (ocnt >> 5)); w_data_o <= np_;
            pack <= '0;
          end
          ocnt <= ocnt + 1'b1;
          if (ocnt == c.len - 1'b1) st <= D_DONE;
        end
        // ---- SCATTER ----
        D_SCAT: begin
          if (cnt < 16'(NP * 4)) begin
            ra_en_o <= 1'b1; ra_addr_o <= GB_AW'(c.src_a + cnt);
          end
          if (cnt >= 2) begin
            p_bw_valid_o[(cnt - 2) >> 2] <= 1'b1;
            p_bw_sel_o  <= c.bsel;
            p_bw_idx_o  <= 2'(cnt - 2);
            p_bw_data_o <= ra_data_i;
          end
          cnt <= cnt + 1'b1;
          if (cnt == 16'(NP * 4 + 1)) st <= D_DONE;
        end
        // ---- ATTN ----
        D_ATTN: begin
          pdone <= pdone | p_done_i;
          if ((pdone | p_done_i) == '1) begin st <= D_ADRAIN; cnt <= '0; end
        end
        D_ADRAIN: begin
          w_en_o <= 1'b1; w_addr_o <= GB_AW'(c.dst + cnt); w_data_o <= abuf[cnt[$clog2(NP*4)-1:0]];
          cnt <= cnt + 1'b1;
          if (cnt == 16'(NP * 4 - 1)) st <= D_DONE;
        end
        // ---- SFU streams ----
        D_SRD: begin
          ra_en_o <= 1'b1; ra_addr_o <= GB_AW'(c.src_a + cnt);
          rb_en_o <= 1'b1; rb_addr_o <= GB_AW'(c.src_b + cnt);
          st <= D_SLAT;
        end
        D_SLAT: st <= D_SWAIT;               // address register, then RAM register
        D_SWAIT: begin
          wa <= ra_data_i; wb <= rb_data_i; e <= '0; oe <= '0;
          if (!i8_op || cnt[1:0] == 2'd0) wo <= '0;
          st <= D_SFEED;
        end
        D_SFEED: begin
          if (s_valid_o && s_ready_i) e <= e + 1'b1;
          if (s_out_valid_i) begin
            if (i8_op) wo[{cnt[1:0], oe[4:0]}*8 +: 8] <= s_out_i[7:0];
            else       wo[oe[4:0]*32 +: 32] <= s_out_i;
            oe <= oe + 1'b1;
          end
          if (rms_op && !rms_pass) begin
            if (e == 6'd32) begin       // pass 0 word consumed
              cnt <= cnt + 1'b1;
              st  <= D_SRD;
              if (cnt == c.len - 1'b1) begin rms_pass <= 1'b1; cnt <= '0; end
            end
          end else if (oe == 6'd32) st <= D_SWR;
        end
        D_SWR: begin
          if (!i8_op) begin
            w_en_o <= 1'b1; w_addr_o <= GB_AW'(c.dst + cnt); w_data_o <= wo;
          end else if (cnt[1:0] == 2'd3 || cnt == c.len - 1'b1) begin
            w_en_o <= 1'b1; w_addr_o <= GB_AW'(c.dst + (cnt >> 2)); w_data_o <= wo;
          end
          cnt <= cnt + 1'b1;
          st  <= (cnt == c.len - 1'b1) ? D_DONE : D_SRD;
        end
        D_DONE: begin done_o <= 1'b1; st <= D_IDLE; end
        default: st <= D_IDLE;
      endcase
    end
  end

  for (genvar p = 0; p < NP; p++) begin : g_fifo_chk
    a_fifo: assert property (@(posedge clk) disable iff (!rst_n) !(p_g_valid_i[p] && gcnt[p] == 4'(FD)))
      else $error("dispatcher: GEMV FIFO %0d overflow", p);
  end
  a_sfu_len: assert property (@(posedge clk) disable iff (!rst_n)
                              !(cmd_valid_i && cmd_ready_o && cmd_i.cmd == CMD_SFU && cmd_i.len == 0))
    else $error("dispatcher: empty SFU command");
endmodule
