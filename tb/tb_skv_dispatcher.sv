// tb_skv_dispatcher: tests the Dispatcher's four commands with the real Global Buffer, SFU
// and 4 SKV processors around it (the accelerator top at NP=4, so a 512-element hidden
// vector). It runs the same sequence as the full-size end-to-end test at this smaller size:
// GEMV of 512 INT8 inputs to 512 outputs (x distribution to the processors, alignment of
// skewed partial-sum streams, EM-Add, packing 32 INT32 per word), INT32->FXP32
// dequantization, SCATTER of q/k/v to the heads, ATTN over 40 tokens with result
// collection, and SFU streams with INT8 packing, residual add, two-pass RMS norm, SiLU and
// Hadamard product. Every result is read back through the host port and compared with
// values computed here; the GEMV and attention cycle counts are checked against one output
// per cycle and about 4 cycles per token.
module tb_skv_dispatcher;
  import skv_pkg::*;
  localparam int NP = 4, D = 128, HID = NP * D;
  localparam int GL = 512;           // GEMV outputs
  localparam int NT = 40;            // context tokens in the attention step
  localparam int NS = 4;             // SiLU / Hadamard words
  // Global Buffer map (1024-bit words)
  localparam int A_X = 0, A_G = 32, A_F = 160, A_K = 288, A_V = 416, A_O = 544, A_I8 = 672,
                 A_R = 704, A_S = 832, A_GN = 960, A_N = 1088, A_SL = 1216, A_H = 1248,
                 A_Q0 = 1280, A_DQ = 1408;
  localparam int A_Q = (GL == HID) ? A_F : A_Q0;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic cmd_valid_i = 0, cmd_ready_o, done_o, pos_reset_i = 0;
  cmd_t cmd_i = '0;
  logic h_wr_i = 0, h_rd_i = 0;
  logic [11:0] h_addr_i = '0;
  logic [1023:0] h_wdata_i = '0, h_rdata_o;
  logic [NP-1:0] mc_valid_i = '0, mc_ready_o, wb_valid_o;
  logic [NP-1:0][2047:0] mc_data_i = '0, wb_data_o;
  logic mc_flush_i = 0;

  swiftkv_mha #(.NP(NP)) dut (.*);

  // ---------------- memory-controller model ----------------
  logic [2047:0] mcq[NP][$];
  int            hold[NP];           // cycles a processor's stream is held back
  logic [2047:0] wbq[NP][$];
  always @(negedge clk) begin
    for (int p = 0; p < NP; p++) begin
      if (hold[p] > 0) begin hold[p]--; mc_valid_i[p] = 1'b0; end
      else mc_valid_i[p] = (mcq[p].size() > 0);
      mc_data_i[p] = (mcq[p].size() > 0) ? mcq[p][0] : '0;
    end
  end
  always @(posedge clk) for (int p = 0; p < NP; p++) begin
    if (mc_valid_i[p] && mc_ready_o[p]) void'(mcq[p].pop_front());
    if (wb_valid_o[p]) wbq[p].push_back(wb_data_o[p]);
  end

  // ---------------- mechanism counters ----------------
  int n_skew = 0, n_bp = 0, n_em = 0, n_mode = 0, n_rope = 0, n_gt = 0, n_le = 0, n_i8 = 0,
      n_rms2 = 0, n_silu_pipe = 0, n_fused = 0;
  bit silu_prev = 0;
  logic mode_q = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.p_g_valid != '0 && dut.p_g_valid != '1) n_skew++;
    if ((mc_valid_i & ~mc_ready_o) != '0) n_bp++;
    if (dut.em_valid) n_em++;
    if (dut.em_valid && dut.em_scale != '0) n_fused++;
    mode_q <= dut.g_proc[0].u_proc.u_unit.mode;
    if (dut.g_proc[0].u_proc.u_unit.mode != mode_q) n_mode++;
    if (dut.g_proc[0].u_proc.u_unit.r_in_valid) n_rope++;
    if (dut.g_proc[0].u_proc.u_unit.u_core.x_valid &&  dut.g_proc[0].u_proc.u_unit.u_core.x_gt) n_gt++;
    if (dut.g_proc[0].u_proc.u_unit.u_core.x_valid && !dut.g_proc[0].u_proc.u_unit.u_core.x_gt) n_le++;
    if (dut.d_w_en && dut.u_disp.c.cmd == CMD_SFU && dut.s_op == SFU_FXP_I8) n_i8++;
    if (dut.s_valid && dut.s_ready && dut.s_op == SFU_RMSNORM && dut.s_rms_pass) n_rms2++;
    // SiLU elements accepted on consecutive cycles (the pipelined SiLU path)
    if (dut.s_valid && dut.s_ready && dut.s_op == SFU_SILU) begin
      if (silu_prev) n_silu_pipe++;
      silu_prev = 1;
    end else silu_prev = 0;
  end

  // ---------------- helpers ----------------
  function automatic fxp_t rnd(real lim);
    return fxp_t'($rtoi(((real'($urandom_range(0, 1000000)) / 1000000.0) * 2.0 - 1.0) * lim * 131072.0));
  endfunction
  function automatic real r(fxp_t x); return real'(x) / 131072.0; endfunction
  function automatic real absr(real x); return x < 0 ? -x : x; endfunction

  task automatic hwrite(int a, logic [1023:0] d);
    @(negedge clk); h_wr_i = 1; h_addr_i = 12'(a); h_wdata_i = d;
    @(negedge clk); h_wr_i = 0;
  endtask
  task automatic hread(int a, output logic [1023:0] d);
    @(negedge clk); h_rd_i = 1; h_addr_i = 12'(a);
    @(negedge clk); h_rd_i = 0; d = h_rdata_o;
  endtask
  function automatic fxp_t lane(logic [1023:0] w, int l); return fxp_t'(w[l*32 +: 32]); endfunction

  // issue one command and wait for done; returns the cycles taken
  task automatic run(cmd_e cm, sfu_op_e op, buf_sel_e bs, int sa, int sb, int ds, int len,
                     fxp_t scale, output int ncyc);
    int t0;
    @(negedge clk);
    while (!cmd_ready_o) @(negedge clk);
    cmd_valid_i = 1;
    cmd_i = '{cmd: cm, sfu_op: op, bsel: bs, src_a: 16'(sa), src_b: 16'(sb), dst: 16'(ds),
              len: 16'(len), scale: scale};
    t0 = cyc;
    @(negedge clk); cmd_valid_i = 0;
    while (!done_o) @(negedge clk);
    ncyc = cyc - t0;
  endtask

  // ---------------- test data ----------------
  logic signed [7:0] x8[HID];
  int                gref[GL];
  fxp_t              fref[GL];
  fxp_t              qv[HID], kv[HID], vv[HID];
  fxp_t              ov[HID];

  task automatic check_exact(string what, int addr, int nwords, ref fxp_t expv[]);
    logic [1023:0] w;
    int bad = 0;
    for (int a = 0; a < nwords; a++) begin
      hread(addr + a, w);
      for (int l = 0; l < 32; l++) begin
        checks++;
        if (lane(w, l) != expv[a*32 + l]) begin
          failures++; bad++;
          if (bad < 5) $display("FAIL %s [%0d]: %0d vs %0d", what, a*32+l, lane(w, l), expv[a*32+l]);
        end
      end
    end
  endtask

  initial begin
    int ncyc;
    logic [1023:0] w;
    fxp_t expv[];
    for (int p = 0; p < NP; p++) hold[p] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk); pos_reset_i = 1; @(negedge clk); pos_reset_i = 0;

    // ===== 1. GEMV =====
    foreach (x8[i]) x8[i] = 8'($urandom);
    for (int a = 0; a < HID / 128; a++) begin
      for (int i = 0; i < 128; i++) w[i*8 +: 8] = x8[a*128 + i];
      hwrite(A_X + a, w);
    end
    foreach (gref[j]) gref[j] = 0;
    for (int p = 0; p < NP; p++) begin
      for (int j = 0; j < GL; j++) begin
        logic [2047:0] ww;
        ww = '0;
        for (int i = 0; i < 128; i += 8) ww[i*4 +: 32] = $urandom;
        for (int i = 0; i < 128; i++) gref[j] += int'(x8[p*128 + i]) * int'($signed(ww[i*4 +: 4]));
        mcq[p].push_back(ww);
      end
      hold[p] = 40 + (p % 5);          // streams start up to 4 cycles apart, after x is sent
    end
    run(CMD_GEMV, SFU_ADD, BUF_X, A_X, 0, A_G, GL, 0, ncyc);
    $display("GEMV %0d x %0d: %0d cycles", GL, HID, ncyc);
    checks++;
    if (ncyc > GL + 80) begin failures++; $display("FAIL GEMV rate: %0d cycles for %0d outputs", ncyc, GL); end
    expv = new[GL];
    foreach (gref[j]) expv[j] = gref[j];
    check_exact("gemv", A_G, GL / 32, expv);

    // ===== 2. dequantize =====
    begin
      fxp_t sc;
      sc = fxp_t'(32'sd3);               // 3 * 2^-17: keeps |q| around 1
      run(CMD_SFU, SFU_I32_FXP, BUF_X, A_G, A_G, A_F, GL / 32, sc, ncyc);
      foreach (fref[j]) begin fref[j] = fxp_t'(gref[j] * 3); expv[j] = fref[j]; end
      check_exact("dequant", A_F, GL / 32, expv);
      // the same dequantization fused into a second GEMV (new weights): the EM-Add scales
      // every sum on the way, at the same one-output-per-cycle rate
      begin
        int g2[];
        g2 = new[GL];
        foreach (g2[j]) g2[j] = 0;
        for (int p = 0; p < NP; p++) begin
          for (int j = 0; j < GL; j++) begin
            logic [2047:0] ww;
            ww = '0;
            for (int i = 0; i < 128; i += 8) ww[i*4 +: 32] = $urandom;
            for (int i = 0; i < 128; i++) g2[j] += int'(x8[p*128 + i]) * int'($signed(ww[i*4 +: 4]));
            mcq[p].push_back(ww);
          end
        end
        run(CMD_GEMV, SFU_ADD, BUF_X, A_X, 0, A_DQ, GL, sc, ncyc);
        $display("GEMV with fused dequantization: %0d cycles", ncyc);
        checks++;
        if (ncyc > GL + 80) begin failures++; $display("FAIL fused GEMV rate: %0d cycles", ncyc); end
        foreach (g2[j]) expv[j] = fxp_t'(g2[j] * 3);
        check_exact("fused dequant", A_DQ, GL / 32, expv);
      end
    end

    // ===== 3. attention =====
    begin
      fxp_t kc[NP][][D], vc[NP][][D];
      real qr[D], kr[D], s[], m, zs, outr[D];
      int pos;
      pos = 1;                            // first step after the position reset
      for (int i = 0; i < HID; i++) begin
        qv[i] = (GL == HID) ? fref[i] : rnd(2.0);
        kv[i] = rnd(1.5); vv[i] = rnd(2.0);
      end
      for (int a = 0; a < HID / 32; a++) begin
        logic [1023:0] wk, wv, wq;
        for (int l = 0; l < 32; l++) begin
          wq[l*32 +: 32] = qv[a*32+l]; wk[l*32 +: 32] = kv[a*32+l]; wv[l*32 +: 32] = vv[a*32+l];
        end
        if (GL != HID) hwrite(A_Q + a, wq);
        hwrite(A_K + a, wk); hwrite(A_V + a, wv);
      end
      run(CMD_SCATTER, SFU_ADD, BUF_Q, A_Q, 0, 0, 0, 0, ncyc);
      run(CMD_SCATTER, SFU_ADD, BUF_K, A_K, 0, 0, 0, 0, ncyc);
      run(CMD_SCATTER, SFU_ADD, BUF_V, A_V, 0, 0, 0, 0, ncyc);
      // cached tokens (already rotated), queued ahead of the new token
      for (int p = 0; p < NP; p++) begin
        kc[p] = new[NT]; vc[p] = new[NT];
        for (int t = 0; t < NT - 1; t++) begin
          for (int i = 0; i < D; i++) begin kc[p][t][i] = rnd(1.5); vc[p][t][i] = rnd(2.0); end
          for (int c = 0; c < 4; c++) begin
            logic [2047:0] ww;
            for (int l = 0; l < 32; l++) begin
              ww[l*32 +: 32] = kc[p][t][c*32+l]; ww[1024 + l*32 +: 32] = vc[p][t][c*32+l];
            end
            mcq[p].push_back(ww);
          end
        end
        wbq[p].delete();
      end
      fork
        run(CMD_ATTN, SFU_ADD, BUF_X, 0, 0, A_O, NT, 0, ncyc);
        begin  // append each head's written-back token once it appears
          for (int p = 0; p < NP; p++) begin
            while (wbq[p].size() < 4) @(negedge clk);
            for (int c = 0; c < 4; c++) mcq[p].push_back(wbq[p][c]);
          end
        end
      join
      $display("ATTN %0d heads x %0d tokens: %0d cycles", NP, NT, ncyc);
      checks++;
      if (ncyc > 4 * NT + 2 * D + 160) begin failures++; $display("FAIL attention time %0d", ncyc); end
      // reference per head
      for (int a = 0; a < HID / 32; a++) begin
        hread(A_O + a, w);
        for (int l = 0; l < 32; l++) ov[a*32 + l] = lane(w, l);
      end
      for (int p = 0; p < NP; p++) begin
        for (int i = 0; i < D / 2; i++) begin
          real th, x0, x1;
          th = real'(pos) * $pow(10000.0, -2.0 * real'(i) / 128.0);
          x0 = r(qv[p*D + 2*i]); x1 = r(qv[p*D + 2*i + 1]);
          qr[2*i] = x0 * $cos(th) - x1 * $sin(th); qr[2*i+1] = x0 * $sin(th) + x1 * $cos(th);
          x0 = r(kv[p*D + 2*i]); x1 = r(kv[p*D + 2*i + 1]);
          kr[2*i] = x0 * $cos(th) - x1 * $sin(th); kr[2*i+1] = x0 * $sin(th) + x1 * $cos(th);
        end
        for (int c = 0; c < 4; c++) for (int l = 0; l < 32; l++) begin
          kc[p][NT-1][c*32+l] = fxp_t'(wbq[p][c][l*32 +: 32]);
          vc[p][NT-1][c*32+l] = fxp_t'(wbq[p][c][1024 + l*32 +: 32]);
          checks += 2;
          if (absr(r(kc[p][NT-1][c*32+l]) - kr[c*32+l]) > 1.0e-4) begin
            failures++; $display("FAIL head %0d rope k %0d", p, c*32+l);
          end
          if (vc[p][NT-1][c*32+l] != vv[p*D + c*32+l]) begin failures++; $display("FAIL head %0d wb v", p); end
        end
        s = new[NT];
        m = -1.0e30;
        for (int t = 0; t < NT; t++) begin
          s[t] = 0.0;
          for (int i = 0; i < D; i++) s[t] += qr[i] * r(kc[p][t][i]);
          s[t] /= $sqrt(128.0);
          if (s[t] > m) m = s[t];
        end
        zs = 0.0; foreach (outr[i]) outr[i] = 0.0;
        for (int t = 0; t < NT; t++) begin
          real e; e = $exp(s[t] - m); zs += e;
          for (int i = 0; i < D; i++) outr[i] += e * r(vc[p][t][i]);
        end
        for (int i = 0; i < D; i++) begin
          checks++;
          if (absr(r(ov[p*D + i]) - outr[i] / zs) > 2.0e-3) begin
            failures++;
            if (failures < 10) $display("FAIL head %0d attn %0d: %f vs %f", p, i, r(ov[p*D+i]), outr[i] / zs);
          end
        end
      end
    end

    // ===== 4. SFU operations on the attention output =====
    begin
      fxp_t sc, res[HID], gain[HID], sum[HID];
      real ms, inv;
      // FXP -> INT8, packed 128 per word
      sc = fxp_t'(32'sd40 <<< FRAC);     // x40: outputs spread over the INT8 range, some saturate
      run(CMD_SFU, SFU_FXP_I8, BUF_X, A_O, A_O, A_I8, HID / 32, sc, ncyc);
      for (int a = 0; a < HID / 128; a++) begin
        hread(A_I8 + a, w);
        for (int b = 0; b < 128; b++) begin
          longint p; int ev;
          p  = longint'(ov[a*128 + b]) * longint'(sc);
          ev = int'((p + (64'sd1 <<< 33)) >>> 34);
          if (ev > 127) ev = 127; else if (ev < -128) ev = -128;
          checks++;
          if (int'($signed(w[b*8 +: 8])) != ev) begin
            failures++; if (failures < 10) $display("FAIL i8 %0d: %0d vs %0d", a*128+b, $signed(w[b*8 +: 8]), ev);
          end
        end
      end
      // residual add
      for (int a = 0; a < HID / 32; a++) begin
        for (int l = 0; l < 32; l++) begin res[a*32+l] = rnd(3.0); gain[a*32+l] = rnd(1.5); end
        for (int l = 0; l < 32; l++) w[l*32 +: 32] = res[a*32+l];
        hwrite(A_R + a, w);
        for (int l = 0; l < 32; l++) w[l*32 +: 32] = gain[a*32+l];
        hwrite(A_GN + a, w);
      end
      run(CMD_SFU, SFU_ADD, BUF_X, A_O, A_R, A_S, HID / 32, 0, ncyc);
      expv = new[HID];
      for (int i = 0; i < HID; i++) begin sum[i] = ov[i] + res[i]; expv[i] = sum[i]; end
      check_exact("add", A_S, HID / 32, expv);
      // RMS norm over the whole hidden vector
      run(CMD_SFU, SFU_RMSNORM, BUF_X, A_S, A_GN, A_N, HID / 32, 0, ncyc);
      ms = 0.0;
      for (int i = 0; i < HID; i++) ms += r(sum[i]) * r(sum[i]);
      inv = 1.0 / $sqrt(ms / real'(HID) + 1.0e-5);
      for (int a = 0; a < HID / 32; a++) begin
        hread(A_N + a, w);
        for (int l = 0; l < 32; l++) begin
          real ex; ex = r(sum[a*32+l]) * inv * r(gain[a*32+l]);
          checks++;
          if (absr(r(lane(w, l)) - ex) > 1.0e-3 + 1.0e-3 * absr(ex)) begin
            failures++; if (failures < 10) $display("FAIL rms %0d: %f vs %f", a*32+l, r(lane(w, l)), ex);
          end
        end
      end
      // SiLU, then Hadamard product with the gain vector
      run(CMD_SFU, SFU_SILU, BUF_X, A_N, A_N, A_SL, NS, 0, ncyc);
      $display("SiLU of %0d elements: %0d cycles", NS * 32, ncyc);
      // each word: 2-cycle read, 32 elements one per cycle, then the pipeline latency
      checks++;
      if (ncyc > NS * (32 + 70) + 20) begin failures++; $display("FAIL SiLU time %0d", ncyc); end
      for (int a = 0; a < NS; a++) begin
        logic [1023:0] wn;
        hread(A_N + a, wn);
        hread(A_SL + a, w);
        for (int l = 0; l < 32; l++) begin
          real xx, ex; xx = r(lane(wn, l)); ex = xx / (1.0 + $exp(-xx));
          checks++;
          if (absr(r(lane(w, l)) - ex) > 1.0e-3) begin
            failures++; if (failures < 10) $display("FAIL silu %0d: %f vs %f", a*32+l, r(lane(w, l)), ex);
          end
        end
      end
      run(CMD_SFU, SFU_HADAMARD, BUF_X, A_SL, A_GN, A_H, NS, 0, ncyc);
      for (int a = 0; a < NS; a++) begin
        logic [1023:0] ws;
        hread(A_SL + a, ws);
        hread(A_H + a, w);
        for (int l = 0; l < 32; l++) begin
          checks++;
          if (lane(w, l) != fxp_mul(lane(ws, l), gain[a*32+l])) begin failures++; $display("FAIL hadamard"); end
        end
      end
    end

    // ===== mechanisms =====
    $display("mechanisms: skew=%0d backpressure=%0d emadd=%0d modeswitch=%0d rope=%0d gt=%0d le=%0d i8pack=%0d rms2=%0d silu_pipe=%0d fused=%0d",
             n_skew, n_bp, n_em, n_mode, n_rope, n_gt, n_le, n_i8, n_rms2, n_silu_pipe, n_fused);
    checks += 10;
    if (n_skew == 0) begin failures++; $display("FAIL no GEMV skew"); end
    if (n_bp == 0) begin failures++; $display("FAIL no KV memory back-pressure"); end
    if (n_em == 0) begin failures++; $display("FAIL no EM-Add"); end
    if (n_mode < 1) begin failures++; $display("FAIL no MAC mode switch"); end
    if (n_rope == 0) begin failures++; $display("FAIL no RoPE"); end
    if (n_gt == 0) begin failures++; $display("FAIL no s>mu update"); end
    if (n_le == 0) begin failures++; $display("FAIL no s<=mu update"); end
    if (n_i8 == 0) begin failures++; $display("FAIL no INT8 packing"); end
    if (n_rms2 == 0) begin failures++; $display("FAIL no RMS second pass"); end
    if (n_silu_pipe == 0) begin failures++; $display("FAIL no back-to-back SiLU"); end
    if (n_fused == 0) begin failures++; $display("FAIL no fused dequantization"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #5000000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
