// tb_skv_unit: drives one SKV unit through a GEMV and two decode-attention steps.
//  * GEMV: a random INT8 chunk x and 50 random INT4 weight words; each INT32 partial sum is
//    checked against an exact integer dot product, and the rate must be one per cycle.
//  * ATTN: random q, k, v for the new token plus a random, already rotated past KV cache.
//    The test checks the write-back words (RoPE(k) at the next position, v) and the
//    attention output against softmax(q' K^T / sqrt(128)) V in real arithmetic, where
//    q' = RoPE(q). The KV stream given to the unit is the past cache followed by the new
//    token's written-back words, as the memory system would provide it.
module tb_skv_unit;
  import skv_pkg::*;
  localparam int D = 128;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic bw_valid_i = 0, gemv_i = 0, attn_i = 0, rope_init_i = 0;
  buf_sel_e bw_sel_i = BUF_X;
  logic [1:0] bw_idx_i = '0;
  logic [1023:0] bw_data_i = '0;
  logic [15:0] len_i = '0;
  logic g_valid_o, a_valid_o, done_o, busy_o, kv_valid_i = 0, kv_ready_o, wb_valid_o;
  logic signed [31:0] g_data_o;
  logic [1:0] a_idx_o;
  logic [1023:0] a_data_o;
  logic [2047:0] kv_data_i = '0, wb_data_o;
  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  skv_unit dut (.*);

  // ---- memory model: a queue of words offered on the kv port ----
  logic [2047:0] kvq[$];
  always @(negedge clk) begin
    kv_valid_i = (kvq.size() > 0);
    kv_data_i  = (kvq.size() > 0) ? kvq[0] : '0;
  end
  always @(posedge clk) if (kv_valid_i && kv_ready_o) void'(kvq.pop_front());

  // ---- output capture ----
  int   gq[$];
  int   gcyc[$];
  fxp_t aout[D];
  logic [2047:0] wbq[$];
  always @(posedge clk) begin
    if (g_valid_o) begin gq.push_back(g_data_o); gcyc.push_back(cyc); end
    if (a_valid_o) for (int l = 0; l < 32; l++) aout[a_idx_o*32 + l] = fxp_t'(a_data_o[l*32 +: 32]);
    if (wb_valid_o) wbq.push_back(wb_data_o);
  end

  function automatic fxp_t rnd(real lim);
    return fxp_t'($rtoi(((real'($urandom_range(0, 1000000)) / 1000000.0) * 2.0 - 1.0) * lim * 131072.0));
  endfunction
  function automatic real r(fxp_t x); return real'(x) / 131072.0; endfunction
  function automatic real absr(real x); return x < 0 ? -x : x; endfunction

  task automatic gemv_test(int nout);
    logic [1023:0] x;
    int exp_v[$];
    for (int i = 0; i < 128; i++) x[i*8 +: 8] = 8'($urandom);
    @(negedge clk); bw_valid_i = 1; bw_sel_i = BUF_X; bw_data_i = x;
    @(negedge clk); bw_valid_i = 0;
    for (int j = 0; j < nout; j++) begin
      logic [2047:0] w; int s;
      w = '0; s = 0;
      for (int i = 0; i < 128; i++) begin
        w[i*4 +: 4] = 4'($urandom);
        s += int'($signed(x[i*8 +: 8])) * int'($signed(w[i*4 +: 4]));
      end
      for (int i = 512; i < 2048; i += 32) w[i +: 32] = $urandom;  // unused bits
      kvq.push_back(w); exp_v.push_back(s);
    end
    gq.delete(); gcyc.delete();
    @(negedge clk); gemv_i = 1; len_i = 16'(nout);
    @(negedge clk); gemv_i = 0;
    while (!done_o) @(negedge clk);
    checks++;
    if (gq.size() != nout) begin failures++; $display("FAIL gemv count %0d", gq.size()); end
    for (int j = 0; j < nout && j < gq.size(); j++) begin
      checks++;
      if (gq[j] != exp_v[j]) begin failures++; $display("FAIL gemv %0d: %0d vs %0d", j, gq[j], exp_v[j]); end
    end
    checks++;
    if (gcyc[nout-1] - gcyc[0] != nout - 1) begin failures++; $display("FAIL gemv rate"); end
  endtask

  task automatic attn_test(int npast, int pos);   // pos = position of the new token
    fxp_t q[D], k[D], v[D], kc[][D], vc[][D];
    real qr[D], kr[D], s[], m, zs, outr[D];
    int t0, ncyc;
    kc = new[npast + 1]; vc = new[npast + 1]; s = new[npast + 1];
    foreach (q[i]) begin q[i] = rnd(2.0); k[i] = rnd(1.5); v[i] = rnd(2.0); end
    for (int t = 0; t < npast; t++) for (int i = 0; i < D; i++) begin kc[t][i] = rnd(1.5); vc[t][i] = rnd(2.0); end
    // reference RoPE
    for (int p = 0; p < D / 2; p++) begin
      real th; th = real'(pos) * $pow(10000.0, -2.0 * real'(p) / 128.0);
      qr[2*p]   = r(q[2*p]) * $cos(th) - r(q[2*p+1]) * $sin(th);
      qr[2*p+1] = r(q[2*p]) * $sin(th) + r(q[2*p+1]) * $cos(th);
      kr[2*p]   = r(k[2*p]) * $cos(th) - r(k[2*p+1]) * $sin(th);
      kr[2*p+1] = r(k[2*p]) * $sin(th) + r(k[2*p+1]) * $cos(th);
    end
    // load q, k, v
    for (int c = 0; c < 4; c++) begin
      for (int sel = 1; sel <= 3; sel++) begin
        @(negedge clk);
        bw_valid_i = 1; bw_sel_i = buf_sel_e'(sel); bw_idx_i = 2'(c);
        for (int l = 0; l < 32; l++)
          bw_data_i[l*32 +: 32] = (sel == 1) ? q[c*32+l] : (sel == 2) ? k[c*32+l] : v[c*32+l];
      end
    end
    @(negedge clk); bw_valid_i = 0;
    wbq.delete();
    @(negedge clk); attn_i = 1; len_i = 16'(npast + 1);
    @(negedge clk); attn_i = 0;
    t0 = cyc;
    // wait for the write-back and append past cache + new token to the stream
    while (wbq.size() < 4) @(negedge clk);
    for (int t = 0; t < npast; t++) for (int c = 0; c < 4; c++) begin
      logic [2047:0] w;
      for (int l = 0; l < 32; l++) begin w[l*32 +: 32] = kc[t][c*32+l]; w[1024 + l*32 +: 32] = vc[t][c*32+l]; end
      kvq.push_back(w);
    end
    for (int c = 0; c < 4; c++) begin
      kvq.push_back(wbq[c]);
      for (int l = 0; l < 32; l++) begin
        kc[npast][c*32+l] = fxp_t'(wbq[c][l*32 +: 32]);
        vc[npast][c*32+l] = fxp_t'(wbq[c][1024 + l*32 +: 32]);
        checks += 2;
        if (absr(r(kc[npast][c*32+l]) - kr[c*32+l]) > 1.0e-4) begin
          failures++; $display("FAIL rope k %0d: %f vs %f", c*32+l, r(kc[npast][c*32+l]), kr[c*32+l]);
        end
        if (vc[npast][c*32+l] != v[c*32+l]) begin failures++; $display("FAIL wb v"); end
      end
    end
    while (!done_o) @(negedge clk);
    ncyc = cyc - t0;
    // reference attention (with the keys the unit actually streamed)
    m = -1.0e30;
    for (int t = 0; t <= npast; t++) begin
      s[t] = 0.0;
      for (int i = 0; i < D; i++) s[t] += qr[i] * r(kc[t][i]);
      s[t] /= $sqrt(128.0);
      if (s[t] > m) m = s[t];
    end
    zs = 0.0; foreach (outr[i]) outr[i] = 0.0;
    for (int t = 0; t <= npast; t++) begin
      real w; w = $exp(s[t] - m); zs += w;
      for (int i = 0; i < D; i++) outr[i] += w * r(vc[t][i]);
    end
    for (int i = 0; i < D; i++) begin
      checks++;
      if (absr(r(aout[i]) - outr[i] / zs) > 2.0e-3) begin
        failures++; if (failures < 10) $display("FAIL attn %0d: %f vs %f", i, r(aout[i]), outr[i] / zs);
      end
    end
    $display("attention over %0d tokens at position %0d: %0d cycles", npast + 1, pos, ncyc);
    checks++;
    if (ncyc > 4 * (npast + 1) + 2 * D + 120) begin failures++; $display("FAIL attention too slow"); end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk); rope_init_i = 1; @(negedge clk); rope_init_i = 0;
    gemv_test(50);
    attn_test(40, 1);
    attn_test(100, 2);
    gemv_test(7);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
