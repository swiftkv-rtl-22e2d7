// tb_skv_core: runs whole attention passes through skv_core and compares the outputs with
// softmax(q K^T / sqrt(d)) V computed in real arithmetic. The partial sums that the MAC
// array would produce are formed here with exact integer products. Contexts of 1, 37 and
// 300 tokens are used, one with idle gaps between chunks. With back-to-back input the pass
// must finish within 4N + 90 cycles (one token per four cycles).
module tb_skv_core;
  import skv_pkg::*;
  localparam int D = 128, L = 32, NCH = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start_i = 0, finish_i = 0, part_valid_i = 0, part_last_i = 0, v_valid_i = 0;
  logic signed [47:0] part_i = '0;
  logic [L*32-1:0] v_i = '0;
  logic out_valid_o, done_o, busy_o;
  logic [1:0] out_idx_o;
  logic [L*32-1:0] out_o;
  fxp_t mu_o, z_o;
  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  skv_core dut (.*);

  fxp_t q[D];
  fxp_t kc[][D];
  fxp_t vc[][D];
  real  outr[D];
  fxp_t got[D];

  function automatic fxp_t rnd(real lim);
    return fxp_t'($rtoi(((real'($urandom_range(0, 1000000)) / 1000000.0) * 2.0 - 1.0) * lim * 131072.0));
  endfunction

  task automatic run(int n, bit gaps);
    real s[], m, zs;
    int t0, ncyc;
    kc = new[n]; vc = new[n]; s = new[n];
    foreach (q[i]) q[i] = rnd(2.0);
    for (int t = 0; t < n; t++) for (int i = 0; i < D; i++) begin
      kc[t][i] = rnd(1.5); vc[t][i] = rnd(2.0);
    end
    // reference
    m = -1.0e30;
    for (int t = 0; t < n; t++) begin
      s[t] = 0.0;
      for (int i = 0; i < D; i++) s[t] += (real'(q[i]) / 131072.0) * (real'(kc[t][i]) / 131072.0);
      s[t] = s[t] / $sqrt(128.0);
      if (s[t] > m) m = s[t];
    end
    zs = 0.0;
    foreach (outr[i]) outr[i] = 0.0;
    for (int t = 0; t < n; t++) begin
      real w; w = $exp(s[t] - m); zs += w;
      for (int i = 0; i < D; i++) outr[i] += w * real'(vc[t][i]) / 131072.0;
    end
    foreach (outr[i]) outr[i] = outr[i] / zs;
    // drive (inputs change on the falling edge)
    @(negedge clk); start_i = 1; @(negedge clk); start_i = 0;
    t0 = cyc;
    for (int t = 0; t < n; t++) for (int c = 0; c < NCH; c++) begin
      longint acc; logic [L*32-1:0] vv;
      acc = 0;
      for (int l = 0; l < L; l++) begin
        acc += longint'(q[c*L+l]) * longint'(kc[t][c*L+l]);
        vv[l*32 +: 32] = vc[t][c*L+l];
      end
      // the MAC array truncates the 32-product sum to Q15.17
      part_i = 48'(acc >>> 17); part_valid_i = 1; part_last_i = (c == NCH - 1);
      v_i = vv; v_valid_i = 1;
      @(negedge clk);
      part_valid_i = 0; v_valid_i = 0; part_last_i = 0;
      if (gaps) repeat ($urandom_range(0, 5)) @(negedge clk);
    end
    finish_i = 1; @(negedge clk); finish_i = 0;
    while (!done_o) @(posedge clk);
    repeat (2) @(posedge clk);
    ncyc = cyc - t0;
    for (int i = 0; i < D; i++) begin
      real g, e;
      g = real'(got[i]) / 131072.0;
      e = (g > outr[i]) ? g - outr[i] : outr[i] - g;
      checks++;
      if (e > 2.0e-3) begin
        failures++;
        if (failures < 10) $display("FAIL n=%0d i=%0d got=%f ref=%f", n, i, g, outr[i]);
      end
    end
    checks++;
    if ((real'(mu_o) / 131072.0 - m) > 1.0e-3 || (m - real'(mu_o) / 131072.0) > 1.0e-3) begin
      failures++; $display("FAIL mu %f vs %f", real'(mu_o) / 131072.0, m);
    end
    $display("n=%0d gaps=%0d cycles=%0d Z=%f ref Z=%f", n, gaps, ncyc, real'(z_o)/131072.0, zs);
    if (!gaps) begin
      checks++;
      if (ncyc > 4 * n + 90) begin failures++; $display("FAIL too slow: %0d cycles", ncyc); end
    end
  endtask

  always @(posedge clk) if (out_valid_o)
    for (int l = 0; l < L; l++) got[out_idx_o*L + l] = fxp_t'(out_o[l*32 +: 32]);

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(1, 0);
    run(37, 1);
    run(300, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #500000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
