// tb_skv_sfu: checks every SFU function against an independent computation:
// EM-Add against a plain sum, with and without the fused dequantization (and its 1-cycle,
// one-per-cycle timing), ADD, HADAMARD and
// the two quantization casts exactly, SiLU and RMS normalization against real arithmetic.
module tb_skv_sfu;
  import skv_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic em_valid_i = 0, em_valid_o, in_valid_i = 0, in_ready_o, rms_pass_i = 0, rms_last_i = 0, out_valid_o;
  logic [1023:0] em_i = '0;
  logic signed [31:0] em_o;
  sfu_op_e op_i = SFU_ADD;
  fxp_t a_i = '0, b_i = '0, scale_i = '0, em_scale_i = '0;
  logic [15:0] rms_n_i = '0;
  logic [31:0] out_o;
  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  skv_sfu dut (.*);

  logic [31:0] res[$];
  int          rcyc[$];
  always @(posedge clk) if (out_valid_o) begin res.push_back(out_o); rcyc.push_back(cyc); end
  int em_res[$];
  int em_cyc[$];
  always @(posedge clk) if (em_valid_o) begin em_res.push_back(em_o); em_cyc.push_back(cyc); end

  function automatic real r(logic [31:0] x); return real'($signed(x)) / 131072.0; endfunction
  function automatic real absr(real x); return x < 0 ? -x : x; endfunction

  task automatic issue(sfu_op_e op, fxp_t a, fxp_t b, fxp_t sc, bit pass, bit last, int n);
    op_i = op; a_i = a; b_i = b; scale_i = sc; rms_pass_i = pass; rms_last_i = last; rms_n_i = 16'(n);
    in_valid_i = 1;
    @(posedge clk);
    while (!in_ready_o) @(posedge clk);
    @(negedge clk);
    in_valid_i = 0;
  endtask

  task automatic wait_res(int n);
    int guard; guard = 0;
    while (res.size() < n && guard < 5000) begin @(negedge clk); guard++; end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    // ---- EM-Add ----
    begin
      int expv[$]; int t0;
      t0 = cyc;
      for (int n = 0; n < 20; n++) begin
        int s; s = 0;
        for (int i = 0; i < 32; i++) begin em_i[i*32 +: 32] = $urandom; s += int'($signed(em_i[i*32 +: 32])); end
        // the second half also dequantizes on the way (sum * scale)
        em_scale_i = (n < 10) ? '0 : fxp_t'($urandom_range(1, 1 << 18));
        em_valid_i = 1; expv.push_back((n < 10) ? s : int'(32'(64'(s) * 64'(em_scale_i))));
        @(negedge clk);
      end
      em_valid_i = 0; em_scale_i = '0;
      @(negedge clk); @(negedge clk);
      checks++;
      if (em_res.size() != 20) begin failures++; $display("FAIL em count"); end
      for (int n = 0; n < em_res.size(); n++) begin
        checks++; if (em_res[n] != expv[n]) begin failures++; $display("FAIL em %0d", n); end
      end
      checks++;
      if (em_cyc[19] - em_cyc[0] != 19) begin failures++; $display("FAIL em rate"); end
    end
    // ---- exact elementwise ops ----
    for (int n = 0; n < 200; n++) begin
      fxp_t a, b, sc; logic [31:0] e; sfu_op_e op;
      a = $urandom; b = $urandom; sc = fxp_t'($urandom_range(0, 1 << 18));
      op = sfu_op_e'(n % 4);
      if (op == SFU_FXP_I8 || op == SFU_HADAMARD) begin a = a >>> 8; b = b >>> 12; end
      case (op)
        SFU_ADD:      e = a + b;
        SFU_HADAMARD: e = 32'((64'(a) * 64'(b)) >>> 17);
        SFU_I32_FXP:  e = 32'(64'(a) * 64'(sc));
        default: begin
          real v; v = real'(a) * real'(sc) / (131072.0 * 131072.0);
          v = (v >= 0) ? $floor(v + 0.5) : -$floor(-v + 0.5);
          if (v > 127.0) v = 127.0;
          if (v < -128.0) v = -128.0;
          e = 32'($rtoi(v));
        end
      endcase
      res.delete();
      issue(op, a, b, sc, 0, 0, 0);
      wait_res(1);
      checks++;
      if (res.size() != 1 || res[0] != e) begin
        failures++; $display("FAIL op %0d a=%0d b=%0d got %0d exp %0d", op, a, b, res.size() ? res[0] : 0, e);
      end
    end
    // ---- SiLU ----
    for (int n = 0; n < 60; n++) begin
      fxp_t a; real x, e;
      a = fxp_t'($urandom_range(0, 16 * 131072)) - fxp_t'(8 * 131072);
      x = real'(a) / 131072.0;
      e = x / (1.0 + $exp(-x));
      res.delete();
      issue(SFU_SILU, a, 0, 0, 0, 0, 0);
      wait_res(1);
      checks++;
      if (res.size() != 1 || absr(r(res[0]) - e) > 2.0e-4) begin
        failures++; $display("FAIL silu x=%f got %f exp %f", x, res.size() ? r(res[0]) : 0.0, e);
      end
    end
    // ---- SiLU back to back: one element per cycle, then an ADD that must wait ----
    begin
      fxp_t av[100]; int t0;
      res.delete(); rcyc.delete();
      for (int i = 0; i < 100; i++) av[i] = fxp_t'($urandom_range(0, 16 * 131072)) - fxp_t'(8 * 131072);
      t0 = cyc;
      op_i = SFU_SILU; in_valid_i = 1;
      for (int i = 0; i < 100; i++) begin
        a_i = av[i];
        @(posedge clk);
        checks++; if (!in_ready_o) begin failures++; $display("FAIL silu stalled at %0d", i); end
        @(negedge clk);
      end
      in_valid_i = 0;
      issue(SFU_ADD, 32'd5, 32'd7, 0, 0, 0, 0);
      wait_res(101);
      checks++;
      if (res.size() != 101) begin failures++; $display("FAIL silu stream count %0d", res.size()); end
      else begin
        for (int i = 0; i < 100; i++) begin
          real x, e; x = real'(av[i]) / 131072.0; e = x / (1.0 + $exp(-x));
          checks++;
          if (absr(r(res[i]) - e) > 2.0e-4) begin
            failures++; $display("FAIL silu stream %0d x=%f got %f exp %f", i, x, r(res[i]), e);
          end
        end
        checks++; if (res[100] != 32'd12) begin failures++; $display("FAIL add after silu"); end
        checks++;
        if (rcyc[99] - rcyc[0] != 99) begin failures++; $display("FAIL silu rate %0d", rcyc[99] - rcyc[0]); end
        checks++;
        if (rcyc[0] - t0 > 60) begin failures++; $display("FAIL silu latency %0d", rcyc[0] - t0); end
        $display("silu stream: first result after %0d cycles, 100 results in %0d cycles",
                 rcyc[0] - t0, rcyc[99] - t0);
      end
    end
    // ---- RMS norm over a 256-element vector ----
    begin
      fxp_t xv[256], gv[256]; real ms, inv;
      ms = 0.0;
      for (int i = 0; i < 256; i++) begin
        xv[i] = fxp_t'($urandom_range(0, 6 * 131072)) - fxp_t'(3 * 131072);
        gv[i] = fxp_t'($urandom_range(0, 2 * 131072));
        ms += (real'(xv[i]) / 131072.0) ** 2;
      end
      inv = 1.0 / $sqrt(ms / 256.0 + 1.0e-5);
      res.delete();
      for (int i = 0; i < 256; i++) issue(SFU_RMSNORM, xv[i], 0, 0, 0, i == 255, 256);
      for (int i = 0; i < 256; i++) issue(SFU_RMSNORM, xv[i], gv[i], 0, 1, 0, 256);
      wait_res(256);
      checks++;
      if (res.size() != 256) begin failures++; $display("FAIL rms count %0d", res.size()); end
      for (int i = 0; i < res.size(); i++) begin
        real e; e = real'(xv[i]) / 131072.0 * inv * real'(gv[i]) / 131072.0;
        checks++;
        if (absr(r(res[i]) - e) > 1.0e-3 * (1.0 + absr(e))) begin
          failures++; if (failures < 10) $display("FAIL rms %0d got %f exp %f", i, r(res[i]), e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #3000000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
