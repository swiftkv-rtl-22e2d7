// tb_skv_rope: advances skv_rope through 400 decode positions (a q pass without commit,
// then a k pass with commit, per position) and compares every rotated pair with
// cos/sin((m+1) theta_i) evaluated directly in real arithmetic. Then loads the buffer with
// position 5000 and checks one more step. Checks the 3-cycle latency.
module tb_skv_rope;
  import skv_pkg::*;
  localparam int D = 128, NP = 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic init_i = 0, ld_valid_i = 0, in_valid_i = 0, in_commit_i = 0;
  logic [5:0] ld_idx_i = '0, in_idx_i = '0, out_idx_o;
  logic signed [31:0] ld_cos_i = '0, ld_sin_i = '0;
  fxp_t in_x0_i = '0, in_x1_i = '0, out_x0_o, out_x1_o;
  logic out_valid_o;
  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  skv_rope dut (.*);

  real e0q[$], e1q[$];
  int  tq[$], iq[$];
  real maxerr = 0.0;

  always @(posedge clk) if (rst_n && out_valid_o) begin
    real g0, g1, r0, r1, d0, d1; int t, idx;
    r0 = e0q.pop_front(); r1 = e1q.pop_front(); t = tq.pop_front(); idx = iq.pop_front();
    g0 = real'(out_x0_o) / 131072.0; g1 = real'(out_x1_o) / 131072.0;
    d0 = g0 - r0; if (d0 < 0) d0 = -d0;
    d1 = g1 - r1; if (d1 < 0) d1 = -d1;
    if (d0 > maxerr) maxerr = d0;
    if (d1 > maxerr) maxerr = d1;
    checks += 3;
    if (d0 > 1.0e-4 || d1 > 1.0e-4) begin
      failures++;
      if (failures < 10) $display("FAIL idx=%0d got %f %f ref %f %f", idx, g0, g1, r0, r1);
    end
    if (cyc - t != 3) begin failures++; $display("FAIL latency %0d", cyc - t); end
    if (int'(out_idx_o) != idx) begin failures++; $display("FAIL idx"); end
  end

  task automatic push(int i, int m_next, bit commit);
    real th, x0, x1;
    fxp_t q0, q1;
    q0 = fxp_t'($urandom_range(0, 524288)) - 32'sd262144;
    q1 = fxp_t'($urandom_range(0, 524288)) - 32'sd262144;
    th = real'(m_next) * $pow(10000.0, -2.0 * real'(i) / 128.0);
    x0 = real'(q0) / 131072.0; x1 = real'(q1) / 131072.0;
    e0q.push_back(x0 * $cos(th) - x1 * $sin(th));
    e1q.push_back(x0 * $sin(th) + x1 * $cos(th));
    iq.push_back(i);
    in_valid_i = 1; in_idx_i = 6'(i); in_commit_i = commit; in_x0_i = q0; in_x1_i = q1;
    tq.push_back(cyc);
    @(negedge clk);
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    init_i = 1; @(negedge clk); init_i = 0;
    for (int m = 0; m < 400; m++) begin
      for (int i = 0; i < NP; i++) push(i, m + 1, 0);   // q of the new token
      for (int i = 0; i < NP; i++) push(i, m + 1, 1);   // k of the new token, advances
    end
    in_valid_i = 0;
    repeat (4) @(negedge clk);
    // jump to position 5000 by loading the buffer
    for (int i = 0; i < NP; i++) begin
      real th;
      th = 5000.0 * $pow(10000.0, -2.0 * real'(i) / 128.0);
      ld_valid_i = 1; ld_idx_i = 6'(i);
      ld_cos_i = 32'($rtoi($cos(th) * 1073741824.0)); ld_sin_i = 32'($rtoi($sin(th) * 1073741824.0));
      @(negedge clk);
    end
    ld_valid_i = 0;
    for (int i = 0; i < NP; i++) push(i, 5001, 1);
    in_valid_i = 0;
    repeat (6) @(negedge clk);
    checks++;
    if (e0q.size() != 0) begin failures++; $display("FAIL missing outputs"); end
    $display("max abs error %e", maxerr);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #2000000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
