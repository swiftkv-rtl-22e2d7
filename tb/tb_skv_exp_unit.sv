// tb_skv_exp_unit: checks skv_exp_unit against exp() computed in real arithmetic.
// Inputs cover (-1,0] densely (the LUT range, where the relative error must stay below
// 1e-4) and (-16,-1] at random. Also checks the 4-cycle latency, one result per cycle.
module tb_skv_exp_unit;
  import skv_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic valid_i = 0, valid_o;
  fxp_t x_i = '0, y_o;
  int checks = 0, failures = 0;

  skv_exp_unit dut (.*);

  fxp_t xq[$];
  int   tin[$];
  int   cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  real maxrel = 0.0;
  always @(posedge clk) if (rst_n && valid_o) begin
    real ref_v, got, err;
    fxp_t x; int t;
    x = xq.pop_front(); t = tin.pop_front();
    ref_v = $exp(real'(x) / 131072.0);
    got   = real'(y_o) / 131072.0;
    err   = (got > ref_v) ? got - ref_v : ref_v - got;
    checks++;
    if (x > -32'sd131072) begin
      if (err / ref_v > maxrel) maxrel = err / ref_v;
      if (err / ref_v > 1.0e-4) begin
        failures++; $display("FAIL x=%f got=%f ref=%f", real'(x)/131072.0, got, ref_v);
      end
    end else if (err > 6.0e-5 * ref_v + 3.0 / 131072.0) begin
      failures++; $display("FAIL x=%f got=%f ref=%f", real'(x)/131072.0, got, ref_v);
    end
    checks++;
    if (cyc - t != 4) begin failures++; $display("FAIL latency %0d", cyc - t); end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int i = 0; i < 3000; i++) begin
      fxp_t x;
      if (i == 0) x = '0;
      else if (i < 2000) x = -fxp_t'($urandom_range(0, 131071));
      else x = -fxp_t'($urandom_range(131072, 16 * 131072));
      x_i <= x; valid_i <= 1'b1;
      xq.push_back(x); tin.push_back(cyc + 1);
      @(posedge clk);
    end
    valid_i <= 1'b0;
    repeat (10) @(posedge clk);
    $display("max relative error on (-1,0]: %e", maxrel);
    if (xq.size() != 0) begin failures++; $display("FAIL %0d results missing", xq.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #200000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
