// tb_skv_public_mac_array: random INT8xINT4 and FXP32xFXP32 dot products, alternating
// modes cycle by cycle, against sums of exact integer products. Also checks the 2-cycle
// latency and one result per cycle.
module tb_skv_public_mac_array;
  import skv_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  mac_mode_e mode_i = MODE_GEMV;
  logic valid_i = 0, valid_o;
  logic [1023:0] a_i = '0, b_i = '0;
  logic signed [47:0] sum_o;
  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  skv_public_mac_array dut (.*);

  longint expq[$];
  int     tq[$];

  always @(posedge clk) if (rst_n && valid_o) begin
    longint e; int t;
    e = expq.pop_front(); t = tq.pop_front();
    checks += 2;
    if (longint'(sum_o) != e) begin
      failures++; $display("FAIL got %0d exp %0d", sum_o, e);
    end
    if (cyc - t != 2) begin failures++; $display("FAIL latency %0d", cyc - t); end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 400; n++) begin
      logic [1023:0] a, b;
      longint e;
      mac_mode_e m;
      for (int w = 0; w < 32; w++) begin a[w*32 +: 32] = $urandom; b[w*32 +: 32] = $urandom; end
      m = (n % 3 == 0) ? MODE_GEMV : MODE_ATTN;
      if (n < 4) begin  // corner values: full-scale negatives
        for (int w = 0; w < 32; w++) begin
          a[w*32 +: 32] = (n[0]) ? 32'h8000_0000 : 32'h7fff_ffff;
          b[w*32 +: 32] = 32'h8000_0000;
        end
      end
      e = 0;
      if (m == MODE_GEMV) begin
        for (int d = 0; d < 128; d++)
          e += longint'($signed(a[d*8 +: 8])) * longint'($signed(b[d*4 +: 4]));
      end else begin
        logic signed [71:0] acc;
        acc = 0;
        for (int l = 0; l < 32; l++)
          acc += 72'($signed(a[l*32 +: 32])) * 72'($signed(b[l*32 +: 32]));
        e = longint'(48'(acc >>> 17));
        e = longint'($signed(e[47:0]));
      end
      mode_i <= m; a_i <= a; b_i <= b; valid_i <= 1'b1;
      expq.push_back(e); tq.push_back(cyc + 1);
      @(posedge clk);
    end
    valid_i <= 0;
    repeat (5) @(posedge clk);
    checks++;
    if (expq.size() != 0) begin failures++; $display("FAIL missing results"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
