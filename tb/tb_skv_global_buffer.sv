// tb_skv_global_buffer: random writes and reads on both read ports against a reference
// array, including read-during-write of the same address (old data expected) and the
// one-cycle read latency.
module tb_skv_global_buffer;
  localparam int W = 1024, DEPTH = 4096;
  logic clk = 0;
  always #5 clk = ~clk;
  logic ra_en_i = 0, rb_en_i = 0, w_en_i = 0;
  logic [11:0] ra_addr_i = '0, rb_addr_i = '0, w_addr_i = '0;
  logic [W-1:0] ra_data_o, rb_data_o, w_data_i = '0;
  int checks = 0, failures = 0;

  skv_global_buffer dut (.*);

  logic [W-1:0] model [int];
  logic [W-1:0] expa, expb;
  bit chka, chkb;

  function automatic logic [W-1:0] rndw();
    logic [W-1:0] w;
    for (int i = 0; i < W / 32; i++) w[i*32 +: 32] = $urandom;
    return w;
  endfunction

  initial begin
    // fill a window of addresses first
    for (int a = 0; a < 64; a++) begin
      @(negedge clk); w_en_i = 1; w_addr_i = 12'(a * 61); w_data_i = rndw(); model[a * 61] = w_data_i;
    end
    for (int i = 0; i < 3000; i++) begin
      int aa, ab, aw;
      @(negedge clk);
      // check the reads issued in the previous cycle
      if (chka) begin checks++; if (ra_data_o != expa) begin failures++; $display("FAIL port a"); end end
      if (chkb) begin checks++; if (rb_data_o != expb) begin failures++; $display("FAIL port b"); end end
      aa = 61 * $urandom_range(0, 63); ab = 61 * $urandom_range(0, 63);
      aw = ($urandom_range(0, 3) == 0) ? aa : 61 * $urandom_range(0, 63);
      ra_en_i = 1; ra_addr_i = 12'(aa); rb_en_i = 1; rb_addr_i = 12'(ab);
      expa = model[aa]; expb = model[ab]; chka = 1; chkb = 1;
      w_en_i = $urandom_range(0, 1); w_addr_i = 12'(aw); w_data_i = rndw();
      if (w_en_i) model[aw] = w_data_i;
    end
    @(negedge clk);
    if (chka) begin checks++; if (ra_data_o != expa) begin failures++; $display("FAIL port a"); end end
    if (chkb) begin checks++; if (rb_data_o != expb) begin failures++; $display("FAIL port b"); end end
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
