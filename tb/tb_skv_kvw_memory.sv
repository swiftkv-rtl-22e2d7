// tb_skv_kvw_memory: random pushes and pops with a reference queue, including filling the
// memory to its depth (back-pressure) and a flush. Checks data order, level and the
// one-word-per-cycle rate when both sides are always ready.
module tb_skv_kvw_memory;
  localparam int W = 2048, DEPTH = 128;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic flush_i = 0, wr_valid_i = 0, rd_ready_i = 0, wr_ready_o, rd_valid_o;
  logic [W-1:0] wr_data_i = '0, rd_data_o;
  logic [7:0] level_o;
  int checks = 0, failures = 0;

  skv_kvw_memory dut (.*);

  logic [W-1:0] model[$];

  function automatic logic [W-1:0] rndw();
    logic [W-1:0] w;
    for (int i = 0; i < W / 32; i++) w[i*32 +: 32] = $urandom;
    return w;
  endfunction

  task automatic step(int pw, int pr);
    logic [W-1:0] d;
    bit do_w, do_r;
    d = rndw();
    wr_valid_i = ($urandom_range(0, 99) < pw);
    rd_ready_i = ($urandom_range(0, 99) < pr);
    wr_data_i  = d;
    #1;
    do_w = wr_valid_i && wr_ready_o;
    do_r = rd_valid_o && rd_ready_i;
    checks++;
    if (wr_ready_o != (model.size() < DEPTH)) begin failures++; $display("FAIL ready"); end
    checks++;
    if (rd_valid_o != (model.size() > 0)) begin failures++; $display("FAIL valid"); end
    if (do_r) begin
      checks++;
      if (rd_data_o != model[0]) begin failures++; $display("FAIL data"); end
      void'(model.pop_front());
    end
    if (do_w) model.push_back(d);
    @(negedge clk);
    checks++;
    if (int'(level_o) != model.size()) begin failures++; $display("FAIL level %0d %0d", level_o, model.size()); end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int i = 0; i < 400; i++) step(80, 20);    // fills, back-pressure
    for (int i = 0; i < 400; i++) step(50, 50);
    for (int i = 0; i < 400; i++) step(20, 90);    // drains
    for (int i = 0; i < 200; i++) step(100, 100);  // streaming, one per cycle
    flush_i = 1; wr_valid_i = 0; rd_ready_i = 0; @(negedge clk); flush_i = 0;
    model.delete();
    checks++;
    if (level_o != 0 || rd_valid_o) begin failures++; $display("FAIL flush"); end
    for (int i = 0; i < 100; i++) step(60, 40);
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
