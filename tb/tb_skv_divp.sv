// tb_skv_divp: self-checking testbench for the pipelined divider.
// Feeds 300 random divisions on back-to-back cycles (with some idle gaps), then checks every
// quotient and tag against integer division, that the results come out in order, and that
// each one appears exactly NW cycles after its operands.
module tb_skv_divp;
  localparam int unsigned NW = 48, DW = 19, TW = 8;
  logic          clk = 0, rst_n = 0;
  logic          valid_i = 0;
  logic [NW-1:0] dividend_i = '0;
  logic [DW-1:0] divisor_i = '1;
  logic [TW-1:0] tag_i = '0;
  logic          valid_o;
  logic [NW-1:0] quot_o;
  logic [TW-1:0] tag_o;
  int checks = 0, failures = 0, cyc = 0;

  skv_divp #(.NW(NW), .DW(DW), .TW(TW)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;
  initial begin #1000000; $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end

  logic [NW-1:0] eq[$];
  logic [TW-1:0] et[$];
  int            ec[$];
  always @(posedge clk) if (rst_n && valid_o) begin
    checks += 3;
    if (eq.size() == 0) begin failures++; $display("FAIL unexpected result"); end
    else begin
      if (quot_o != eq[0]) begin failures++; $display("FAIL quot %0d exp %0d", quot_o, eq[0]); end
      if (tag_o != et[0])  begin failures++; $display("FAIL tag"); end
      if (cyc - ec[0] != NW) begin failures++; $display("FAIL latency %0d", cyc - ec[0]); end
      void'(eq.pop_front()); void'(et.pop_front()); void'(ec.pop_front());
    end
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 300; n++) begin
      logic [NW-1:0] a; logic [DW-1:0] b;
      a = {$urandom, $urandom};
      b = (n % 3 == 0) ? DW'($urandom_range(1, 1000)) : DW'($urandom) | (DW'(1) << (DW - 2));
      valid_i = (n % 17 != 5);
      dividend_i = a; divisor_i = b; tag_i = TW'(n);
      if (valid_i) begin eq.push_back(a / NW'(b)); et.push_back(TW'(n)); ec.push_back(cyc); end
      @(negedge clk);
    end
    valid_i = 0;
    repeat (NW + 5) @(negedge clk);
    checks++;
    if (eq.size() != 0) begin failures++; $display("FAIL %0d results missing", eq.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
