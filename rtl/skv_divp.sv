// skv_divp: pipelined unsigned restoring divider, one quotient bit per stage, so it takes a
// new division every cycle. A helper of the SFU's SiLU path; the paper speaks of
// "pipelined multiply and divide units" without giving their insides.
//
// Interface: valid_i with dividend_i, divisor_i and a tag that travels with the operands;
// NW cycles later valid_o, quot_o = floor(dividend_i / divisor_i) and the same tag.
// The divisor must be non-zero (a zero divisor gives an all-ones quotient).
module skv_divp #(
  parameter int unsigned NW = 48,   // dividend and quotient width = pipeline stages
  parameter int unsigned DW = 18,   // divisor width
  parameter int unsigned TW = 8     // tag width
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          valid_i,
  input  logic [NW-1:0] dividend_i,
  input  logic [DW-1:0] divisor_i,
  input  logic [TW-1:0] tag_i,
  output logic          valid_o,
  output logic [NW-1:0] quot_o,
  output logic [TW-1:0] tag_o
);
  // stage s holds: remainder (DW+1 bits), the dividend bits not yet used (shifted into
  // the quotient register as quotient bits come out), the divisor and the tag.
  logic          v   [NW+1];
  logic [DW:0]   rem [NW+1];
  logic [NW-1:0] qd  [NW+1];   // low bits: quotient so far; high bits: unused dividend
  logic [DW-1:0] dv  [NW+1];
  logic [TW-1:0] tg  [NW+1];

  assign v[0]   = valid_i;
  assign rem[0] = '0;
  assign qd[0]  = dividend_i;
  assign dv[0]  = divisor_i;
  assign tg[0]  = tag_i;

  for (genvar s = 0; s < NW; s++) begin : g_st
    logic [DW+1:0] sh, diff;
    assign sh   = {rem[s], qd[s][NW-1]};
    assign diff = sh - {2'b00, dv[s]};
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) v[s+1] <= 1'b0;
      else        v[s+1] <= v[s];
    end
    always_ff @(posedge clk) begin
      if (!diff[DW+1]) begin
        rem[s+1] <= diff[DW:0];
        qd[s+1]  <= {qd[s][NW-2:0], 1'b1};
      end else begin
        rem[s+1] <= sh[DW:0];
        qd[s+1]  <= {qd[s][NW-2:0], 1'b0};
      end
      dv[s+1] <= dv[s];
      tg[s+1] <= tg[s];
    end
  end

  assign valid_o = v[NW];
  assign quot_o  = qd[NW];
  assign tag_o   = tg[NW];
endmodule
