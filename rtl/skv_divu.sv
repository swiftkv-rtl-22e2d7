// skv_divu: unsigned restoring divider, one quotient bit per cycle.
//
// A helper used for the one-time normalization Y/Z of the SwiftKV core (as a reciprocal
// 1/Z) and for the SFU's SiLU and RMS normalization. The paper only says that shared
// pipelined divide units exist; this sequential form is this design's choice.
//
// Interface: pulse start_i with dividend/divisor; done_o pulses NW+1 cycles later with
// quot_o = floor(dividend/divisor). A zero divisor gives all ones. busy_o is high while
// working; a start during busy is ignored.
module skv_divu #(
  parameter int unsigned NW = 48,   // dividend and quotient width
  parameter int unsigned DW = 32    // divisor width
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start_i,
  input  logic [NW-1:0] dividend_i,
  input  logic [DW-1:0] divisor_i,
  output logic          busy_o,
  output logic          done_o,
  output logic [NW-1:0] quot_o
);
  logic [NW-1:0]        q;
  logic [DW:0]          rem;
  logic [DW-1:0]        dsr;
  logic [$clog2(NW+1)-1:0] cnt;

  logic [DW+1:0] trial;
  assign trial = {rem, q[NW-1]} - {2'b0, dsr};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q <= '0; rem <= '0; dsr <= '0; cnt <= '0; busy_o <= 1'b0; done_o <= 1'b0; quot_o <= '0;
    end else begin
      done_o <= 1'b0;
      if (!busy_o) begin
        if (start_i) begin
          q <= dividend_i; rem <= '0; dsr <= divisor_i;
          cnt <= ($clog2(NW+1))'(NW); busy_o <= 1'b1;
        end
      end else begin
        if (trial[DW+1]) begin          // negative: restore
          rem <= {rem[DW-1:0], q[NW-1]};
          q   <= {q[NW-2:0], 1'b0};
        end else begin
          rem <= trial[DW:0];
          q   <= {q[NW-2:0], 1'b1};
        end
        cnt <= cnt - 1'b1;
        if (cnt == 1) begin
          busy_o <= 1'b0;
          done_o <= 1'b1;
          quot_o <= trial[DW+1] ? {q[NW-2:0], 1'b0} : {q[NW-2:0], 1'b1};
        end
      end
    end
  end
endmodule
