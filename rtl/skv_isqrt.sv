// skv_isqrt: unsigned integer square root, one result bit per cycle (digit-by-digit
// method). A helper of the SFU's RMS normalization; the paper gives no insides for it.
//
// Interface: pulse start_i with rad_i; done_o pulses NW/2+1 cycles later with
// root_o = floor(sqrt(rad_i)). busy_o is high while working.
module skv_isqrt #(
  parameter int unsigned NW = 64       // radicand width, even
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start_i,
  input  logic [NW-1:0]   rad_i,
  output logic            busy_o,
  output logic            done_o,
  output logic [NW/2-1:0] root_o
);
  logic [NW-1:0]   x;        // remaining radicand bits, two per step
  logic [NW/2+1:0] rem;
  logic [NW/2-1:0] root;
  logic [$clog2(NW/2+1)-1:0] cnt;

  logic [NW/2+1:0] rem_sh, trial;
  assign rem_sh = {rem[NW/2-1:0], x[NW-1:NW-2]};
  assign trial  = rem_sh - {root, 2'b01};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x <= '0; rem <= '0; root <= '0; cnt <= '0; busy_o <= 1'b0; done_o <= 1'b0; root_o <= '0;
    end else begin
      done_o <= 1'b0;
      if (!busy_o) begin
        if (start_i) begin
          x <= rad_i; rem <= '0; root <= '0; busy_o <= 1'b1;
          cnt <= ($clog2(NW/2+1))'(NW / 2);
        end
      end else begin
        x <= {x[NW-3:0], 2'b00};
        if (!trial[NW/2+1]) begin
          rem  <= trial;
          root <= {root[NW/2-2:0], 1'b1};
        end else begin
          rem  <= rem_sh;
          root <= {root[NW/2-2:0], 1'b0};
        end
        cnt <= cnt - 1'b1;
        if (cnt == 1) begin
          busy_o <= 1'b0;
          done_o <= 1'b1;
          root_o <= trial[NW/2+1] ? {root[NW/2-2:0], 1'b0} : {root[NW/2-2:0], 1'b1};
        end
      end
    end
  end
endmodule
