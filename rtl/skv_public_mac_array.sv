// skv_public_mac_array: the dual-mode "Public MAC Array" of one SKV unit (Fig. 5(b)).
//
// NDSP signed 18x18 multipliers (standing for DSP slices) are shared by two formats:
//  * MODE_GEMV: each multiplier takes one INT8 activation and one INT4 weight, and the
//    adder tree sums all NDSP products into one INT32 partial dot product: a 128-element
//    dot product per cycle.
//  * MODE_ATTN: groups of four multipliers form one FXP32 x FXP32 multiplier. Operands are
//    split into A[16:0], A[31:17], B[16:0], B[31:17]; multiplier 1 takes A[16:0]xB[16:0],
//    2 takes A[31:17]xB[16:0], 3 takes A[16:0]xB[31:17], 4 takes A[31:17]xB[31:17], and the
//    partial products are shifted by 0, 17, 17 and 34 bits before the adder tree. This
//    gives NDSP/4 = 32 FXP32 products per cycle, so a 128-dimension q.k takes four cycles.
// The operand split, the four-DSP grouping and the shift-and-add tree follow Fig. 5(b).
// The low 17-bit halves are unsigned and the high 15-bit halves signed (this design's
// choice; the figure only prints the bit ranges).
//
// Interface: a_i holds 128 INT8 or 32 FXP32 (1024 bits, element 0 in the low bits); b_i
// holds 128 INT4 in its low 512 bits or 32 FXP32. sum_o (2 cycles after valid_i) is the
// INT32 sum in GEMV mode, or in ATTN mode the sum of the 32 products in Q15.17 kept at 48
// bits (truncated toward -inf) for the caller to accumulate. One input per cycle.
module skv_public_mac_array
  import skv_pkg::*;
#(
  parameter int unsigned N_DSP = NDSP     // paper: 128 DSPs per public MAC array
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  mac_mode_e              mode_i,
  input  logic                   valid_i,
  input  logic [N_DSP*8-1:0]     a_i,
  input  logic [N_DSP*8-1:0]     b_i,
  output logic                   valid_o,
  output logic signed [47:0]     sum_o
);
  localparam int unsigned NL = N_DSP / 4;

  // operand selection (the input multiplexers of Fig. 5(b))
  logic signed [17:0] opa [N_DSP];
  logic signed [17:0] opb [N_DSP];
  always_comb begin
    for (int unsigned d = 0; d < N_DSP; d++) begin
      logic [31:0] fa, fb;
      fa = a_i[(d/4)*32 +: 32];
      fb = b_i[(d/4)*32 +: 32];
      if (mode_i == MODE_ATTN) begin
        opa[d] = (d % 4 == 0 || d % 4 == 2) ? $signed({1'b0, fa[16:0]})
                                            : 18'($signed(fa[31:17]));
        opb[d] = (d % 4 < 2)                ? $signed({1'b0, fb[16:0]})
                                            : 18'($signed(fb[31:17]));
      end else begin
        opa[d] = 18'($signed(a_i[d*8 +: 8]));
        opb[d] = 18'($signed(b_i[d*4 +: 4]));
      end
    end
  end

  // multiplier stage
  logic signed [35:0] prod [N_DSP];
  mac_mode_e          mode1;
  logic               v1;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0;
      mode1 <= MODE_GEMV;
      for (int unsigned d = 0; d < N_DSP; d++) prod[d] <= '0;
    end else begin
      v1    <= valid_i;
      mode1 <= mode_i;
      for (int unsigned d = 0; d < N_DSP; d++) prod[d] <= opa[d] * opb[d];
    end
  end

  // shift and adder tree
  logic signed [71:0] tree;
  always_comb begin
    tree = '0;
    if (mode1 == MODE_ATTN) begin
      for (int unsigned l = 0; l < NL; l++) begin
        tree += 72'(prod[4*l]) + (72'(prod[4*l+1]) <<< 17) + (72'(prod[4*l+2]) <<< 17)
              + (72'(prod[4*l+3]) <<< 34);
      end
    end else begin
      for (int unsigned d = 0; d < N_DSP; d++) tree += 72'(prod[d]);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid_o <= 1'b0;
      sum_o   <= '0;
    end else begin
      valid_o <= v1;
      sum_o   <= (mode1 == MODE_ATTN) ? 48'(tree >>> FRAC) : 48'(tree);
    end
  end

  initial assert (N_DSP % 4 == 0) else $error("N_DSP must be a multiple of 4");
endmodule
