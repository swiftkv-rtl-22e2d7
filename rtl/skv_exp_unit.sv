// skv_exp_unit: pipelined exp(x) for x <= 0 in Q15.17, the "exp part" of the SwiftKV core.
//
// exp(x) = 2^(x*log2(e)) = 2^(n+f). The input is first multiplied by log2(e); the result
// y <= 0 is split into its integer part n (applied as a right shift) and a fraction f in
// (-1,0]. 2^f comes from a 32-entry table LUT[i] = 2^(-i/32) with linear interpolation:
// the 5 most significant fraction bits (f1) pick the entry i, the 12 remaining bits (f2)
// interpolate along the slope delta_i = LUT[i] - LUT[i+1]. This follows the paper: the
// log2(e) multiplier, the integer/fraction split, the shift, the 5-bit LUT with slopes and
// the 5+12 bit split are all its own. The table and slope values are computed at
// elaboration from their formula, rounded to 17 fraction bits (this design's choice).
// The paper draws 2^n as a shift followed by a multiplier; here the fraction result is
// shifted directly, which gives the same value.
//
// Interface: x_i/valid_i in, y_o/valid_o out LAT=4 cycles later, one input per cycle,
// no back-pressure. Inputs above 0 are clamped to 0 (result 1.0). Results that would be
// below 2^-17 are 0.
module skv_exp_unit
  import skv_pkg::*;
#(
  parameter int unsigned LUT_BITS = 5     // paper: 5-bit LUT, 32 entries
) (
  input  logic clk,
  input  logic rst_n,
  input  logic valid_i,
  input  fxp_t x_i,        // Q15.17, expected <= 0
  output logic valid_o,
  output fxp_t y_o         // Q15.17, in [0, 1]
);
  localparam int unsigned NLUT   = 1 << LUT_BITS;
  localparam int unsigned F2BITS = FRAC - LUT_BITS;          // 12
  // log2(e) in Q15.17
  localparam fxp_t LOG2E = fxp_t'($rtoi(1.4426950408889634 * real'(FXP_ONE) + 0.5));

  function automatic logic [17:0] lut_val(int unsigned i);
    return 18'($rtoi($pow(2.0, -real'(i) / real'(NLUT)) * real'(FXP_ONE) + 0.5));
  endfunction

  // LUT[i] and slope delta_i, both scaled by 2^17
  // (constants fixed at elaboration, one per generate iteration)
  logic [17:0] lut_rom   [NLUT];
  logic [17:0] delta_rom [NLUT];
  for (genvar i = 0; i < NLUT; i++) begin : g_lut
    localparam logic [17:0] LV = lut_val(i);
    localparam logic [17:0] DV = lut_val(i) - lut_val(i + 1);
    assign lut_rom[i]   = LV;
    assign delta_rom[i] = DV;
  end

  // stage 1: y = x * log2(e)
  logic        v1;
  fxp_t        y1;
  // stage 2: split, table read
  logic        v2;
  logic [14:0] n2;
  logic [17:0] lut2, del2;
  logic [F2BITS-1:0] f2_2;
  // stage 3: interpolate
  logic        v3;
  logic [14:0] n3;
  logic [17:0] frac3;
  // stage 4: shift

  fxp_t x_clamped;
  assign x_clamped = (x_i > 0) ? '0 : x_i;

  logic [31:0] a1;                 // -y, non-negative
  assign a1 = 32'(-y1);

  logic [F2BITS+17:0] prod3;
  assign prod3 = (F2BITS + 18)'(del2) * (F2BITS + 18)'(f2_2);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; v2 <= 1'b0; v3 <= 1'b0; valid_o <= 1'b0;
      y1 <= '0; n2 <= '0; lut2 <= '0; del2 <= '0; f2_2 <= '0;
      n3 <= '0; frac3 <= '0; y_o <= '0;
    end else begin
      v1 <= valid_i;
      y1 <= fxp_mul(x_clamped, LOG2E);

      v2   <= v1;
      n2   <= a1[31:FRAC];
      lut2 <= lut_rom[a1[FRAC-1 -: LUT_BITS]];
      del2 <= delta_rom[a1[FRAC-1 -: LUT_BITS]];
      f2_2 <= a1[F2BITS-1:0];

      v3    <= v2;
      n3    <= n2;
      frac3 <= lut2 - 18'(prod3 >> F2BITS);

      valid_o <= v3;
      y_o     <= (n3 > 15'd17) ? '0 : fxp_t'({14'd0, frac3} >> n3);
    end
  end

  initial assert (LUT_BITS < FRAC) else $error("LUT_BITS must be below FRAC");
endmodule
