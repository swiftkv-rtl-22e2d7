// skv_rope: decoder-specialized RoPE module of an SKV unit (Eq. 11, Fig. 6).
//
// During decoding, positions only advance by one. Instead of evaluating cos/sin of the
// large angle (m+1)*theta_i, the unit keeps cos(m*theta_i) and sin(m*theta_i) of the
// previous position in a buffer and applies the angle-addition identities with the stored
// constants a_i = cos(theta_i), b_i = sin(theta_i):
//   C = a_i cos(m theta_i) - b_i sin(m theta_i)      = cos((m+1) theta_i)
//   S = a_i sin(m theta_i) + b_i cos(m theta_i)      = sin((m+1) theta_i)
//   x0' = x0*C - x1*S,   x1' = x0*S + x1*C
// with theta_i = BASE^(-2i/D), i = 0..D/2-1 (paper: b = 10000). The result is produced three
// cycles after the input, as in the paper: stage 1 forms the four angle products, stage 2
// the difference and sum (the "-" and "+" of Fig. 6), stage 3 the rotation of the pair.
// Fig. 6 prints four multipliers; this implementation uses four for the angle update and
// four for the rotation so that one pair is processed per cycle (this design's choice).
// The constants are computed at elaboration. The angle buffer and constants are held
// with 30 fraction bits so that error does not build up over thousands of positions
// (this design's choice; the data path itself is FXP32 Q15.17).
//
// Interface: init_i sets the buffer to position 0 (cos=1, sin=0). ld_* writes one entry
// (to start from another position). in_valid_i/in_idx_i/in_x0_i/in_x1_i: one channel pair
// (x_{2i}, x_{2i+1}) per cycle; in_commit_i also stores C,S for pair i as the new buffer
// entry, which advances that pair to position m+1. Use commit=0 for q and commit=1 for k of
// the same token (or the reverse), so both are rotated to position m+1. out_* follow three
// cycles later. A committed pair must not be read again within two cycles.
module skv_rope
  import skv_pkg::*;
#(
  parameter int unsigned D    = DHEAD,   // head dimension (paper: 128)
  parameter int unsigned BASE = 10000    // RoPE base b (paper: 10000)
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       init_i,
  input  logic                       ld_valid_i,
  input  logic [$clog2(D/2)-1:0]     ld_idx_i,
  input  logic signed [31:0]         ld_cos_i,    // Q2.30
  input  logic signed [31:0]         ld_sin_i,    // Q2.30
  input  logic                       in_valid_i,
  input  logic [$clog2(D/2)-1:0]     in_idx_i,
  input  logic                       in_commit_i,
  input  fxp_t                       in_x0_i,
  input  fxp_t                       in_x1_i,
  output logic                       out_valid_o,
  output logic [$clog2(D/2)-1:0]     out_idx_o,
  output fxp_t                       out_x0_o,
  output fxp_t                       out_x1_o
);
  localparam int unsigned NP = D / 2;
  localparam int unsigned IW = $clog2(NP);
  localparam int unsigned AF = 30;                 // fraction bits of angle values
  localparam real ONE_A = real'(64'd1 << AF);
  typedef logic signed [31:0] ang_t;

  function automatic ang_t theta_cos(int unsigned i);
    return ang_t'($rtoi($cos($pow(real'(BASE), -2.0 * real'(i) / real'(D))) * ONE_A
                        + 0.5));
  endfunction
  function automatic ang_t theta_sin(int unsigned i);
    return ang_t'($rtoi($sin($pow(real'(BASE), -2.0 * real'(i) / real'(D))) * ONE_A
                        + 0.5));
  endfunction

  // stored constants a_i = cos(theta_i), b_i = sin(theta_i)
  // (constants fixed at elaboration, one per generate iteration)
  ang_t a_rom [NP];
  ang_t b_rom [NP];
  for (genvar i = 0; i < NP; i++) begin : g_ab
    localparam ang_t AV = theta_cos(i);
    localparam ang_t BV = theta_sin(i);
    assign a_rom[i] = AV;
    assign b_rom[i] = BV;
  end

  // buffer of cos(m theta_i), sin(m theta_i)
  ang_t cos_m [NP];
  ang_t sin_m [NP];

  function automatic ang_t amul(ang_t a, ang_t b);
    logic signed [63:0] p;
    p = 64'(a) * 64'(b);
    return ang_t'(p >>> AF);
  endfunction
  function automatic fxp_t xmul(fxp_t x, ang_t c);
    logic signed [63:0] p;
    p = 64'(x) * 64'(c);
    return fxp_t'(p >>> AF);
  endfunction

  // stage 1
  logic          v1, c1;
  logic [IW-1:0] i1;
  ang_t          p_ac, p_bs, p_as, p_bc;
  fxp_t          x0_1, x1_1;
  // stage 2
  logic          v2;
  logic [IW-1:0] i2;
  ang_t          cc2, ss2;
  fxp_t          x0_2, x1_2;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; c1 <= 1'b0; i1 <= '0; p_ac <= '0; p_bs <= '0; p_as <= '0; p_bc <= '0;
      x0_1 <= '0; x1_1 <= '0;
      v2 <= 1'b0; i2 <= '0; cc2 <= '0; ss2 <= '0; x0_2 <= '0; x1_2 <= '0;
      out_valid_o <= 1'b0; out_idx_o <= '0; out_x0_o <= '0; out_x1_o <= '0;
      for (int i = 0; i < NP; i++) begin
        cos_m[i] <= ang_t'(ONE_A);
        sin_m[i] <= '0;
      end
    end else begin
      // stage 1: four products
      v1   <= in_valid_i;
      c1   <= in_commit_i;
      i1   <= in_idx_i;
      p_ac <= amul(a_rom[in_idx_i], cos_m[in_idx_i]);
      p_bs <= amul(b_rom[in_idx_i], sin_m[in_idx_i]);
      p_as <= amul(a_rom[in_idx_i], sin_m[in_idx_i]);
      p_bc <= amul(b_rom[in_idx_i], cos_m[in_idx_i]);
      x0_1 <= in_x0_i;
      x1_1 <= in_x1_i;
      // stage 2: cos((m+1)theta), sin((m+1)theta)
      v2   <= v1;
      i2   <= i1;
      cc2  <= p_ac - p_bs;
      ss2  <= p_as + p_bc;
      x0_2 <= x0_1;
      x1_2 <= x1_1;
      // stage 3: rotate the pair
      out_valid_o <= v2;
      out_idx_o   <= i2;
      out_x0_o    <= xmul(x0_2, cc2) - xmul(x1_2, ss2);
      out_x1_o    <= xmul(x0_2, ss2) + xmul(x1_2, cc2);
      // buffer writes
      if (init_i) begin
        for (int i = 0; i < NP; i++) begin
          cos_m[i] <= ang_t'(ONE_A);
          sin_m[i] <= '0;
        end
      end else if (ld_valid_i) begin
        cos_m[ld_idx_i] <= ld_cos_i;
        sin_m[ld_idx_i] <= ld_sin_i;
      end else if (v1 && c1) begin
        cos_m[i1] <= p_ac - p_bs;
        sin_m[i1] <= p_as + p_bc;
      end
    end
  end
endmodule
