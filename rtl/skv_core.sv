// skv_core: the SwiftKV Core, the single-pass attention engine of one head (Fig. 3).
//
// For every cached (k_t, v_t) the score s_t = q.k_t / sqrt(d) is compared with the running
// maximum mu_{t-1}:
//   s_t <= mu : beta  = exp(s_t - mu),  Z += beta,          Y += beta * v_t
//   s_t >  mu : alpha = exp(mu - s_t),  Z  = alpha * Z + 1,  Y  = alpha * Y + v_t, mu = s_t
// so the exponent argument is always <= 0 and the factor lies in (0,1]. After the last token
// the output is Y/Z. Each token is seen once; no score is stored.
//
// Data flow (follows Fig. 3): the dot product comes from the unit's public MAC array as
// NCHUNK=4 partial sums per token (32 FXP32 products each); they are accumulated and scaled
// by 1/sqrt(d) (the paper scales q; scaling the one score is the same product and is this
// design's choice). The compare stage subtracts mu, forms the "opposite" (negation) when
// the difference is positive, and updates mu. skv_exp_unit gives alpha or beta. Two
// multiplexers then choose, as in the figure, which operand is multiplied by the factor and
// which is added: (Z or 1) and (Y_{t-1} or v_t). Y is updated 32 elements per cycle, so a
// token's update takes four cycles, matching the four cycles its dot product takes: one
// token every four cycles, about 4N cycles for a context of N tokens (paper, Sec. IV-B).
// The first token takes the "greater" path with Z=0, Y=0, which gives mu_1 = s_1, Z=1,
// Y=v_1 (paper: mu_1 = s_1, Z_0 = 0, Y_0 = 0).
//
// v_t arrives with k_t (one 32-element chunk per partial sum) and waits in a 16-chunk
// FIFO until its factor is ready. After finish_i the core waits for the pipeline to drain,
// computes 1/Z with a sequential divider (2^48 over Z in Q15.17 = 2^31/Z, 50 cycles) and streams out Y * (1/Z) as
// four chunks of 32 FXP32 values (this normalization scheme is this design's choice).
//
// Interface: start_i clears the state. part_valid_i/part_i/part_last_i: partial sums from
// the MAC array, part_last_i on the fourth of a token. v_valid_i/v_i: v chunks in order.
// Inputs of one token must not come faster than one chunk per cycle. out_valid_o/out_idx_o/
// out_o: result chunks; done_o pulses after the last one. busy_o is high from start_i to
// done_o. FXP32 results wrap on overflow, which cannot happen while |v| * N < 2^14.
module skv_core
  import skv_pkg::*;
#(
  parameter int unsigned D     = DHEAD,       // head dimension (paper: 128)
  parameter int unsigned LANES = FXP_LANES    // FXP32 elements per cycle (paper: 32)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start_i,
  input  logic               finish_i,
  input  logic               part_valid_i,
  input  logic signed [47:0] part_i,
  input  logic               part_last_i,
  input  logic               v_valid_i,
  input  logic [LANES*32-1:0] v_i,
  output logic               out_valid_o,
  output logic [$clog2(D/LANES)-1:0] out_idx_o,
  output logic [LANES*32-1:0] out_o,
  output logic               done_o,
  output logic               busy_o,
  output fxp_t               mu_o,          // running maximum (observability)
  output fxp_t               z_o            // running denominator (observability)
);
  localparam int unsigned NCH = D / LANES;
  localparam int unsigned CW  = $clog2(NCH) > 0 ? $clog2(NCH) : 1;
  localparam fxp_t INV_SQRT_D = fxp_t'($rtoi(real'(FXP_ONE) / $sqrt(real'(D)) + 0.5));

  // ---------------- dot product accumulation and 1/sqrt(d) ----------------
  logic signed [47:0] acc;
  logic               s_valid;
  fxp_t               s_q;
  logic signed [47:0] acc_next;
  logic signed [79:0] s_scaled;
  assign acc_next = acc + part_i;
  assign s_scaled = 80'(acc_next) * 80'(INV_SQRT_D);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc <= '0; s_valid <= 1'b0; s_q <= '0;
    end else begin
      s_valid <= 1'b0;
      if (start_i) acc <= '0;
      else if (part_valid_i) begin
        if (part_last_i) begin
          acc     <= '0;
          s_valid <= 1'b1;
          s_q     <= fxp_t'(s_scaled >>> FRAC);
        end else acc <= acc_next;
      end
    end
  end

  // ---------------- compare and select ----------------
  fxp_t mu;
  logic first;
  logic x_valid;
  fxp_t x_arg;
  logic x_gt;
  fxp_t diff;
  logic gt;
  assign diff = s_q - mu;
  assign gt   = first || (diff > 0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mu <= '0; first <= 1'b1; x_valid <= 1'b0; x_arg <= '0; x_gt <= 1'b0;
    end else begin
      x_valid <= 1'b0;
      if (start_i) begin
        first <= 1'b1; mu <= '0;
      end else if (s_valid) begin
        x_valid <= 1'b1;
        x_gt    <= gt;
        x_arg   <= first ? '0 : (gt ? -diff : diff);   // "opposite" when s_t > mu
        if (gt) mu <= s_q;
        first <= 1'b0;
      end
    end
  end
  assign mu_o = mu;

  // ---------------- exp part ----------------
  logic e_valid;
  fxp_t coef;
  logic [3:0] gt_pipe;
  skv_exp_unit u_exp (
    .clk, .rst_n, .valid_i(x_valid), .x_i(x_arg), .valid_o(e_valid), .y_o(coef)
  );
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) gt_pipe <= '0;
    else        gt_pipe <= {gt_pipe[2:0], x_gt};
  end

  // ---------------- v FIFO ----------------
  localparam int unsigned VDEPTH = 4 * NCH;
  logic [LANES*32-1:0] vmem [VDEPTH];
  logic [$clog2(VDEPTH)-1:0] vwp, vrp;
  logic [$clog2(VDEPTH):0]   vcount;
  logic v_pop;

  always_ff @(posedge clk) if (v_valid_i) vmem[vwp] <= v_i;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vwp <= '0; vrp <= '0; vcount <= '0;
    end else if (start_i) begin
      vwp <= '0; vrp <= '0; vcount <= '0;
    end else begin
      if (v_valid_i) vwp <= vwp + 1'b1;
      if (v_pop)     vrp <= vrp + 1'b1;
      vcount <= vcount + $bits(vcount)'(v_valid_i) - $bits(vcount)'(v_pop);
    end
  end

  // ---------------- Z / Y update ----------------
  fxp_t y_reg [NCH][LANES];
  fxp_t z;
  logic          upd_act;
  logic [CW-1:0] upd_cnt;
  fxp_t          upd_coef;
  logic          upd_gt;
  logic [CW-1:0] upd_idx;
  fxp_t          cur_coef;
  logic          cur_gt;
  logic [15:0]   tok_in_flight;

  assign cur_coef = e_valid ? coef : upd_coef;
  assign cur_gt   = e_valid ? gt_pipe[3] : upd_gt;
  assign upd_idx  = e_valid ? '0 : upd_cnt;
  assign v_pop    = e_valid || upd_act;

  logic [LANES*32-1:0] vcur;
  assign vcur = vmem[vrp];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      z <= '0; upd_act <= 1'b0; upd_cnt <= '0; upd_coef <= '0; upd_gt <= 1'b0;
      for (int c = 0; c < NCH; c++) for (int l = 0; l < LANES; l++) y_reg[c][l] <= '0;
    end else if (start_i) begin
      z <= '0; upd_act <= 1'b0; upd_cnt <= '0;
      for (int c = 0; c < NCH; c++) for (int l = 0; l < LANES; l++) y_reg[c][l] <= '0;
    end else if (v_pop) begin
      for (int l = 0; l < LANES; l++) begin
        fxp_t vv, yy;
        vv = fxp_t'(vcur[l*32 +: 32]);
        yy = y_reg[upd_idx][l];
        // MUX: (Y_{t-1} or v_t) to the multiplier, (v_t or Y_{t-1}) to the adder
        y_reg[upd_idx][l] <= fxp_mul(cur_coef, cur_gt ? yy : vv) + (cur_gt ? vv : yy);
      end
      if (e_valid) begin
        z        <= fxp_mul(cur_coef, cur_gt ? z : FXP_ONE) + (cur_gt ? FXP_ONE : z);
        upd_coef <= coef;
        upd_gt   <= gt_pipe[3];
        upd_cnt  <= CW'(1);
        upd_act  <= (NCH > 1);
      end else begin
        upd_cnt <= upd_cnt + 1'b1;
        if (upd_cnt == CW'(NCH - 1)) upd_act <= 1'b0;
      end
    end
  end
  assign z_o = z;

  // tokens whose score was formed but whose update is not finished
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) tok_in_flight <= '0;
    else if (start_i) tok_in_flight <= '0;
    else tok_in_flight <= tok_in_flight
                        + ((part_valid_i && part_last_i) ? 16'd1 : 16'd0)
                        - ((v_pop && (upd_idx == CW'(NCH - 1))) ? 16'd1 : 16'd0);
  end

  // ---------------- normalization Y / Z ----------------
  typedef enum logic [1:0] {N_IDLE, N_WAIT, N_DIV, N_OUT} nstate_e;
  nstate_e nst;
  logic        div_start, div_done, div_busy;
  logic [48:0] div_q;
  logic [32:0] recip;       // 2^31 / Z  (Q1.31)
  logic [CW-1:0] ocnt;

  skv_divu #(.NW(49), .DW(32)) u_div (
    .clk, .rst_n, .start_i(div_start), .dividend_i(49'd1 << 48),
    .divisor_i(z), .busy_o(div_busy), .done_o(div_done), .quot_o(div_q)
  );

  assign div_start = (nst == N_WAIT) && (tok_in_flight == 0) && !part_valid_i && !s_valid
                     && !x_valid && !e_valid && !upd_act;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      nst <= N_IDLE; recip <= '0; ocnt <= '0; out_valid_o <= 1'b0; out_idx_o <= '0;
      out_o <= '0; done_o <= 1'b0; busy_o <= 1'b0;
    end else begin
      out_valid_o <= 1'b0;
      done_o      <= 1'b0;
      if (start_i) busy_o <= 1'b1;
      unique case (nst)
        N_IDLE: if (finish_i) nst <= N_WAIT;
        N_WAIT: if (div_start) nst <= N_DIV;
        N_DIV:  if (div_done) begin
                  recip <= 33'(div_q);
                  ocnt  <= '0;
                  nst   <= N_OUT;
                end
        N_OUT: begin
          out_valid_o <= 1'b1;
          out_idx_o   <= ocnt;
          for (int l = 0; l < LANES; l++) begin
            logic signed [65:0] p;
            p = 66'(y_reg[ocnt][l]) * 66'($signed({1'b0, recip}));
            out_o[l*32 +: 32] <= 32'(p >>> 31);
          end
          ocnt <= ocnt + 1'b1;
          if (ocnt == CW'(NCH - 1)) begin
            nst <= N_IDLE; done_o <= 1'b1; busy_o <= 1'b0;
          end
        end
        default: nst <= N_IDLE;
      endcase
    end
  end

  // a new token's factor may only arrive when the previous token's update is complete
  a_tok_gap: assert property (@(posedge clk) disable iff (!rst_n) !(e_valid && upd_act))
    else $error("skv_core: tokens closer than %0d cycles", NCH);
  a_v_avail: assert property (@(posedge clk) disable iff (!rst_n) !(v_pop && vcount == 0))
    else $error("skv_core: v chunk missing at update");

  initial assert (D % LANES == 0) else $error("D must be a multiple of LANES");
endmodule
