// swiftkv_mha: top level of the SwiftKV-MHA decode accelerator (Fig. 4).
//
// NP SKV processors (one per attention head), a Dispatcher, a Special Function Unit and a
// Global Buffer. Each processor holds an SKV unit (RoPE module, dual-mode public MAC array,
// SwiftKV attention core) and a KV-Weight Memory fed from its own memory-controller port.
// The same processor array does both the INT8 x INT4 GEMVs of a layer (each processor one
// 128-row slice, partial sums added by the SFU's EM-Add) and the per-head FXP32 attention
// (each processor one head, all in parallel).
//
// The HBM memory controller and the HBM itself are outside this module: each processor's
// port appears as a stream (mc_*: words into its KV-Weight Memory; wb_*: the new token's
// RoPE(k), v to append to the KV cache). A host loads and reads the Global Buffer through
// h_* while no command runs, and issues dispatcher commands on cmd_* (see skv_dispatcher
// for the command set). pos_reset_i sets every head's RoPE position to 0.
//
// Host access to the Global Buffer is this design's addition: the paper does not say how
// the first layer's input reaches the buffer.
module swiftkv_mha
  import skv_pkg::*;
#(
  parameter int unsigned NP        = NPROC,  // processors = heads (paper: 32)
  parameter int unsigned GB_DEPTH  = 4096,   // Global Buffer words of 1024 bits (assumed)
  parameter int unsigned MEM_DEPTH = 128     // KV-Weight Memory words per processor (assumed)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // commands
  input  logic                    cmd_valid_i,
  output logic                    cmd_ready_o,
  input  cmd_t                    cmd_i,
  output logic                    done_o,
  input  logic                    pos_reset_i,
  // host access to the Global Buffer (only while cmd_ready_o)
  input  logic                    h_wr_i,
  input  logic                    h_rd_i,
  input  logic [$clog2(GB_DEPTH)-1:0] h_addr_i,
  input  logic [1023:0]           h_wdata_i,
  output logic [1023:0]           h_rdata_o,     // one cycle after h_rd_i
  // memory-controller ports, one per processor
  input  logic [NP-1:0]           mc_valid_i,
  output logic [NP-1:0]           mc_ready_o,
  input  logic [NP-1:0][2047:0]   mc_data_i,
  input  logic                    mc_flush_i,
  output logic [NP-1:0]           wb_valid_o,
  output logic [NP-1:0][2047:0]   wb_data_o
);
  localparam int unsigned AW = $clog2(GB_DEPTH);

  // ---------------- Global Buffer ----------------
  logic          ra_en, rb_en, w_en, d_ra_en, d_rb_en, d_w_en;
  logic [AW-1:0] ra_addr, rb_addr, w_addr, d_ra_addr, d_rb_addr, d_w_addr;
  logic [1023:0] ra_data, rb_data, w_data, d_w_data;
  logic          host_ok;
  assign host_ok = cmd_ready_o && !cmd_valid_i;

  assign ra_en   = d_ra_en;
  assign ra_addr = d_ra_addr;
  assign rb_en   = d_rb_en || (host_ok && h_rd_i);
  assign rb_addr = d_rb_en ? d_rb_addr : h_addr_i;
  assign w_en    = d_w_en || (host_ok && h_wr_i);
  assign w_addr  = d_w_en ? d_w_addr : h_addr_i;
  assign w_data  = d_w_en ? d_w_data : h_wdata_i;
  assign h_rdata_o = rb_data;

  skv_global_buffer #(.W(1024), .DEPTH(GB_DEPTH)) u_gb (
    .clk, .ra_en_i(ra_en), .ra_addr_i(ra_addr), .ra_data_o(ra_data),
    .rb_en_i(rb_en), .rb_addr_i(rb_addr), .rb_data_o(rb_data),
    .w_en_i(w_en), .w_addr_i(w_addr), .w_data_i(w_data)
  );

  // ---------------- processor array ----------------
  logic [NP-1:0]         p_bw_valid;
  buf_sel_e              p_bw_sel;
  logic [1:0]            p_bw_idx;
  logic [1023:0]         p_bw_data;
  logic                  p_gemv, p_attn;
  logic [15:0]           p_len;
  logic [NP-1:0]         p_g_valid, p_a_valid, p_done, p_busy;
  logic [NP-1:0][31:0]   p_g_data;
  logic [NP-1:0][1:0]    p_a_idx;
  logic [NP-1:0][1023:0] p_a_data;

  for (genvar p = 0; p < NP; p++) begin : g_proc
    skv_processor #(.D(DHEAD), .MEM_DEPTH(MEM_DEPTH)) u_proc (
      .clk, .rst_n,
      .bw_valid_i(p_bw_valid[p]), .bw_sel_i(p_bw_sel), .bw_idx_i(p_bw_idx),
      .bw_data_i(p_bw_data), .gemv_i(p_gemv), .attn_i(p_attn), .len_i(p_len),
      .rope_init_i(pos_reset_i),
      .g_valid_o(p_g_valid[p]), .g_data_o(p_g_data[p]),
      .a_valid_o(p_a_valid[p]), .a_idx_o(p_a_idx[p]), .a_data_o(p_a_data[p]),
      .done_o(p_done[p]), .busy_o(p_busy[p]),
      .mc_valid_i(mc_valid_i[p]), .mc_ready_o(mc_ready_o[p]), .mc_data_i(mc_data_i[p]),
      .mc_flush_i, .wb_valid_o(wb_valid_o[p]), .wb_data_o(wb_data_o[p])
    );
  end

  // ---------------- SFU ----------------
  logic                 em_valid, em_res_valid;
  logic [NP*32-1:0]     em_vec;
  fxp_t                 em_scale;
  logic signed [31:0]   em_res;
  logic                 s_valid, s_ready, s_rms_pass, s_rms_last, s_out_valid;
  sfu_op_e              s_op;
  fxp_t                 s_a, s_b, s_scale;
  logic [15:0]          s_rms_n;
  logic [31:0]          s_out;

  skv_sfu #(.NIN(NP)) u_sfu (
    .clk, .rst_n,
    .em_valid_i(em_valid), .em_i(em_vec), .em_scale_i(em_scale), .em_valid_o(em_res_valid), .em_o(em_res),
    .in_valid_i(s_valid), .in_ready_o(s_ready), .op_i(s_op), .a_i(s_a), .b_i(s_b),
    .scale_i(s_scale), .rms_pass_i(s_rms_pass), .rms_last_i(s_rms_last), .rms_n_i(s_rms_n),
    .out_valid_o(s_out_valid), .out_o(s_out)
  );

  // ---------------- Dispatcher ----------------
  skv_dispatcher #(.NP(NP), .GB_AW(AW)) u_disp (
    .clk, .rst_n,
    .cmd_valid_i, .cmd_ready_o, .cmd_i, .done_o,
    .ra_en_o(d_ra_en), .ra_addr_o(d_ra_addr), .ra_data_i(ra_data),
    .rb_en_o(d_rb_en), .rb_addr_o(d_rb_addr), .rb_data_i(rb_data),
    .w_en_o(d_w_en), .w_addr_o(d_w_addr), .w_data_o(d_w_data),
    .p_bw_valid_o(p_bw_valid), .p_bw_sel_o(p_bw_sel), .p_bw_idx_o(p_bw_idx),
    .p_bw_data_o(p_bw_data), .p_gemv_o(p_gemv), .p_attn_o(p_attn), .p_len_o(p_len),
    .p_g_valid_i(p_g_valid), .p_g_data_i(p_g_data), .p_a_valid_i(p_a_valid),
    .p_a_idx_i(p_a_idx), .p_a_data_i(p_a_data), .p_done_i(p_done),
    .em_valid_o(em_valid), .em_o(em_vec), .em_scale_o(em_scale), .em_valid_i(em_res_valid), .em_i(em_res),
    .s_valid_o(s_valid), .s_ready_i(s_ready), .s_op_o(s_op), .s_a_o(s_a), .s_b_o(s_b),
    .s_scale_o(s_scale), .s_rms_pass_o(s_rms_pass), .s_rms_last_o(s_rms_last),
    .s_rms_n_o(s_rms_n), .s_out_valid_i(s_out_valid), .s_out_i(s_out)
  );

  a_host_wr: assert property (@(posedge clk) disable iff (!rst_n) !(h_wr_i && !host_ok))
    else $error("swiftkv_mha: host write while a command runs");
endmodule
