// skv_processor: one SKV Processor (Fig. 4) = an SKV Unit plus its dedicated KV-Weight
// Memory. The memory is filled from the processor's own memory-controller port (mc_*) and
// drained by the unit; the unit's KV-cache write-back (RoPE(k), v of the new token) leaves on
// wb_* toward the same port. The dispatcher-facing signals are those of skv_unit; see there
// for the GEMV and attention operations and their timing. The composition follows the
// figure; the port signalling is this design's choice.
module skv_processor
  import skv_pkg::*;
#(
  parameter int unsigned D         = DHEAD,   // head dimension (paper: 128)
  parameter int unsigned MEM_DEPTH = 128      // KV-Weight Memory words (assumed)
) (
  input  logic          clk,
  input  logic          rst_n,
  // dispatcher side
  input  logic          bw_valid_i,
  input  buf_sel_e      bw_sel_i,
  input  logic [1:0]    bw_idx_i,
  input  logic [1023:0] bw_data_i,
  input  logic          gemv_i,
  input  logic          attn_i,
  input  logic [15:0]   len_i,
  input  logic          rope_init_i,
  output logic          g_valid_o,
  output logic signed [31:0] g_data_o,
  output logic          a_valid_o,
  output logic [1:0]    a_idx_o,
  output logic [1023:0] a_data_o,
  output logic          done_o,
  output logic          busy_o,
  // memory-controller port (AXI port i in the paper, reduced to a stream here)
  input  logic          mc_valid_i,
  output logic          mc_ready_o,
  input  logic [2047:0] mc_data_i,
  input  logic          mc_flush_i,
  output logic          wb_valid_o,
  output logic [2047:0] wb_data_o
);
  logic          kv_valid, kv_ready;
  logic [2047:0] kv_data;
  logic [$clog2(MEM_DEPTH):0] level;

  skv_kvw_memory #(.W(2048), .DEPTH(MEM_DEPTH)) u_mem (
    .clk, .rst_n, .flush_i(mc_flush_i),
    .wr_valid_i(mc_valid_i), .wr_ready_o(mc_ready_o), .wr_data_i(mc_data_i),
    .rd_valid_o(kv_valid), .rd_ready_i(kv_ready), .rd_data_o(kv_data), .level_o(level)
  );

  skv_unit #(.D(D)) u_unit (
    .clk, .rst_n,
    .bw_valid_i, .bw_sel_i, .bw_idx_i, .bw_data_i, .gemv_i, .attn_i, .len_i, .rope_init_i,
    .g_valid_o, .g_data_o, .a_valid_o, .a_idx_o, .a_data_o, .done_o, .busy_o,
    .kv_valid_i(kv_valid), .kv_ready_o(kv_ready), .kv_data_i(kv_data),
    .wb_valid_o, .wb_data_o
  );
endmodule
