// skv_global_buffer: the on-chip Global Buffer (Fig. 4). It stages the layer input and
// output, Q/K/V, the attention outputs and FFN activations between operations.
//
// Organization (this design's choice; the paper gives the function and, in Table II, a
// budget of 136 BRAM36): DEPTH words of 1024 bits, so one word is either one processor's
// 128-element INT8 chunk, 32 FXP32/INT32 values, or a quarter of a head's 128-element FXP32
// vector. A 4096-element FXP32 vector takes 128 words, a 4096-element INT8 vector 32.
// Default 4096 words = 4 Mbit, which fits the 136 BRAM36 (4.9 Mbit) of Table II.
// Two synchronous read ports (data one cycle after the address) and one write port; a read
// of the word written in the same cycle returns the old contents.
module skv_global_buffer #(
  parameter int unsigned W     = 1024,
  parameter int unsigned DEPTH = 4096
) (
  input  logic                     clk,
  input  logic                     ra_en_i,
  input  logic [$clog2(DEPTH)-1:0] ra_addr_i,
  output logic [W-1:0]             ra_data_o,
  input  logic                     rb_en_i,
  input  logic [$clog2(DEPTH)-1:0] rb_addr_i,
  output logic [W-1:0]             rb_data_o,
  input  logic                     w_en_i,
  input  logic [$clog2(DEPTH)-1:0] w_addr_i,
  input  logic [W-1:0]             w_data_i
);
  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (ra_en_i) ra_data_o <= mem[ra_addr_i];
    if (rb_en_i) rb_data_o <= mem[rb_addr_i];
    if (w_en_i)  mem[w_addr_i] <= w_data_i;
  end
endmodule
