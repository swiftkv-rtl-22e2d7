// skv_kvw_memory: the KV-Weight Memory of one SKV processor (Fig. 4).
//
// Each processor owns a memory that receives its slice of the weight matrices and its
// head's KV cache from its own port of the HBM memory controller and feeds the SKV unit.
// A full layer's weights or a long KV cache do not fit on chip, so here the memory is a
// first-in first-out staging buffer: the memory-controller side writes words in the order
// the unit consumes them, the unit reads them one per cycle. The paper names the memory and
// its two connections only; the FIFO organization, the word format and the depth are this
// design's choices. Word format (W = 2048 bits):
//   attention: bits [1023:0] = 32 FXP32 key elements, [2047:1024] = the matching 32 FXP32
//              value elements (one quarter of a 128-dimension (k_t, v_t) pair)
//   GEMV:      bits [511:0]  = 128 INT4 weights of one output column for this head's
//              128 input rows
// Default depth 128 words (256 Kbit), about the 7 BRAM36 per processor of the paper's
// 224-BRAM processor array.
//
// Interface: valid/ready on both sides, first-word fall-through read (rd_data_o is the
// head word whenever rd_valid_o is high). flush_i empties it. level_o counts stored words.
module skv_kvw_memory #(
  parameter int unsigned W     = 2048,
  parameter int unsigned DEPTH = 128
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       flush_i,
  input  logic                       wr_valid_i,
  output logic                       wr_ready_o,
  input  logic [W-1:0]               wr_data_i,
  output logic                       rd_valid_o,
  input  logic                       rd_ready_i,
  output logic [W-1:0]               rd_data_o,
  output logic [$clog2(DEPTH):0]     level_o
);
  localparam int unsigned AW = $clog2(DEPTH);
  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] wp, rp;
  logic          push, pop;

  assign wr_ready_o = (level_o != (AW+1)'(DEPTH));
  assign rd_valid_o = (level_o != '0);
  assign push       = wr_valid_i && wr_ready_o;
  assign pop        = rd_valid_o && rd_ready_i;
  assign rd_data_o  = mem[rp];

  always_ff @(posedge clk) if (push) mem[wp] <= wr_data_i;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; level_o <= '0;
    end else if (flush_i) begin
      wp <= '0; rp <= '0; level_o <= '0;
    end else begin
      if (push) wp <= (wp == AW'(DEPTH - 1)) ? '0 : wp + 1'b1;
      if (pop)  rp <= (rp == AW'(DEPTH - 1)) ? '0 : rp + 1'b1;
      level_o <= level_o + (AW+1)'(push) - (AW+1)'(pop);
    end
  end

  a_level: assert property (@(posedge clk) disable iff (!rst_n) level_o <= (AW+1)'(DEPTH))
    else $error("kvw_memory level overflow");
endmodule
