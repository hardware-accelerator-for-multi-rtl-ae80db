// weight_memory: on-chip storage for the weights of one ResBlock.
//
// Each word holds one 64-element INT8 row of a d x 64 weight block, the unit in
// which the paper partitions W_Q, W_K, W_V, W_G, W1 and W2, so one word is one
// k-slice of the SA's B operand. Depth 512*h*h words covers the FFN's W1
// (4h blocks of 64h rows) plus W2 (h blocks of 256h rows), 2 MiB at h = 8;
// the MHA's weights need half of it. The host loads it through a write port
// between ResBlocks. Reads are synchronous with one cycle of latency (a block
// RAM). The memory is named in the paper; depth, word layout and loading are
// this design's choices.
module weight_memory
  import tfa_pkg::*;
#(
  parameter int H     = 8,
  parameter int COLS  = DK,
  localparam int DEPTH = 512 * H * H,
  localparam int AW    = $clog2(DEPTH)
) (
  input  logic                   clk,
  input  logic                   hw_en,
  input  logic [AW-1:0]          hw_addr,
  input  logic [COLS*DATA_W-1:0] hw_data,
  input  logic                   rd_en,
  input  logic [AW-1:0]          rd_addr,
  output data_t                  rd_data [COLS]
);
  logic [COLS*DATA_W-1:0] mem [DEPTH];
  logic [COLS*DATA_W-1:0] q;

  always_ff @(posedge clk) begin
    if (hw_en) mem[hw_addr] <= hw_data;
    if (rd_en) q <= mem[rd_addr];
  end

  always_comb begin
    for (int j = 0; j < COLS; j++) rd_data[j] = data_t'(q[j*DATA_W +: DATA_W]);
  end
endmodule
