// bias_memory: the biases of one ResBlock, one 32-bit value per output column.
//
// Block b of the weight layout has its 64 biases at words b*64 .. b*64+63
// (MHA: 4h blocks, FFN: 5h blocks, so 320h words). Values are at accumulator
// scale and are added before requantisation. Synchronous read, one cycle of
// latency. The memory is named in the paper; format and layout are this
// design's choices.
module bias_memory
  import tfa_pkg::*;
#(
  parameter int H = 8,
  localparam int DEPTH = 320 * H,
  localparam int AW    = BADDR_W,
  localparam int IW    = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          hw_en,
  input  logic [AW-1:0] hw_addr,
  input  acc_t          hw_data,
  input  logic [AW-1:0] rd_addr,
  output acc_t          rd_data
);
  acc_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (hw_en && int'(hw_addr) < DEPTH) mem[IW'(hw_addr)] <= hw_data;
    rd_data <= (int'(rd_addr) < DEPTH) ? mem[IW'(rd_addr)] : '0;
  end
endmodule
