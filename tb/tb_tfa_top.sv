// tb_tfa_top: end-to-end test of the accelerator at s = 8, h = 1 (d_model 64,
// d_ff 256): one MHA ResBlock, then one FFN ResBlock. With s < 64 it also
// exercises the zero padding of K_i and the idle slots before the short
// Softmax x V_i GEMM. Stimulus and checks are in tfa_tb_body.svh.
module tb_tfa_top;
  import tfa_pkg::*;
  localparam int S = 8;
  localparam int H = 1;
  localparam int MHA_BOUND = 6000;
  localparam int FFN_BOUND = 6000;
  localparam int WATCHDOG  = 200000;

  tfa_top #(.S(S), .H(H)) dut (.*);

`include "tfa_tb_body.svh"
endmodule
