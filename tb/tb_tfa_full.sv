// tb_tfa_full: end-to-end test of the accelerator at its default size,
// s = 64 and h = 8 (the Transformer-base configuration: d_model 512, d_ff 2048),
// one MHA ResBlock then one FFN ResBlock. The cycle counts from start to done
// must not exceed the paper's reported 21,344 (MHA) and 42,099 (FFN) cycles.
// Stimulus and checks are in tfa_tb_body.svh.
module tb_tfa_full;
  import tfa_pkg::*;
  localparam int S = 64;
  localparam int H = 8;
  localparam int MHA_BOUND = 21344;
  localparam int FFN_BOUND = 42099;
  localparam int WATCHDOG  = 400000;

  tfa_top dut (.*);

`include "tfa_tb_body.svh"
endmodule
