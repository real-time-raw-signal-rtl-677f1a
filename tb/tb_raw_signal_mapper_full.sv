// tb_raw_signal_mapper_full: the end-to-end test of tb_raw_signal_mapper
// with raw_signal_mapper at every default: 5 locations x 64 CAM rows,
// 128-bit hashes from four 10 x 64 crossbars, and a 64 x 64 programming
// array with 100-cycle (1 us at 100 MHz) pulses. It programs all 4096
// cells twice, stores and searches references, and checks classification,
// detection and mapping results and the mechanism counts.
module tb_raw_signal_mapper_full;
  import rsa_pkg::*;
  localparam int N_LOC = 5, RPL = 64, M = SEED_LEN, COLS = 64, N_ARR = 4, HW = 128;
  localparam int WIN = 6, REF_EV = 73;
  localparam int PR = 64, PC = 64;
`define RSM_DUT raw_signal_mapper dut (.*);
`include "tb/tb_raw_signal_mapper_body.svh"
endmodule
