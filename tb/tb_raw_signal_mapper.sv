// tb_raw_signal_mapper: end-to-end test of raw_signal_mapper with the default
// search path (5 locations x 64 CAM rows, 128-bit hashes) and, to keep the
// run short, an 8 x 8 programming array with 10-cycle pulses. The same
// test at the full default size is tb_raw_signal_mapper_full.
//
//  1. Programming: an 8 x 8 memristor_array_model is driven through the
//     dev_* port: CAM-style (0 / 150 uS checkerboard, 5 uS) and LSH-style
//     (five whole-array RESET pulses, then 0 uS within 15 uS). Every cell
//     must end inside its band.
//  2. Random LSH conductances are loaded; five random 73-event references
//     (synthetic species, adjacent levels >= 8 pA apart) are stored, one per
//     location, and every CAM row is compared with the testbench's own hash
//     of the matching reference seed.
//  3. Reads are synthesised from a reference: each event becomes 8..14
//     samples with +/-0.5 pA noise, and some events are followed by a short
//     'stay' segment 2.5 pA higher, which the detector splits off and the
//     filter must remove. 'Human' reads use random levels.
//       classification (argmax): every species read goes to its location;
//       detection (threshold 7): species-0 reads detected, random reads
//       judged by the same rule, and species-0 reads collect more than
//       twice the votes of any random read;
//       mapping (ratio): one 329-event genome stored across all five
//       locations; reads inside a location map there, reads straddling two
//       adjacent locations map 'between', random reads are rejected.
//  4. Counted mechanisms (each must occur): store mode, search mode, mode
//     switches, detector boundaries, filtered stay events, end-of-read
//     stalls, single / between / rejected results, whole-array RESET,
//     SET and RESET programming pulses. The read latency is checked to be
//     the same for every read.
module tb_raw_signal_mapper;
  import rsa_pkg::*;
  localparam int N_LOC = 5, RPL = 64, M = SEED_LEN, COLS = 64, N_ARR = 4, HW = 128;
  localparam int WIN = 6, REF_EV = 73;
  localparam int PR = 8, PC = 8;
`define RSM_DUT raw_signal_mapper #(.PROG_ROWS(PR), .PROG_COLS(PC), .PULSE_CYC(10)) dut (.*);
`include "tb/tb_raw_signal_mapper_body.svh"
endmodule
