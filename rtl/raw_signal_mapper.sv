// raw_signal_mapper: maps raw nanopore current samples straight to positions
// in stored reference genomes, without basecalling, by fuzzy seed-and-vote
// on memristor hashing and approximate-search hardware.
//
// Search path (store_mode = 0), one sample per cycle:
//   raw samples -> event_detector (t-test segmentation, event means)
//   -> event_filter (drop events within diff_threshold of the previous one)
//   -> seed_former (10 consecutive events per seed, stride 1)
//   -> lsh_hasher (crossbar random projections + comparators, 128 bits)
//   -> approx_cam (all rows at once, Hamming distance < cam_threshold)
//   -> vote_counter (one vote per matching location per seed)
//   -> vote_decision (threshold / argmax / ratio rule) -> res_*.
// Store path (store_mode = 1): expected reference events (from a k-mer
// current table, computed off-chip) enter on ref_*, bypass the detector and
// the filter, are cut into seeds and hashed by the same crossbar, and each
// hash is written into the next CAM row. ref_start loads the row pointer
// with ref_loc * ROWS_PER_LOC; rows are then filled in order, so a
// reference longer than one location spills into the next one.
//
// The write_verify_ctrl programming sequencer is included for the physical
// arrays; its device-side signals (dev_*, rd_*) go to the analog array and
// read-out, which are outside this design. The LSH conductances and CAM
// contents of the behavioural array models are loaded through g_* and the
// store path.
//
// Following the design: the order of the stages, the bypass of detection
// and filtering for the reference, seeds of ten events, 128-bit hashes from
// four 10 x 64 arrays, locations of 64 rows (one 64 x 256 CAM array each),
// and the three decision rules. This design's own choices: a static
// store_mode switch (change it only while the pipeline is empty), the row
// pointer, the 'lsh_bias' input offset and all number formats.
//
// Timing: res_valid comes WIN + N_LOC + 8 cycles after the cycle that
// delivers the last sample of a read (19 at the defaults). smp_ready drops
// for WIN cycles after each read; a new read may start right after. Reads must be at least N_LOC + 2
// cycles apart at the decision stage (always true for reads of more than
// N_LOC samples).
//
// rst_n is an asynchronous reset for every stage. The assertions inside
// vote_decision and write_verify_ctrl also use it as their disable
// condition; lint tools report that as a reset used both synchronously
// and asynchronously. The synchronous use is in checking code only.
module raw_signal_mapper
  import rsa_pkg::*;
#(
  parameter int unsigned WIN            = 6,
  parameter int unsigned M              = SEED_LEN,
  parameter int unsigned LSH_COLS       = 64,
  parameter int unsigned LSH_ARR        = 4,
  parameter int unsigned N_LOC          = 5,
  parameter int unsigned ROWS_PER_LOC   = 64,
  parameter int unsigned PROG_ROWS      = 64,
  parameter int unsigned PROG_COLS      = 64,
  parameter int unsigned PULSE_CYC      = 100,
  parameter int unsigned INIT_PULSE_CYC = 2,
  // derived
  parameter int unsigned HW     = LSH_ARR * LSH_COLS / 2,
  parameter int unsigned N_ROWS = N_LOC * ROWS_PER_LOC,
  parameter int unsigned LW     = (N_LOC > 1) ? $clog2(N_LOC) : 1,
  parameter int unsigned PRW    = (PROG_ROWS > 1) ? $clog2(PROG_ROWS) : 1,
  parameter int unsigned PCW    = (PROG_COLS > 1) ? $clog2(PROG_COLS) : 1
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // configuration
  input  logic                        store_mode,
  input  dec_mode_e                   dec_mode,
  input  logic [7:0]                  cam_threshold,
  input  logic [VOTE_W-1:0]           vote_threshold,
  input  logic [VOTE_W-1:0]           min_votes,
  input  current_t                    diff_threshold,
  input  logic [31:0]                 t2_threshold,
  input  current_t                    lsh_bias,
  // raw sample stream (search)
  input  logic                        smp_valid,
  input  current_t                    smp_data,
  input  logic                        smp_last,
  output logic                        smp_ready,
  // expected reference events (store)
  input  logic                        ref_start,
  input  logic [LW-1:0]               ref_loc,
  input  logic                        ref_valid,
  input  current_t                    ref_event,
  input  logic                        ref_last,
  // LSH conductance load and CAM clear
  input  logic                        g_we,
  input  logic [$clog2(LSH_ARR)-1:0]  g_arr,
  input  logic [$clog2(M)-1:0]        g_row,
  input  logic [$clog2(LSH_COLS)-1:0] g_col,
  input  logic [COND_W-1:0]           g_data,
  input  logic                        cam_clr,
  // result per read
  output logic                        res_valid,
  output res_kind_e                   res_kind,
  output logic [LW-1:0]               res_loc,
  output logic [LW-1:0]               res_loc2,
  output logic [VOTE_W-1:0]           res_votes,
  output logic                        votes_saturated,
  output logic                        dec_busy,         // decision scan running
  output logic                        stat_boundary,    // pulse: event boundary found
  output logic                        stat_dropped,     // pulse: event removed by the filter
  // memristor programming sequencer
  input  logic                        prog_start,
  input  logic [G_W-1:0]              prog_tolerance,
  input  logic [3:0]                  prog_init_resets,
  input  logic [7:0]                  prog_init_amp,
  input  logic [7:0]                  prog_max_iter,
  input  logic [7:0]                  prog_set_amp,
  input  logic [7:0]                  prog_reset_amp_start,
  input  logic [7:0]                  prog_reset_amp_step,
  input  logic [G_W-1:0]              prog_target_g,
  output dev_op_e                     dev_op,
  output logic                        dev_all,
  output logic [PRW-1:0]              dev_row,
  output logic [PCW-1:0]              dev_col,
  output logic [7:0]                  dev_amp,
  input  logic                        rd_valid,
  input  logic [G_W-1:0]              rd_g,
  output logic                        prog_busy,
  output logic                        prog_done,
  output logic                        prog_all_ok,
  output logic [7:0]                  prog_iter,
  output logic [31:0]                 prog_pulses
);

  // ---------------------------------------------------------------- search front end
  logic     ev_valid, ev_end;
  current_t ev_value;

  event_detector #(.WIN(WIN)) u_detector (
    .clk, .rst_n,
    .in_valid(smp_valid), .in_sample(smp_data), .in_last(smp_last), .in_ready(smp_ready),
    .t2_threshold,
    .ev_valid, .ev_value, .ev_end, .boundary(stat_boundary)
  );

  logic     fe_valid, fe_end;
  current_t fe_value;

  event_filter u_filter (
    .clk, .rst_n,
    .in_valid(ev_valid), .in_value(ev_value), .in_end(ev_end),
    .diff_threshold,
    .out_valid(fe_valid), .out_value(fe_value), .out_end(fe_end), .dropped(stat_dropped)
  );

  // ---------------------------------------------------------------- seeds
  // Reference events bypass detection and filtering.
  logic     sf_in_valid, sf_in_end;
  current_t sf_in_value;
  always_comb begin
    if (store_mode) begin
      sf_in_valid = ref_valid;
      sf_in_value = ref_event;
      sf_in_end   = ref_valid && ref_last;
    end else begin
      sf_in_valid = fe_valid;
      sf_in_value = fe_value;
      sf_in_end   = fe_end;
    end
  end

  logic     seed_valid, seed_end;
  current_t seed [M];

  seed_former #(.M(M)) u_seeds (
    .clk, .rst_n,
    .in_valid(sf_in_valid), .in_value(sf_in_value), .in_end(sf_in_end),
    .seed_valid, .seed, .seed_end
  );

  // ---------------------------------------------------------------- hashing
  logic          h_valid, h_end;
  logic [HW-1:0] h_bits;

  lsh_hasher #(.ROWS(M), .COLS(LSH_COLS), .N_ARR(LSH_ARR)) u_lsh (
    .clk, .rst_n,
    .g_we, .g_arr, .g_row, .g_col, .g_data,
    .bias(lsh_bias),
    .in_valid(seed_valid), .in_seed(seed), .in_end(seed_end),
    .out_valid(h_valid), .out_hash(h_bits), .out_end(h_end)
  );

  // ---------------------------------------------------------------- CAM
  logic [$clog2(N_ROWS)-1:0] wr_ptr;
  wire  wr_en = store_mode && h_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)         wr_ptr <= '0;
    else if (ref_start) wr_ptr <= $clog2(N_ROWS)'(ref_loc * ROWS_PER_LOC);
    else if (wr_en)     wr_ptr <= (wr_ptr == $clog2(N_ROWS)'(N_ROWS - 1)) ? '0 : wr_ptr + 1'b1;
  end

  logic             m_valid, m_end;
  logic [N_LOC-1:0] loc_match;

  approx_cam #(.N_LOC(N_LOC), .ROWS_PER_LOC(ROWS_PER_LOC), .W(HW)) u_cam (
    .clk, .rst_n,
    .wr_en, .wr_row(wr_ptr), .wr_data(h_bits), .clr(cam_clr),
    .threshold(cam_threshold),
    .s_valid(!store_mode && h_valid), .s_key(h_bits), .s_end(!store_mode && h_end),
    .m_valid, .loc_match, .m_end
  );

  // ---------------------------------------------------------------- votes and decision
  logic              votes_valid;
  logic [VOTE_W-1:0] votes [N_LOC];

  vote_counter #(.N_LOC(N_LOC)) u_votes (
    .clk, .rst_n,
    .in_valid(m_valid), .in_match(loc_match), .in_end(m_end),
    .votes_valid, .votes, .saturated(votes_saturated)
  );

  vote_decision #(.N_LOC(N_LOC)) u_decision (
    .clk, .rst_n,
    .votes_valid, .votes, .mode(dec_mode),
    .vote_threshold, .min_votes,
    .busy(dec_busy),
    .res_valid, .res_kind, .res_loc, .res_loc2, .res_votes
  );

  // ---------------------------------------------------------------- programming
  write_verify_ctrl #(
    .ROWS(PROG_ROWS), .COLS(PROG_COLS), .PULSE_CYC(PULSE_CYC), .INIT_PULSE_CYC(INIT_PULSE_CYC)
  ) u_prog (
    .clk, .rst_n,
    .start(prog_start), .tolerance(prog_tolerance), .init_resets(prog_init_resets),
    .init_amp(prog_init_amp), .max_iter(prog_max_iter), .set_amp(prog_set_amp),
    .reset_amp_start(prog_reset_amp_start), .reset_amp_step(prog_reset_amp_step),
    .target_g(prog_target_g),
    .dev_op, .dev_all, .dev_row, .dev_col, .dev_amp, .rd_valid, .rd_g,
    .busy(prog_busy), .done(prog_done), .all_ok(prog_all_ok), .iter(prog_iter), .n_pulses(prog_pulses)
  );

endmodule
