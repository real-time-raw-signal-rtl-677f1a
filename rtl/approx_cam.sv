// approx_cam: behavioural model of the memristor content-addressable memory
// that searches a hash against all stored reference hashes at once and
// tolerates bit mismatches.
//
// This is a behavioural model of an analog array. Each bit cell holds two
// memristors in complementary states (G_on / G_off); a searched bit that
// differs from the stored bit turns on the low-resistance device, so the
// match-line current of a row is proportional to the Hamming distance
// between key and row. A sense amplifier with a tunable threshold declares
// the row a match when that distance is below 'threshold'. Rows are grouped
// into N_LOC locations of ROWS_PER_LOC rows each (one reference genome
// position or species per location); a location matches when any of its
// rows matches, which earns it one vote per searched seed.
//
// Following the design: differential encoding, mismatch counting on the
// match line, the threshold sense amplifier, rows sharing a location.
// This design's own choices: "below the threshold" is read as
// distance < threshold; a per-row valid flag so that rows never written do
// not match; writes of whole rows through a digital port (standing in for
// write-and-verify programming); one clock cycle per search.
//
// Interface: wr_en/wr_row/wr_data store a row (and mark it valid), clr
// invalidates all rows. s_valid/s_key/s_end start a search; m_valid,
// loc_match and m_end appear one cycle later. One search per cycle.
module approx_cam
  import rsa_pkg::*;
#(
  parameter int unsigned N_LOC        = 5,
  parameter int unsigned ROWS_PER_LOC = 64,
  parameter int unsigned W            = HASH_W,
  parameter int unsigned N_ROWS       = N_LOC * ROWS_PER_LOC
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       wr_en,
  input  logic [$clog2(N_ROWS)-1:0]  wr_row,
  input  logic [W-1:0]               wr_data,
  input  logic                       clr,
  input  logic [7:0]                 threshold,
  input  logic                       s_valid,
  input  logic [W-1:0]               s_key,
  input  logic                       s_end,
  output logic                       m_valid,
  output logic [N_LOC-1:0]           loc_match,
  output logic                       m_end
);

  localparam int unsigned HD_W = $clog2(W + 1);

  logic [W-1:0]      mem   [N_ROWS];
  logic [N_ROWS-1:0] valid;

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_row] <= wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      valid <= '0;
    else if (clr)    valid <= '0;
    else if (wr_en)  valid[wr_row] <= 1'b1;
  end

  // Match lines: one mismatch count per row against the sense threshold.
  logic [N_ROWS-1:0] ml;
  logic [N_LOC-1:0]  lm;

  for (genvar r = 0; r < N_ROWS; r++) begin : g_row
    logic [HD_W-1:0] hd;
    always_comb begin
      hd = '0;
      for (int b = 0; b < W; b++) hd += HD_W'(mem[r][b] ^ s_key[b]);
    end
    assign ml[r] = valid[r] && (32'(hd) < 32'(threshold));
  end

  for (genvar l = 0; l < N_LOC; l++) begin : g_loc
    assign lm[l] = |ml[l*ROWS_PER_LOC +: ROWS_PER_LOC];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      m_valid   <= 1'b0;
      loc_match <= '0;
      m_end     <= 1'b0;
    end else begin
      m_valid   <= s_valid;
      m_end     <= s_end;
      loc_match <= s_valid ? lm : '0;
    end
  end

endmodule
