// lsh_hasher: behavioural model of the memristor crossbar that hashes a seed
// of M event currents into HASH_W bits (random-hyperplane LSH).
//
// This is a behavioural model of an analog part: N_ARR crossbar arrays of
// ROWS x COLS memristors whose conductances are random (set by a few
// identical RESET pulses and the devices' own variability). The seed drives
// the ROWS word lines of every array; each column sums the current
// I_c = sum_r a_r * G[r][c]. Each adjacent column pair (2j, 2j+1) feeds a
// comparator, so the effective weight is the zero-mean difference
// G[r][2j+1] - G[r][2j]; the bit is 1 when the odd column's current exceeds
// the even column's and 0 otherwise, i.e. h = H(a . G). Hash bit
// a*COLS/2 + j comes from pair j of array a. Four 10x64 arrays give 128 bits.
//
// Following the design: the array sizes, the pairwise column subtraction
// and the comparator rule. This design's own choices: the conductances are
// loaded as 8-bit codes (1/16 uS) through g_we, standing in for the
// physical programming; the seed elements are offset by 'bias' (a signed
// input voltage around a mean current level) before they drive the rows,
// because unsigned currents of 60-120 pA would otherwise make most bits
// depend on the matrix alone; the analog evaluation takes one clock cycle.
//
// Interface: in_valid/in_seed/in_end in, out_valid/out_hash/out_end one
// cycle later, one seed per cycle. The conductance memory has no reset: it
// is non-volatile and must be loaded before use.
module lsh_hasher
  import rsa_pkg::*;
#(
  parameter int unsigned ROWS  = SEED_LEN,
  parameter int unsigned COLS  = 64,
  parameter int unsigned N_ARR = 4,
  parameter int unsigned OUT_W = N_ARR * COLS / 2
) (
  input  logic                       clk,
  input  logic                       rst_n,
  // conductance load
  input  logic                       g_we,
  input  logic [$clog2(N_ARR)-1:0]   g_arr,
  input  logic [$clog2(ROWS)-1:0]    g_row,
  input  logic [$clog2(COLS)-1:0]    g_col,
  input  logic [COND_W-1:0]          g_data,
  // hashing
  input  current_t                   bias,
  input  logic                       in_valid,
  input  current_t                   in_seed [ROWS],
  input  logic                       in_end,
  output logic                       out_valid,
  output logic [OUT_W-1:0]           out_hash,
  output logic                       out_end
);

  localparam int unsigned ACC_W = SAMPLE_W + 1 + COND_W + $clog2(ROWS) + 1;

  logic [COND_W-1:0] g [N_ARR][ROWS][COLS];

  always_ff @(posedge clk) begin
    if (g_we) g[g_arr][g_row][g_col] <= g_data;
  end

  // Column currents and comparators.
  logic signed [SAMPLE_W:0]  a   [ROWS];
  logic signed [ACC_W-1:0]   cur [N_ARR][COLS];
  logic [OUT_W-1:0]          hash;
  always_comb begin
    for (int r = 0; r < ROWS; r++)
      a[r] = $signed({1'b0, in_seed[r]}) - $signed({1'b0, bias});
    for (int k = 0; k < N_ARR; k++) begin
      for (int c = 0; c < COLS; c++) begin
        cur[k][c] = '0;
        for (int r = 0; r < ROWS; r++)
          cur[k][c] += ACC_W'(a[r]) * ACC_W'($signed({1'b0, g[k][r][c]}));
      end
      for (int j = 0; j < COLS / 2; j++)
        hash[k*(COLS/2) + j] = cur[k][2*j+1] > cur[k][2*j];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_hash  <= '0;
      out_end   <= 1'b0;
    end else begin
      out_valid <= in_valid;
      out_end   <= in_end;
      if (in_valid) out_hash <= hash;
    end
  end

endmodule
