// vote_counter: accumulates one vote per location for every seed of a read
// that the CAM matched at that location.
//
// There is one counter per location. Each search result adds loc_match to
// the counters (a location gains at most one vote per seed, however many of
// its rows matched). At the end of a read the counts, including the result
// that arrives with in_end, are copied to 'votes' with votes_valid for one
// cycle and the counters restart from zero for the next read. Counters
// saturate at 2^VOTE_W - 1; 'saturated' then reports it with the snapshot.
//
// Following the design: one vote per matching location per seed. This
// design's own choices: counter width, saturation, snapshot-and-clear.
// Timing: votes_valid one cycle after in_end.
module vote_counter
  import rsa_pkg::*;
#(
  parameter int unsigned N_LOC = 5,
  parameter int unsigned VW    = VOTE_W
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic [N_LOC-1:0] in_match,
  input  logic             in_end,
  output logic             votes_valid,
  output logic [VW-1:0]    votes [N_LOC],
  output logic             saturated
);

  localparam logic [VW-1:0] VMAX = '1;

  logic [VW-1:0] cnt [N_LOC];
  logic [VW-1:0] nxt [N_LOC];
  logic          sat, sat_n;

  always_comb begin
    sat_n = sat;
    for (int l = 0; l < N_LOC; l++) begin
      nxt[l] = cnt[l];
      if (in_valid && in_match[l]) begin
        if (cnt[l] == VMAX) sat_n = 1'b1;
        else                nxt[l] = cnt[l] + 1'b1;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int l = 0; l < N_LOC; l++) begin
        cnt[l]   <= '0;
        votes[l] <= '0;
      end
      sat         <= 1'b0;
      saturated   <= 1'b0;
      votes_valid <= 1'b0;
    end else begin
      votes_valid <= in_end;
      if (in_end) begin
        for (int l = 0; l < N_LOC; l++) begin
          votes[l] <= nxt[l];
          cnt[l]   <= '0;
        end
        saturated <= sat_n;
        sat       <= 1'b0;
      end else begin
        for (int l = 0; l < N_LOC; l++) cnt[l] <= nxt[l];
        sat <= sat_n;
      end
    end
  end

endmodule
