// vote_decision: turns the vote counts of one read into a mapping,
// detection or classification result.
//
// The counts are copied in on votes_valid and scanned one location per
// cycle, keeping the three largest counts and their locations (ties keep
// the lower location). Then, by 'mode':
//   DEC_THRESHOLD  detection: the read is assigned (RES_SINGLE, res_loc =
//                  top location) when the top count is larger than
//                  vote_threshold (seven in the virus detection set-up).
//   DEC_ARGMAX     classification: the read is assigned to the location
//                  with the most votes; a read with no vote at all is left
//                  unassigned (this design's choice).
//   DEC_RATIO      mapping: assigned to the top location when top >
//                  min_votes and top >= 2 x second; otherwise, when the top
//                  two locations are adjacent, top > min_votes (this
//                  design's choice) and top + second > 2 x third, assigned
//                  between them (RES_BETWEEN, res_loc < res_loc2).
// Anything else gives RES_NONE. res_votes is the top count.
//
// Timing: res_valid is registered high by the (N_LOC + 1)-th clock edge
// after the edge that samples votes_valid, for one cycle; busy is high
// meanwhile, and a votes_valid that arrives while busy is a protocol error
// (asserted in simulation).
//
// rst_n is an asynchronous reset. The overlap assertion also uses it as its
// disable condition; lint tools report that as a reset used both
// synchronously and asynchronously. The synchronous use is in checking
// code only.
module vote_decision
  import rsa_pkg::*;
#(
  parameter int unsigned N_LOC = 5,
  parameter int unsigned VW    = VOTE_W,
  parameter int unsigned LW    = (N_LOC > 1) ? $clog2(N_LOC) : 1
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           votes_valid,
  input  logic [VW-1:0]  votes [N_LOC],
  input  dec_mode_e      mode,
  input  logic [VW-1:0]  vote_threshold,
  input  logic [VW-1:0]  min_votes,
  output logic           busy,
  output logic           res_valid,
  output res_kind_e      res_kind,
  output logic [LW-1:0]  res_loc,
  output logic [LW-1:0]  res_loc2,
  output logic [VW-1:0]  res_votes
);

  logic [VW-1:0] v [N_LOC];
  localparam int unsigned IW = $clog2(N_LOC + 1);
  logic [IW-1:0] idx;
  logic [VW-1:0] m1, m2, m3;
  logic [LW-1:0] i1, i2;
  logic          scanning;

  assign busy = scanning;

  wire [VW-1:0] cur = (idx < IW'(N_LOC)) ? v[idx[LW-1:0]] : '0;

  // Decision on the finished top three.
  res_kind_e kind;
  logic [LW-1:0] lo, hi;
  always_comb begin
    kind = RES_NONE;
    lo   = (i1 < i2) ? i1 : i2;
    hi   = (i1 < i2) ? i2 : i1;
    unique case (mode)
      DEC_THRESHOLD: if (m1 > vote_threshold) kind = RES_SINGLE;
      DEC_ARGMAX:    if (m1 != 0) kind = RES_SINGLE;
      DEC_RATIO: begin
        if (m1 > min_votes && {1'b0, m1} >= {m2, 1'b0})
          kind = RES_SINGLE;
        else if (m1 > min_votes && (hi - lo == LW'(1)) &&
                 ({1'b0, m1} + {1'b0, m2} > {m3, 1'b0}))
          kind = RES_BETWEEN;
      end
      default: kind = RES_NONE;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int l = 0; l < N_LOC; l++) v[l] <= '0;
      idx       <= '0;
      m1        <= '0;
      m2        <= '0;
      m3        <= '0;
      i1        <= '0;
      i2        <= '0;
      scanning  <= 1'b0;
      res_valid <= 1'b0;
      res_kind  <= RES_NONE;
      res_loc   <= '0;
      res_loc2  <= '0;
      res_votes <= '0;
    end else begin
      res_valid <= 1'b0;
      if (votes_valid && !scanning) begin
        for (int l = 0; l < N_LOC; l++) v[l] <= votes[l];
        idx      <= '0;
        m1       <= '0;
        m2       <= '0;
        m3       <= '0;
        i1       <= '0;
        i2       <= (N_LOC > 1) ? LW'(1) : '0;
        scanning <= 1'b1;
      end else if (scanning) begin
        if (idx == IW'(N_LOC)) begin
          scanning  <= 1'b0;
          res_valid <= 1'b1;
          res_kind  <= kind;
          res_votes <= m1;
          res_loc   <= (kind == RES_BETWEEN) ? lo : i1;
          res_loc2  <= (kind == RES_BETWEEN) ? hi : i2;
        end else begin
          if (cur > m1) begin
            m3 <= m2; m2 <= m1; i2 <= i1;
            m1 <= cur; i1 <= LW'(idx);
          end else if (cur > m2) begin
            m3 <= m2;
            m2 <= cur; i2 <= LW'(idx);
          end else if (cur > m3) begin
            m3 <= cur;
          end
          idx <= idx + 1'b1;
        end
      end
    end
  end

  a_no_overlap: assert property (@(posedge clk) disable iff (!rst_n) !(votes_valid && scanning))
    else $error("vote_decision: new votes while still deciding");

endmodule
