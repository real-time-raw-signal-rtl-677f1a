// event_detector: cuts the raw nanopore current into events and reports the
// mean current of each event.
//
// A new nucleotide entering the pore shows up as a step in the current. For
// every candidate boundary p the detector compares the WIN samples before p
// (window A) with the WIN samples from p on (window B) using Welch's t
// statistic, computed in squared form without a square root:
//
//   t^2 = WIN*(SB-SA)^2 / (WIN*(QA+QB) - SA^2 - SB^2)
//
// where S is the sum and Q the sum of squares of a window. A boundary is
// placed at p when t^2(p) is above t2_threshold and is a local peak
// (t^2(p) > t^2(p-1) and t^2(p) >= t^2(p+1)). The samples between two
// boundaries form one event, whose value is their mean (truncated).
//
// Following the design: event detection by a t-test over sliding windows and
// event value = mean between two boundaries. This design's own choices: a
// single window length WIN (default 6), the peak rule, the squared
// statistic in 1/16 units, and truncating division for the mean.
//
// Interface: one sample per cycle on in_valid/in_sample while in_ready is
// high; in_last marks the last sample of a read. The decision for sample p
// needs WIN samples after it, so after in_last the detector drops in_ready
// for up to WIN cycles while it folds the held samples into the final
// event, which it outputs with ev_end set. The first held sample can still
// be a boundary (WIN >= 2 is assumed, so that this event and the final one
// leave on different cycles). Events leave on ev_valid/ev_value
// one register after the cycle that closed them. An event reaching
// 2^LEN_W - WIN - 1 samples is closed by force.
module event_detector
  import rsa_pkg::*;
#(
  parameter int unsigned WIN   = 6,
  parameter int unsigned LEN_W = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  input  current_t    in_sample,
  input  logic        in_last,
  output logic        in_ready,
  input  logic [31:0] t2_threshold,   // threshold on t^2, 1/16 units
  output logic        ev_valid,
  output current_t    ev_value,
  output logic        ev_end,
  output logic        boundary        // pulse: a t-test boundary was placed
);

  localparam int unsigned NW = 2 * WIN;
  localparam logic [LEN_W-1:0] LEN_FORCE = LEN_W'((1 << LEN_W) - WIN - 1);
  localparam int unsigned FILL_W = $clog2(NW + 1);
  localparam int unsigned IDX_W  = $clog2(WIN + 1);
  localparam int unsigned NWI_W  = $clog2(NW);

  current_t           win [NW];        // win[0] is the newest sample
  logic [FILL_W-1:0]  fill;            // samples of this read, saturates at NW
  logic [31:0]        s1, s2;          // t^2 of p-1 and p-2
  logic [31:0]        acc_sum;
  logic [LEN_W-1:0]   acc_len;
  logic               draining;
  logic [IDX_W-1:0]   drain_idx;
  logic               first_drain;

  assign in_ready = !draining;
  wire accept = in_valid && in_ready;

  // Window contents after accepting the incoming sample.
  current_t nw [NW];
  always_comb begin
    nw[0] = in_sample;
    for (int i = 1; i < NW; i++) nw[i] = win[i-1];
  end

  logic [FILL_W-1:0] fill_n;
  assign fill_n = (fill == FILL_W'(NW)) ? fill : fill + 1'b1;

  // Squared t statistic of the boundary between nw[WIN..NW-1] and nw[0..WIN-1].
  logic [63:0] sa, sb, qa, qb, num, den, t2_full;
  logic [31:0] stat_p;
  always_comb begin
    sa = '0; sb = '0; qa = '0; qb = '0;
    for (int i = 0; i < WIN; i++) begin
      sb += 64'(nw[i]);
      qb += 64'(nw[i]) * 64'(nw[i]);
      sa += 64'(nw[WIN+i]);
      qa += 64'(nw[WIN+i]) * 64'(nw[WIN+i]);
    end
    num = 64'(WIN) * ((sb > sa) ? (sb - sa) * (sb - sa) : (sa - sb) * (sa - sb));
    den = 64'(WIN) * (qa + qb) - sa * sa - sb * sb;
    if (den == 0) t2_full = (num == 0) ? 64'd0 : 64'hFFFF_FFFF;
    else          t2_full = (num << 4) / den;
    if (fill_n != FILL_W'(NW))         stat_p = '0;
    else if (t2_full > 64'hFFFF_FFFF) stat_p = 32'hFFFF_FFFF;
    else                              stat_p = t2_full[31:0];
  end

  // p-1 is a boundary if its statistic is above threshold and a local peak.
  wire peak = (s1 > t2_threshold) && (s1 > s2) && (s1 >= stat_p);
  // Sample x[p-1], the one decided this cycle.
  current_t d;
  assign d = nw[WIN];
  wire have_d = fill_n > FILL_W'(WIN);

  function automatic current_t mean_of(input logic [31:0] s, input logic [LEN_W-1:0] n);
    logic [31:0] q;
    q = (n == 0) ? 32'd0 : s / 32'(n);
    return q[SAMPLE_W-1:0];
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NW; i++) win[i] <= '0;
      fill      <= '0;
      s1        <= '0;
      s2        <= '0;
      acc_sum   <= '0;
      acc_len   <= '0;
      draining  <= 1'b0;
      drain_idx <= '0;
      first_drain <= 1'b0;
      ev_valid  <= 1'b0;
      ev_value  <= '0;
      ev_end    <= 1'b0;
      boundary  <= 1'b0;
    end else begin
      ev_valid <= 1'b0;
      ev_end   <= 1'b0;
      boundary <= 1'b0;
      if (accept) begin
        for (int i = 0; i < NW; i++) win[i] <= nw[i];
        fill <= fill_n;
        s2   <= s1;
        s1   <= stat_p;
        if (have_d) begin
          if ((peak || acc_len >= LEN_FORCE) && acc_len != 0) begin
            ev_valid <= 1'b1;
            ev_value <= mean_of(acc_sum, acc_len);
            boundary <= peak;
            acc_sum  <= 32'(d);
            acc_len  <= LEN_W'(1);
          end else begin
            acc_sum <= acc_sum + 32'(d);
            acc_len <= acc_len + 1'b1;
          end
        end
        if (in_last) begin
          draining  <= 1'b1;
          first_drain <= 1'b1;
          drain_idx <= (fill_n > FILL_W'(WIN)) ? IDX_W'(WIN - 1) : IDX_W'(fill_n - 1'b1);
        end
      end else if (draining) begin
        first_drain <= 1'b0;
        // Fold the samples still held in the window into the last event.
        // The first of them, x[p], may still start a new event: its
        // statistic s1 is final and no later one exists to beat it.
        s2 <= '0;
        s1 <= '0;
        if (first_drain && s1 > t2_threshold && s1 > s2 && acc_len != 0) begin
          ev_valid  <= 1'b1;
          ev_value  <= mean_of(acc_sum, acc_len);
          boundary  <= 1'b1;
          acc_sum   <= 32'(win[NWI_W'(drain_idx)]);
          acc_len   <= LEN_W'(1);
          drain_idx <= drain_idx - 1'b1;
        end else if (drain_idx == 0) begin
          ev_valid <= 1'b1;
          ev_end   <= 1'b1;
          ev_value <= mean_of(acc_sum + 32'(win[0]), acc_len + 1'b1);
          draining <= 1'b0;
          fill     <= '0;
          s1       <= '0;
          s2       <= '0;
          acc_sum  <= '0;
          acc_len  <= '0;
        end else begin
          acc_sum   <= acc_sum + 32'(win[NWI_W'(drain_idx)]);
          acc_len   <= acc_len + 1'b1;
          drain_idx <= drain_idx - 1'b1;
        end
      end
    end
  end

endmodule
