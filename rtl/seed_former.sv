// seed_former: turns a stream of events into overlapping seeds of M
// consecutive events (M = 10 by default).
//
// Each incoming event is shifted into an M-deep window; once the window
// holds M events of the current read or reference, every new event yields
// one seed, so seeds overlap by M-1 events (seed k = events k .. k+M-1).
// seed[0] is the oldest event of the seed. in_end marks the end of a read or
// of a reference and empties the window, so seeds never span two of them.
//
// Timing: seed_valid/seed/seed_end are registered, one cycle after the
// event that completes the seed; one seed per cycle at most.
module seed_former
  import rsa_pkg::*;
#(
  parameter int unsigned M = SEED_LEN
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     in_valid,
  input  current_t in_value,
  input  logic     in_end,
  output logic     seed_valid,
  output current_t seed [M],
  output logic     seed_end
);

  localparam int unsigned CNT_W = $clog2(M + 1);

  current_t          win [M];     // win[M-1] newest
  logic [CNT_W-1:0]  count;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < M; i++) begin
        win[i]  <= '0;
        seed[i] <= '0;
      end
      count      <= '0;
      seed_valid <= 1'b0;
      seed_end   <= 1'b0;
    end else begin
      seed_valid <= 1'b0;
      seed_end   <= in_end;
      if (in_valid) begin
        for (int i = 0; i < M - 1; i++) win[i] <= win[i+1];
        win[M-1] <= in_value;
        if (count != CNT_W'(M)) count <= count + 1'b1;
        if (count >= CNT_W'(M - 1)) begin
          seed_valid <= 1'b1;
          for (int i = 0; i < M - 1; i++) seed[i] <= win[i+1];
          seed[M-1] <= in_value;
        end
      end
      if (in_end) count <= '0;
    end
  end

endmodule
