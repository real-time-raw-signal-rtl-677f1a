// event_filter: removes 'stay' events whose mean differs too little from the
// event before them.
//
// The event detector deliberately over-segments, so one k-mer often yields
// several nearly equal events. This filter keeps event v_i only when
// |v_i - v_(i-1)| > diff_threshold, comparing with the previous detected
// event (kept or not), as in u = { v_i : |v_i - v_(i-1)| > 3 pA, i >= 2 }.
// The first event of a read has no predecessor and is never kept, which
// follows the i >= 2 bound literally. The default threshold is 3 pA (48 in
// 1/16 pA); 4 pA trades precision for recall.
//
// Interface: events in on in_valid/in_value, in_end marks the end of a read
// and resets the history. Outputs are registered, one cycle later; out_end
// follows in_end by one cycle whether or not the last event was kept.
// 'dropped' pulses for each removed event.
module event_filter
  import rsa_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  logic     in_valid,
  input  current_t in_value,
  input  logic     in_end,
  input  current_t diff_threshold,
  output logic     out_valid,
  output current_t out_value,
  output logic     out_end,
  output logic     dropped
);

  current_t prev;
  logic     has_prev;

  current_t diff;
  assign diff = (in_value > prev) ? in_value - prev : prev - in_value;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      prev      <= '0;
      has_prev  <= 1'b0;
      out_valid <= 1'b0;
      out_value <= '0;
      out_end   <= 1'b0;
      dropped   <= 1'b0;
    end else begin
      out_valid <= 1'b0;
      dropped   <= 1'b0;
      out_end   <= in_end;
      if (in_valid) begin
        prev     <= in_value;
        has_prev <= 1'b1;
        if (has_prev && diff > diff_threshold) begin
          out_valid <= 1'b1;
          out_value <= in_value;
        end else begin
          dropped <= 1'b1;
        end
      end
      if (in_end) has_prev <= 1'b0;
    end
  end

endmodule
