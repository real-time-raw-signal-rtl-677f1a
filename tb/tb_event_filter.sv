// tb_event_filter: random event streams through event_filter, compared with
// a reference list built in the testbench from the rule
// keep v_i (i >= 2) when |v_i - v_(i-1)| > threshold. Also checks the end
// marker, the reset of history between reads and the one-cycle latency.
module tb_event_filter;
  import rsa_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic in_valid = 1'b0, in_end = 1'b0;
  current_t in_value = '0, thr;
  logic out_valid, out_end, dropped;
  current_t out_value;

  event_filter dut (.*, .diff_threshold(thr));

  int checks = 0, failures = 0;
  current_t expq [$];
  int ends_seen = 0, ends_sent = 0;
  int drops = 0;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    if (out_valid) begin
      checks++;
      if (expq.size() == 0) begin
        failures++; $display("unexpected event %0d", out_value);
      end else begin
        current_t e;
        e = expq.pop_front();
        if (e != out_value) begin
          failures++; $display("got %0d expected %0d", out_value, e);
        end
      end
    end
    if (dropped) drops++;
    if (out_end) ends_seen++;
  end

  initial begin
    thr = current_t'(48);   // 3 pA
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int rd = 0; rd < 40; rd++) begin
      automatic int n = $urandom_range(1, 60);
      automatic int prev = -1;
      for (int i = 0; i < n; i++) begin
        int v;
        // levels near each other often, so both outcomes occur
        v = (prev < 0 || $urandom_range(0, 2) == 0) ? int'($urandom_range(900, 2000))
                                                    : prev + int'($urandom_range(0, 100)) - 50;
        if (v < 0) v = 0;
        if (prev >= 0 && ((v > prev) ? v - prev : prev - v) > int'(thr)) expq.push_back(current_t'(v));
        @(negedge clk);
        in_valid = 1'b1; in_value = current_t'(v); in_end = (i == n - 1);
        @(negedge clk);
        in_valid = 1'b0; in_end = 1'b0;
        if ($urandom_range(0, 1)) @(negedge clk);
        prev = v;
      end
      ends_sent++;
    end
    repeat (5) @(posedge clk);
    checks++;
    if (expq.size() != 0) begin failures++; $display("%0d events missing", expq.size()); end
    checks++;
    if (ends_seen != ends_sent) begin failures++; $display("ends %0d/%0d", ends_seen, ends_sent); end
    checks++;
    if (drops == 0) begin failures++; $display("no event was dropped"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
