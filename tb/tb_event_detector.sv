// tb_event_detector: drives piecewise-constant current steps (event lengths
// WIN..3*WIN samples, adjacent levels at least 8 pA apart) through
// event_detector. Part 1 is noiseless, so every event mean must equal its
// level exactly; part 2 adds +/-0.5 pA noise and allows 1 pA error. Also
// checks the end-of-read flag on the last event, that in_ready is low for
// exactly WIN cycles after the last sample, and that one sample per cycle is
// accepted otherwise.
module tb_event_detector;
  import rsa_pkg::*;
  localparam int WIN = 6;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic in_valid = 1'b0, in_last = 1'b0, in_ready;
  current_t in_sample = '0;
  logic ev_valid, ev_end, boundary;
  current_t ev_value;
  logic [31:0] t2_threshold = 32'd1024;  // t > 8

  event_detector #(.WIN(WIN)) dut (.*);

  int checks = 0, failures = 0;
  int expq [$];
  int tol = 0;
  int ends = 0, stall_cycles = 0;
  bit expect_end = 0;

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    if (!in_ready) stall_cycles++;
    if (ev_valid) begin
      checks++;
      if (expq.size() == 0) begin failures++; $display("extra event %0d", ev_value); end
      else begin
        int e, dif;
        e = expq.pop_front();
        dif = int'(ev_value) - e;
        if (dif < -tol || dif > tol) begin failures++; $display("event %0d expected %0d", ev_value, e); end
        checks++;
        if (ev_end != (expq.size() == 0)) begin failures++; $display("ev_end wrong"); end
      end
      if (ev_end) ends++;
    end
  end

  task automatic run_read(input int nev, input int noise);
    int level = 0;
    int samples [$];
    for (int k = 0; k < nev; k++) begin
      int len = $urandom_range(WIN, 3 * WIN);
      int nl;
      do nl = int'($urandom_range(60 * 16, 120 * 16));
      while (k > 0 && ((nl > level) ? nl - level : level - nl) < 8 * 16);
      level = nl;
      expq.push_back(level);
      for (int i = 0; i < len; i++)
        samples.push_back(level + ((noise > 0) ? int'($urandom_range(0, 2 * noise)) - noise : 0));
    end
    stall_cycles = 0;
    foreach (samples[i]) begin
      @(negedge clk);
      checks++;
      if (!in_ready) begin failures++; $display("not ready mid read"); end
      in_valid = 1'b1; in_sample = current_t'(samples[i]); in_last = (i == samples.size() - 1);
    end
    @(negedge clk);
    in_valid = 1'b0; in_last = 1'b0;
    wait (in_ready);
    @(negedge clk);
    checks++;
    if (stall_cycles != WIN) begin failures++; $display("drain took %0d cycles", stall_cycles); end
    repeat (3) @(negedge clk);
    checks++;
    if (expq.size() != 0) begin failures++; $display("%0d events missing", expq.size()); expq.delete(); end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    tol = 0;
    for (int r = 0; r < 20; r++) run_read($urandom_range(2, 30), 0);
    tol = 16;
    for (int r = 0; r < 20; r++) run_read($urandom_range(2, 30), 8);
    checks++;
    if (ends != 40) begin failures++; $display("ends %0d", ends); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
