// tb_seed_former: feeds reads of random length through seed_former and
// checks every seed against a window kept by the testbench (seed k = events
// k..k+M-1 of the same read), that short reads give no seed, and that a
// seed leaves one cycle after the event completing it.
module tb_seed_former;
  import rsa_pkg::*;
  localparam int M = SEED_LEN;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic in_valid = 1'b0, in_end = 1'b0;
  current_t in_value = '0;
  logic seed_valid, seed_end;
  current_t seed [M];

  seed_former dut (.*);

  int checks = 0, failures = 0;
  current_t hist [$];
  logic [M*SAMPLE_W-1:0] expq [$];

  initial begin
    #3000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int last_in_cycle = -10, cycle = 0;
  always @(posedge clk) begin
    cycle++;
    if (rst_n && seed_valid) begin
      checks++;
      if (expq.size() == 0) begin failures++; $display("unexpected seed"); end
      else begin
        logic [M*SAMPLE_W-1:0] e;
        e = expq.pop_front();
        for (int i = 0; i < M; i++) if (e[i*SAMPLE_W +: SAMPLE_W] != seed[i]) begin
          failures++; $display("seed elem %0d got %0d exp %0d", i, seed[i], e[i*SAMPLE_W +: SAMPLE_W]); break;
        end
      end
      checks++;
      if (cycle != last_in_cycle + 1) begin failures++; $display("latency wrong"); end
    end
    if (in_valid) last_in_cycle = cycle;
  end

  initial begin
    automatic int nseeds = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int rd = 0; rd < 30; rd++) begin
      automatic int n = (rd < 3) ? M - 1 : $urandom_range(1, 50);
      hist.delete();
      for (int i = 0; i < n; i++) begin
        automatic current_t v = current_t'($urandom_range(0, 65535));
        hist.push_back(v);
        if (hist.size() >= M) begin
          logic [M*SAMPLE_W-1:0] e;
          for (int k = 0; k < M; k++) e[k*SAMPLE_W +: SAMPLE_W] = hist[hist.size() - M + k];
          expq.push_back(e);
          nseeds++;
        end
        @(negedge clk);
        in_valid = 1'b1; in_value = v; in_end = (i == n - 1);
        @(negedge clk);
        in_valid = 1'b0; in_end = 1'b0;
        if ($urandom_range(0, 3) == 0) @(negedge clk);
      end
    end
    repeat (4) @(posedge clk);
    checks++;
    if (expq.size() != 0 || nseeds == 0) begin failures++; $display("%0d seeds missing", expq.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
