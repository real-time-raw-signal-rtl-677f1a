// tb_approx_cam: fills approx_cam (5 locations x 64 rows x 128 bits) with
// random rows, then searches keys made from a stored row with k flipped
// bits, and fully random keys, at several thresholds. Each per-location
// result is compared with the testbench's own Hamming-distance scan
// (match when distance < threshold for any valid row of the location).
// Also checks that rows never written or cleared do not match.
module tb_approx_cam;
  import rsa_pkg::*;
  localparam int N_LOC = 5, RPL = 64, W = HASH_W, NR = N_LOC * RPL;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic wr_en = 1'b0, clr = 1'b0;
  logic [$clog2(NR)-1:0] wr_row = '0;
  logic [W-1:0] wr_data = '0, s_key = '0;
  logic [7:0] threshold = 8'd16;
  logic s_valid = 1'b0, s_end = 1'b0;
  logic m_valid, m_end;
  logic [N_LOC-1:0] loc_match;

  approx_cam dut (.*);

  int checks = 0, failures = 0;
  logic [W-1:0] rows [NR];
  bit rvalid [NR];
  logic [N_LOC-1:0] expq [$];
  int matches_seen = 0;

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [N_LOC-1:0] model(input logic [W-1:0] key, input int thr);
    logic [N_LOC-1:0] m = '0;
    for (int r = 0; r < NR; r++)
      if (rvalid[r] && $countones(rows[r] ^ key) < thr) m[r / RPL] = 1'b1;
    return m;
  endfunction

  function automatic logic [W-1:0] rand_word();
    return {$urandom(), $urandom(), $urandom(), $urandom()};
  endfunction

  always @(posedge clk) if (rst_n && m_valid) begin
    logic [N_LOC-1:0] e;
    e = expq.pop_front();
    checks++;
    if (e != loc_match) begin failures++; $display("match %b expected %b", loc_match, e); end
    if (loc_match != 0) matches_seen++;
  end

  task automatic search(input logic [W-1:0] key);
    expq.push_back(model(key, int'(threshold)));
    s_valid = 1'b1; s_key = key;
    @(negedge clk);
    s_valid = 1'b0;
  endtask

  initial begin
    for (int r = 0; r < NR; r++) rvalid[r] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    // only part of the rows written
    for (int r = 0; r < NR - 40; r++) begin
      rows[r] = rand_word(); rvalid[r] = 1;
      wr_en = 1'b1; wr_row = 9'(r); wr_data = rows[r];
      @(negedge clk);
    end
    wr_en = 1'b0;
    foreach (threshold_list[i]) begin
      threshold = 8'(threshold_list[i]);
      for (int k = 0; k < 150; k++) begin
        automatic int r = $urandom_range(0, NR - 1);
        automatic logic [W-1:0] key = rows[r];
        automatic int flips = $urandom_range(0, 40);
        if (!rvalid[r]) key = rand_word();
        for (int f = 0; f < flips; f++) key[$urandom_range(0, W - 1)] ^= 1'b1;
        search(key);
      end
      for (int k = 0; k < 20; k++) search(rand_word());
    end
    // an unwritten row's exact content must not match
    search('0);
    // clear: nothing matches afterwards
    clr = 1'b1; @(negedge clk); clr = 1'b0;
    for (int r = 0; r < NR; r++) rvalid[r] = 0;
    search(rows[0]);
    repeat (3) @(negedge clk);
    checks++;
    if (matches_seen < 100) begin failures++; $display("too few matches %0d", matches_seen); end
    checks++;
    if (expq.size() != 0) begin failures++; $display("results missing"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  int threshold_list [4] = '{1, 7, 16, 30};
endmodule
