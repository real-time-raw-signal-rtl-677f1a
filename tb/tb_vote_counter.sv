// tb_vote_counter: random per-location match vectors grouped into reads of
// random length; the snapshot at each end of read must equal the
// testbench's own per-location sums, including the result that arrives in
// the same cycle as the end marker. A second instance with 3-bit counters
// checks saturation and the 'saturated' flag.
module tb_vote_counter;
  import rsa_pkg::*;
  localparam int N_LOC = 5;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic in_valid = 1'b0, in_end = 1'b0;
  logic [N_LOC-1:0] in_match = '0;
  logic votes_valid, saturated, votes_valid_s, saturated_s;
  logic [VOTE_W-1:0] votes [N_LOC];
  logic [2:0] votes_s [N_LOC];

  vote_counter dut (.*);
  vote_counter #(.VW(3)) dut_s (.clk, .rst_n, .in_valid, .in_match, .in_end,
                                .votes_valid(votes_valid_s), .votes(votes_s), .saturated(saturated_s));

  int checks = 0, failures = 0;
  int acc [N_LOC];
  logic [N_LOC*32-1:0] expv [$];
  int snaps = 0, sat_reads = 0;

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && votes_valid) begin
    int e [N_LOC];
    logic [N_LOC*32-1:0] ep;
    bit exp_sat;
    exp_sat = 0;
    ep = expv.pop_front();
    for (int l = 0; l < N_LOC; l++) e[l] = int'(ep[l*32 +: 32]);
    snaps++;
    for (int l = 0; l < N_LOC; l++) begin
      checks += 2;
      if (int'(votes[l]) != e[l]) begin failures++; $display("loc %0d votes %0d exp %0d", l, votes[l], e[l]); end
      if (int'(votes_s[l]) != ((e[l] > 7) ? 7 : e[l])) begin failures++; $display("sat loc %0d %0d", l, votes_s[l]); end
      if (e[l] > 7) exp_sat = 1;
    end
    checks += 2;
    if (saturated != 1'b0) begin failures++; $display("16-bit counter saturated"); end
    if (saturated_s != exp_sat) begin failures++; $display("saturated flag wrong"); end
    if (exp_sat) sat_reads++;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int rd = 0; rd < 50; rd++) begin
      automatic int n = $urandom_range(0, 25);
      for (int l = 0; l < N_LOC; l++) acc[l] = 0;
      for (int k = 0; k <= n; k++) begin
        @(negedge clk);
        in_valid = ($urandom_range(0, 3) != 0);
        in_match = N_LOC'($urandom());
        in_end = (k == n);
        if (in_valid) for (int l = 0; l < N_LOC; l++) acc[l] += in_match[l];
      end
      begin
        logic [N_LOC*32-1:0] ap;
        for (int l = 0; l < N_LOC; l++) ap[l*32 +: 32] = 32'(acc[l]);
        expv.push_back(ap);
      end
      @(negedge clk);
      in_valid = 1'b0; in_end = 1'b0;
    end
    repeat (3) @(negedge clk);
    checks += 2;
    if (snaps != 50) begin failures++; $display("snapshots %0d", snaps); end
    if (sat_reads == 0) begin failures++; $display("saturation never exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
