// tb_vote_decision: random and hand-shaped vote vectors in all three modes.
// The expected result comes from the testbench's own stable sort of the
// counts (descending, ties by lower location) and the rules:
//   threshold: top > vote_threshold; argmax: top > 0;
//   ratio: top > min_votes and top >= 2*second, else adjacent top two with
//   top > min_votes and top + second > 2*third gives 'between'.
// Checks kind, locations and top count, that the 'between' and the
// rejected outcomes each occur, and that res_valid rises on the
// (N_LOC + 1)-th clock edge after the edge that samples votes_valid.
module tb_vote_decision;
  import rsa_pkg::*;
  localparam int N_LOC = 5;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic votes_valid = 1'b0;
  logic [VOTE_W-1:0] votes [N_LOC];
  dec_mode_e mode = DEC_THRESHOLD;
  logic [VOTE_W-1:0] vote_threshold = 16'd7, min_votes = 16'd4;
  logic busy, res_valid;
  res_kind_e res_kind;
  logic [2:0] res_loc, res_loc2;
  logic [VOTE_W-1:0] res_votes;

  vote_decision dut (.*);

  int checks = 0, failures = 0;
  int cnt_kind [3] = '{0, 0, 0};
  int cnt_mode [3] = '{0, 0, 0};

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic one(input int v [N_LOC], input dec_mode_e m);
    int idx [N_LOC];
    int ek, el, el2, t1, t2, t3, lo, hi, cyc;
    // stable descending sort of indices
    for (int i = 0; i < N_LOC; i++) idx[i] = i;
    for (int i = 1; i < N_LOC; i++)
      for (int j = i; j > 0 && v[idx[j]] > v[idx[j-1]]; j--) begin
        int t = idx[j]; idx[j] = idx[j-1]; idx[j-1] = t;
      end
    t1 = v[idx[0]]; t2 = v[idx[1]]; t3 = v[idx[2]];
    lo = (idx[0] < idx[1]) ? idx[0] : idx[1];
    hi = (idx[0] < idx[1]) ? idx[1] : idx[0];
    ek = 0; el = idx[0]; el2 = -1;
    case (m)
      DEC_THRESHOLD: if (t1 > int'(vote_threshold)) ek = 1;
      DEC_ARGMAX:    if (t1 > 0) ek = 1;
      default: begin
        if (t1 > int'(min_votes) && t1 >= 2 * t2) ek = 1;
        else if (t1 > int'(min_votes) && hi - lo == 1 && t1 + t2 > 2 * t3) begin
          ek = 2; el = lo; el2 = hi;
        end
      end
    endcase
    @(negedge clk);
    mode = m;
    for (int i = 0; i < N_LOC; i++) votes[i] = VOTE_W'(v[i]);
    votes_valid = 1'b1;
    @(negedge clk);
    votes_valid = 1'b0;
    cyc = 1;
    while (!res_valid) begin @(negedge clk); cyc++; end
    checks += 3;
    if (cyc != N_LOC + 2) begin failures++; $display("latency %0d", cyc); end
    if (int'(res_kind) != ek) begin failures++; $display("mode %0d kind %0d exp %0d", m, res_kind, ek); end
    if (ek != 0 && (int'(res_loc) != el || (ek == 2 && int'(res_loc2) != el2))) begin
      failures++; $display("loc %0d/%0d exp %0d/%0d", res_loc, res_loc2, el, el2);
    end
    checks++;
    if (int'(res_votes) != t1) begin failures++; $display("votes %0d exp %0d", res_votes, t1); end
    cnt_kind[ek]++;
    cnt_mode[int'(m)]++;
  endtask

  initial begin
    int v [N_LOC];
    for (int i = 0; i < N_LOC; i++) votes[i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int k = 0; k < 600; k++) begin
      automatic dec_mode_e m = dec_mode_e'(k % 3);
      automatic int shape = $urandom_range(0, 3);
      for (int i = 0; i < N_LOC; i++) v[i] = $urandom_range(0, 12);
      if (shape == 1) begin
        // adjacent pair sharing the read, small third
        automatic int p = $urandom_range(0, N_LOC - 2);
        for (int i = 0; i < N_LOC; i++) v[i] = $urandom_range(0, 3);
        v[p] = $urandom_range(10, 20); v[p+1] = $urandom_range(10, 20);
      end else if (shape == 2) begin
        automatic int p = $urandom_range(0, N_LOC - 1);
        for (int i = 0; i < N_LOC; i++) v[i] = $urandom_range(0, 5);
        v[p] = $urandom_range(10, 40);
      end
      one(v, m);
    end
    checks += 3;
    if (cnt_kind[0] == 0) begin failures++; $display("no rejected read"); end
    if (cnt_kind[1] == 0) begin failures++; $display("no single result"); end
    if (cnt_kind[2] == 0) begin failures++; $display("no between result"); end
    $display("kinds none=%0d single=%0d between=%0d", cnt_kind[0], cnt_kind[1], cnt_kind[2]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
