// tb_lsh_hasher: loads random conductances (0..15 uS in 1/16 uS steps) into
// lsh_hasher, hashes random seeds around a bias, and compares every bit
// with the testbench's own evaluation of
//   bit(a, j) = sum_r (x_r - bias) * G[a][r][2j+1] > sum_r (x_r - bias) * G[a][r][2j].
// Also checks that similar seeds give closer hashes than unrelated ones
// (the locality property) and the one-cycle latency at one seed per cycle.
module tb_lsh_hasher;
  import rsa_pkg::*;
  localparam int ROWS = SEED_LEN, COLS = 64, N_ARR = 4, OUT_W = N_ARR * COLS / 2;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic g_we = 1'b0;
  logic [1:0] g_arr = '0;
  logic [3:0] g_row = '0;
  logic [5:0] g_col = '0;
  logic [COND_W-1:0] g_data = '0;
  current_t bias = current_t'(90 * 16);
  logic in_valid = 1'b0, in_end = 1'b0;
  current_t in_seed [ROWS];
  logic out_valid, out_end;
  logic [OUT_W-1:0] out_hash;

  lsh_hasher dut (.*);

  int checks = 0, failures = 0;
  int gm [N_ARR][ROWS][COLS];
  logic [OUT_W-1:0] expq [$];

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [OUT_W-1:0] model(input int x [ROWS]);
    logic [OUT_W-1:0] h;
    for (int a = 0; a < N_ARR; a++)
      for (int j = 0; j < COLS / 2; j++) begin
        longint i0 = 0, i1 = 0;
        for (int r = 0; r < ROWS; r++) begin
          i0 += longint'(x[r] - int'(bias)) * gm[a][r][2*j];
          i1 += longint'(x[r] - int'(bias)) * gm[a][r][2*j+1];
        end
        h[a * (COLS / 2) + j] = i1 > i0;
      end
    return h;
  endfunction

  int cycle = 0, last_in = 0;
  always @(posedge clk) begin
    cycle++;
    if (rst_n && out_valid) begin
      logic [OUT_W-1:0] e;
      checks++;
      e = expq.pop_front();
      if (e != out_hash) begin failures++; $display("hash mismatch %h vs %h", out_hash, e); end
      checks++;
      if (cycle != last_in + 1) begin failures++; $display("latency"); end
    end
    if (in_valid) last_in = cycle;
  end

  initial begin
    int x [ROWS], y [ROWS], z [ROWS];
    int near_sum = 0, far_sum = 0;
    for (int r = 0; r < ROWS; r++) in_seed[r] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int a = 0; a < N_ARR; a++)
      for (int r = 0; r < ROWS; r++)
        for (int c = 0; c < COLS; c++) begin
          gm[a][r][c] = $urandom_range(0, 255);
          @(negedge clk);
          g_we = 1'b1; g_arr = 2'(a); g_row = 4'(r); g_col = 6'(c); g_data = COND_W'(gm[a][r][c]);
        end
    @(negedge clk);
    g_we = 1'b0;
    // back-to-back random seeds
    for (int k = 0; k < 200; k++) begin
      for (int r = 0; r < ROWS; r++) x[r] = $urandom_range(60 * 16, 120 * 16);
      expq.push_back(model(x));
      in_valid = 1'b1; in_end = (k == 199);
      for (int r = 0; r < ROWS; r++) in_seed[r] = current_t'(x[r]);
      @(negedge clk);
    end
    in_valid = 1'b0; in_end = 1'b0;
    repeat (3) @(negedge clk);
    // locality: a seed with +/-1 pA noise stays closer than an unrelated seed
    for (int k = 0; k < 100; k++) begin
      logic [OUT_W-1:0] hx, hy, hz;
      for (int r = 0; r < ROWS; r++) begin
        x[r] = $urandom_range(60 * 16, 120 * 16);
        y[r] = x[r] + int'($urandom_range(0, 32)) - 16;
        z[r] = $urandom_range(60 * 16, 120 * 16);
      end
      hx = model(x); hy = model(y); hz = model(z);
      near_sum += $countones(hx ^ hy);
      far_sum  += $countones(hx ^ hz);
    end
    checks++;
    if (!(near_sum * 3 < far_sum)) begin failures++; $display("no locality: near %0d far %0d", near_sum, far_sum); end
    checks++;
    if (expq.size() != 0) begin failures++; $display("%0d hashes missing", expq.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
