// tb_write_verify_ctrl: write_verify_ctrl on a small 4 x 8 array attached
// to the behavioural memristor_array_model.
//   1. CAM programming: targets 0 / 150 uS in a checkerboard, tolerance
//      5 uS: must end with all_ok and every cell within the band (checked
//      against the model's own conductances), and every pulse must carry
//      the amplitude the rule gives (RESET: start + iter*step, SET: set_amp).
//   2. LSH programming: five whole-array RESET pulses of INIT_PULSE_CYC
//      cycles, then every cell to 0 uS with tolerance 15 uS.
//   3. An iteration limit of 1 with cells far from target must stop with
//      all_ok low after one sweep.
// Pulse widths are checked in cycles.
module tb_write_verify_ctrl;
  import rsa_pkg::*;
  localparam int ROWS = 4, COLS = 8, PULSE_CYC = 5, INIT_PULSE_CYC = 2;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic start = 1'b0;
  logic [G_W-1:0] tolerance = 8'd5, target_g;
  logic [3:0] init_resets = '0;
  logic [7:0] init_amp = 8'd150, max_iter = 8'd50, set_amp = 8'd100;
  logic [7:0] reset_amp_start = 8'd40, reset_amp_step = 8'd8;
  dev_op_e dev_op;
  logic dev_all, rd_valid, busy, done, all_ok;
  logic [1:0] dev_row;
  logic [2:0] dev_col;
  logic [7:0] dev_amp, iter;
  logic [G_W-1:0] rd_g;
  logic [31:0] n_pulses;

  write_verify_ctrl #(.ROWS(ROWS), .COLS(COLS), .PULSE_CYC(PULSE_CYC), .INIT_PULSE_CYC(INIT_PULSE_CYC)) dut (.*);
  memristor_array_model #(.ROWS(ROWS), .COLS(COLS)) arr (.clk, .dev_op, .dev_all, .dev_row, .dev_col, .dev_amp, .rd_valid, .rd_g);

  int checks = 0, failures = 0;
  int tgt_mode = 0;   // 0: checkerboard 0/150, 1: all zero

  always_comb target_g = (tgt_mode == 1) ? 8'd0 : (((dev_row + dev_col) % 2) ? 8'd150 : 8'd0);

  initial begin
    #20000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // pulse monitor
  dev_op_e prev_op = DEV_IDLE;
  int run_len = 0, init_pulses = 0, cell_pulses = 0;
  bit pulse_all = 0;
  always @(posedge clk) if (rst_n) begin
    if (dev_op == DEV_SET || dev_op == DEV_RESET) begin
      if (prev_op != dev_op) begin
        run_len = 0;
        pulse_all = dev_all;
        checks++;
        if (dev_all) init_pulses++;
        else begin
          cell_pulses++;
          if (dev_op == DEV_SET && dev_amp != set_amp) begin failures++; $display("SET amp %0d", dev_amp); end
          if (dev_op == DEV_RESET) begin
            automatic int e = int'(reset_amp_start) + int'(iter) * int'(reset_amp_step);
            if (e > 255) e = 255;
            if (int'(dev_amp) != e) begin failures++; $display("RESET amp %0d exp %0d", dev_amp, e); end
          end
        end
      end
      run_len++;
    end else if (prev_op == DEV_SET || prev_op == DEV_RESET) begin
      checks++;
      if (run_len != (pulse_all ? INIT_PULSE_CYC : PULSE_CYC)) begin
        failures++; $display("pulse length %0d", run_len);
      end
    end
    prev_op = dev_op;
  end

  task automatic run_prog(input int mode, input int tol, input int inits, input int maxit);
    tgt_mode = mode;
    tolerance = G_W'(tol); init_resets = 4'(inits); max_iter = 8'(maxit);
    init_pulses = 0; cell_pulses = 0;
    @(negedge clk); start = 1'b1; @(negedge clk); start = 1'b0;
    while (!done) @(negedge clk);
  endtask

  task automatic check_band(input int mode, input int tol);
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++) begin
        int t = (mode == 1) ? 0 : (((r + c) % 2) ? 150 : 0);
        checks++;
        if (arr.g[r][c] > t + tol || arr.g[r][c] < t - tol) begin
          failures++; $display("cell %0d,%0d = %0d target %0d", r, c, arr.g[r][c], t);
        end
      end
  endtask

  initial begin
    // Long enough for the array model to answer any read that appeared
    // before the first reset edge.
    repeat (8) @(posedge clk);
    rst_n = 1'b1;
    // 1. CAM programming
    run_prog(0, 5, 0, 50);
    checks += 2;
    if (!all_ok) begin failures++; $display("CAM programming did not converge"); end
    if (cell_pulses == 0) begin failures++; $display("no pulses"); end
    check_band(0, 5);
    $display("CAM: %0d iterations, %0d pulses", iter, n_pulses);
    // 2. LSH programming
    run_prog(1, 15, 5, 50);
    checks += 2;
    if (init_pulses != 5) begin failures++; $display("init pulses %0d", init_pulses); end
    if (!all_ok) begin failures++; $display("LSH programming did not converge"); end
    check_band(1, 15);
    // 3. iteration limit: all cells far from the checkerboard targets
    for (int r = 0; r < ROWS; r++) for (int c = 0; c < COLS; c++) arr.g[r][c] = 75;
    run_prog(0, 5, 0, 1);
    checks += 2;
    if (all_ok) begin failures++; $display("all_ok despite the limit"); end
    if (iter != 1) begin failures++; $display("iterations %0d", iter); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
