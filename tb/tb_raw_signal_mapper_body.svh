// tb_raw_signal_mapper_body.svh: body shared by the end-to-end testbenches
// of raw_signal_mapper (see tb_raw_signal_mapper.sv for what it checks).
// The including module defines PR and PC (programming array size) and the
// macro RSM_DUT, which instantiates the design as 'dut'.
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic store_mode = 1'b0;
  dec_mode_e dec_mode = DEC_ARGMAX;
  logic [7:0] cam_threshold = 8'd16;
  logic [VOTE_W-1:0] vote_threshold = 16'd7, min_votes = 16'd5;
  current_t diff_threshold = current_t'(48);
  logic [31:0] t2_threshold = 32'd1024;
  current_t lsh_bias = current_t'(90 * 16);
  logic smp_valid = 1'b0, smp_last = 1'b0, smp_ready;
  current_t smp_data = '0;
  logic ref_start = 1'b0, ref_valid = 1'b0, ref_last = 1'b0;
  logic [2:0] ref_loc = '0;
  current_t ref_event = '0;
  logic g_we = 1'b0, cam_clr = 1'b0;
  logic [1:0] g_arr = '0;
  logic [3:0] g_row = '0;
  logic [5:0] g_col = '0;
  logic [COND_W-1:0] g_data = '0;
  logic res_valid, votes_saturated, dec_busy, stat_boundary, stat_dropped;
  res_kind_e res_kind;
  logic [2:0] res_loc, res_loc2;
  logic [VOTE_W-1:0] res_votes;
  logic prog_start = 1'b0;
  logic [G_W-1:0] prog_tolerance = 8'd5, prog_target_g;
  logic [3:0] prog_init_resets = '0;
  logic [7:0] prog_init_amp = 8'd150, prog_max_iter = 8'd60, prog_set_amp = 8'd100;
  logic [7:0] prog_reset_amp_start = 8'd40, prog_reset_amp_step = 8'd8;
  dev_op_e dev_op;
  logic dev_all, rd_valid, prog_busy, prog_done, prog_all_ok;
  logic [$clog2(PR)-1:0] dev_row;
  logic [$clog2(PC)-1:0] dev_col;
  logic [7:0] dev_amp, prog_iter;
  logic [G_W-1:0] rd_g;
  logic [31:0] prog_pulses;

  `RSM_DUT
  memristor_array_model #(.ROWS(PR), .COLS(PC)) arr (.clk, .dev_op, .dev_all, .dev_row, .dev_col, .dev_amp, .rd_valid, .rd_g);

  int checks = 0, failures = 0;
  int prog_mode = 0;
  always_comb prog_target_g = (prog_mode == 1) ? 8'd0 : ((((dev_row + dev_col) % 2) != 0) ? 8'd150 : 8'd0);

  // mechanism counters
  int n_store = 0, n_search = 0, n_switch = 0, n_boundary = 0, n_drop = 0, n_stall = 0;
  int n_single = 0, n_between = 0, n_none = 0, n_init = 0, n_set = 0, n_reset = 0;
  logic prev_store = 1'b0, prev_ready = 1'b1;
  dev_op_e prev_op = DEV_IDLE;
  always @(posedge clk) if (rst_n) begin
    if (store_mode != prev_store) n_switch++;
    prev_store = store_mode;
    if (stat_boundary) n_boundary++;
    if (stat_dropped) n_drop++;
    if (prev_ready && !smp_ready) n_stall++;
    prev_ready = smp_ready;
    if (dev_op != prev_op) begin
      if (dev_op == DEV_RESET && dev_all) n_init++;
      else if (dev_op == DEV_RESET) n_reset++;
      else if (dev_op == DEV_SET) n_set++;
    end
    prev_op = dev_op;
  end

  initial begin
    #2000000000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------ reference model of the hash
  int gm [N_ARR][M][COLS];
  function automatic logic [HW-1:0] hash_of(input int x [M]);
    logic [HW-1:0] h;
    for (int a = 0; a < N_ARR; a++)
      for (int j = 0; j < COLS / 2; j++) begin
        longint i0 = 0, i1 = 0;
        for (int r = 0; r < M; r++) begin
          i0 += (longint'(x[r]) - longint'(lsh_bias)) * gm[a][r][2*j];
          i1 += (longint'(x[r]) - longint'(lsh_bias)) * gm[a][r][2*j+1];
        end
        h[a * (COLS / 2) + j] = i1 > i0;
      end
    return h;
  endfunction

  // ------------------------------------------------------------ stimulus helpers
  int refs [N_LOC][REF_EV];
  int genome [N_LOC * RPL + M - 1];

  function automatic int next_level(input int prev);
    int v;
    do v = int'($urandom_range(65 * 16, 115 * 16));
    while (prev >= 0 && ((v > prev) ? v - prev : prev - v) < 8 * 16);
    return v;
  endfunction

  task automatic store_events(input int loc, input int ev [$]);
    @(negedge clk);
    ref_start = 1'b1; ref_loc = 3'(loc);
    @(negedge clk);
    ref_start = 1'b0;
    foreach (ev[i]) begin
      ref_valid = 1'b1; ref_event = current_t'(ev[i]); ref_last = (i == ev.size() - 1);
      @(negedge clk);
    end
    ref_valid = 1'b0; ref_last = 1'b0;
    repeat (4) @(negedge clk);
    n_store++;
  endtask

  // Check CAM rows first_row.. against the hashes of ev's seeds.
  task automatic check_rows(input int first_row, input int ev [$]);
    for (int k = 0; k + M <= ev.size(); k++) begin
      int x [M];
      logic [HW-1:0] h;
      for (int r = 0; r < M; r++) x[r] = ev[k + r];
      h = hash_of(x);
      checks++;
      if (dut.u_cam.mem[first_row + k] != h) begin failures++; $display("CAM row %0d differs", first_row + k); end
    end
  endtask

  int lat_ref = -1;
  // Send one read; return the result.
  task automatic run_read(input int ev [$], output res_kind_e kind, output int loc, output int loc2, output int votes);
    int smp [$];
    int t0, t;
    foreach (ev[i]) begin
      automatic int len = $urandom_range(8, 14);
      for (int s = 0; s < len; s++) smp.push_back(ev[i] + int'($urandom_range(0, 16)) - 8);
      if (i > 0 && i < ev.size() - 1 && $urandom_range(0, 4) == 0) begin
        automatic int sl = $urandom_range(8, 12);
        for (int s = 0; s < sl; s++) smp.push_back(ev[i] + 40 + int'($urandom_range(0, 16)) - 8);
      end
    end
    foreach (smp[i]) begin
      while (!smp_ready) @(negedge clk);
      smp_valid = 1'b1; smp_data = current_t'(smp[i]); smp_last = (i == smp.size() - 1);
      @(negedge clk);
    end
    smp_valid = 1'b0; smp_last = 1'b0;
    t = 1;
    while (!res_valid) begin @(negedge clk); t++; end
    if (lat_ref < 0) lat_ref = t;
    checks++;
    if (t != lat_ref) begin failures++; $display("latency %0d vs %0d", t, lat_ref); end
    kind = res_kind; loc = int'(res_loc); loc2 = int'(res_loc2); votes = int'(res_votes);
    case (kind)
      RES_SINGLE:  n_single++;
      RES_BETWEEN: n_between++;
      default:     n_none++;
    endcase
    n_search++;
    @(negedge clk);
  endtask

  task automatic random_read(output int ev [$]);
    int p = -1;
    ev.delete();
    for (int i = 0; i < REF_EV; i++) begin p = next_level(p); ev.push_back(p); end
  endtask

  task automatic program_array(input int mode, input int tol, input int inits);
    prog_mode = mode; prog_tolerance = G_W'(tol); prog_init_resets = 4'(inits);
    @(negedge clk); prog_start = 1'b1; @(negedge clk); prog_start = 1'b0;
    while (!prog_done) @(negedge clk);
    checks++;
    if (!prog_all_ok) begin failures++; $display("programming mode %0d did not converge", mode); end
    for (int r = 0; r < PR; r++)
      for (int c = 0; c < PC; c++) begin
        automatic int tg = (mode == 1) ? 0 : ((((r + c) % 2) != 0) ? 150 : 0);
        checks++;
        if (arr.g[r][c] > tg + tol || arr.g[r][c] < tg - tol) begin
          failures++; $display("cell %0d,%0d = %0d", r, c, arr.g[r][c]);
        end
      end
    $display("programming mode %0d: %0d sweeps, %0d pulses", mode, prog_iter, prog_pulses);
  endtask

  initial begin
    int ev [$];
    res_kind_e k;
    int loc, loc2, votes;
    int hits, vmin_virus, vmax_human;
    // Long enough for the array model to answer any read that appeared
    // before the first reset edge.
    repeat (8) @(posedge clk);
    rst_n = 1'b1;

    // 1. programming sequencer
    program_array(0, 5, 0);
    program_array(1, 15, 5);

    // 2. LSH conductances: skewed towards low values like the reset array
    for (int a = 0; a < N_ARR; a++)
      for (int r = 0; r < M; r++)
        for (int c = 0; c < COLS; c++) begin
          automatic int u1 = $urandom_range(0, 255), u2 = $urandom_range(0, 255);
          gm[a][r][c] = (u1 < u2) ? u1 : u2;
          @(negedge clk);
          g_we = 1'b1; g_arr = 2'(a); g_row = 4'(r); g_col = 6'(c); g_data = COND_W'(gm[a][r][c]);
        end
    @(negedge clk);
    g_we = 1'b0;

    // species references, one location each
    store_mode = 1'b1;
    for (int s = 0; s < N_LOC; s++) begin
      automatic int p = -1;
      ev.delete();
      for (int i = 0; i < REF_EV; i++) begin p = next_level(p); refs[s][i] = p; ev.push_back(p); end
      store_events(s, ev);
      check_rows(s * RPL, ev);
    end
    store_mode = 1'b0;
    repeat (2) @(negedge clk);

    // 3a. classification
    dec_mode = DEC_ARGMAX;
    hits = 0;
    for (int rd = 0; rd < 15; rd++) begin
      automatic int s = rd % N_LOC;
      ev.delete();
      for (int i = 0; i < REF_EV; i++) ev.push_back(refs[s][i]);
      run_read(ev, k, loc, loc2, votes);
      checks++;
      if (k != RES_SINGLE || loc != s) begin failures++; $display("species %0d classified %0d/%0d", s, k, loc); end
      else hits++;
    end
    $display("classification: %0d / 15 correct", hits);

    // 3b. detection of species 0 against random reads
    dec_mode = DEC_THRESHOLD;
    vmin_virus = 1 << 30; vmax_human = 0;
    for (int rd = 0; rd < 12; rd++) begin
      automatic bit virus = rd % 2 == 0;
      if (virus) begin
        ev.delete();
        for (int i = 0; i < REF_EV; i++) ev.push_back(refs[0][i]);
      end else random_read(ev);
      run_read(ev, k, loc, loc2, votes);
      checks++;
      if (virus && (k != RES_SINGLE || loc != 0)) begin failures++; $display("virus missed, votes %0d", votes); end
      // a random read may collect a few chance votes: it must be judged by the rule
      if (!virus && (k == RES_SINGLE) != (votes > int'(vote_threshold))) begin
        failures++; $display("random read: kind %0d with %0d votes", k, votes);
      end
      if (virus && votes < vmin_virus) vmin_virus = votes;
      if (!virus && votes > vmax_human) vmax_human = votes;
    end
    $display("detection: virus votes >= %0d, random votes <= %0d", vmin_virus, vmax_human);
    checks++;
    if (vmin_virus <= 2 * vmax_human) begin failures++; $display("virus and random reads not separated"); end

    // 3c. mapping on one genome spread over all locations, at the CAM
    // threshold of seven used for read mapping
    cam_threshold = 8'd7;
    @(negedge clk); cam_clr = 1'b1; @(negedge clk); cam_clr = 1'b0;
    store_mode = 1'b1;
    begin
      automatic int p = -1;
      ev.delete();
      for (int i = 0; i < N_LOC * RPL + M - 1; i++) begin p = next_level(p); genome[i] = p; ev.push_back(p); end
      store_events(0, ev);
      check_rows(0, ev);
    end
    store_mode = 1'b0;
    repeat (2) @(negedge clk);
    dec_mode = DEC_RATIO;
    for (int rd = 0; rd < 10; rd++) begin
      int kind_exp, first, len, l;
      if (rd % 3 == 0) begin
        // straddles locations l and l+1 equally
        l = $urandom_range(0, N_LOC - 2);
        len = 48;
        first = (l + 1) * RPL - len / 2;
        kind_exp = 2;
      end else if (rd % 3 == 1) begin
        l = $urandom_range(0, N_LOC - 1);
        len = 40;
        first = l * RPL + 8;
        kind_exp = 1;
      end else begin
        l = 0; len = 0; first = 0;
        kind_exp = 0;
      end
      if (kind_exp == 0) random_read(ev);
      else begin
        ev.delete();
        for (int i = 0; i < len + M; i++) ev.push_back(genome[first + i]);
      end
      run_read(ev, k, loc, loc2, votes);
      checks++;
      if (int'(k) != kind_exp || (kind_exp == 1 && loc != l) || (kind_exp == 2 && (loc != l || loc2 != l + 1))) begin
        failures++; $display("mapping read %0d: kind %0d loc %0d/%0d, expected kind %0d loc %0d", rd, k, loc, loc2, kind_exp, l);
      end
    end

    // 4. mechanisms
    $display("store=%0d search=%0d switch=%0d boundary=%0d drop=%0d stall=%0d single=%0d between=%0d none=%0d init=%0d set=%0d reset=%0d",
             n_store, n_search, n_switch, n_boundary, n_drop, n_stall, n_single, n_between, n_none, n_init, n_set, n_reset);
    checks += 12;
    if (n_store == 0)    begin failures++; $display("store mode never used"); end
    if (n_search == 0)   begin failures++; $display("search never used"); end
    if (n_switch == 0)   begin failures++; $display("no mode switch"); end
    if (n_boundary == 0) begin failures++; $display("no boundary"); end
    if (n_drop == 0)     begin failures++; $display("no stay event filtered"); end
    if (n_stall == 0)    begin failures++; $display("no stall"); end
    if (n_single == 0)   begin failures++; $display("no single result"); end
    if (n_between == 0)  begin failures++; $display("no between result"); end
    if (n_none == 0)     begin failures++; $display("no rejected read"); end
    if (n_init == 0)     begin failures++; $display("no whole-array reset"); end
    if (n_set == 0)      begin failures++; $display("no SET pulse"); end
    if (n_reset == 0)    begin failures++; $display("no RESET pulse"); end
    $display("read latency %0d cycles after the last sample", lat_ref);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
