// write_verify_ctrl: programs the conductances of a ROWS x COLS memristor
// array by iterative write-and-verify.
//
// Used two ways. CAM programming: every device is driven to its target
// (G_on = 150 uS or G_off = 0 uS) within +/- tolerance (5 uS). LSH
// programming: first init_resets whole-array RESET pulses (five 1.5 V,
// 20 ns pulses) make the conductances random, then every device is pulled
// towards 0 uS with a loose tolerance (15 uS) to tame outliers, over about
// ten iterations.
//
// Algorithm (one iteration = one sweep over all cells not yet finished):
// read the cell (0.2 V read); if it is more than 'tolerance' above its
// target apply a RESET pulse whose amplitude code rises with the iteration
// number (reset_amp_start + iter * reset_amp_step, saturating); if it is
// more than 'tolerance' below apply a SET pulse of amplitude set_amp;
// otherwise mark the cell finished and never touch it again. Programming
// ends after a sweep that applied no pulse (all_ok = 1) or after max_iter
// sweeps (all_ok = 0; a value of 0 counts as 1).
//
// Following the design: the read / compare / SET / RESET loop, tolerance
// band, rising RESET amplitude, 1 us programming pulses, whole-array
// initial RESET pulses. This design's own choices: array-wide sweeps with
// per-cell finished flags, the amplitude codes (the DAC mapping is outside
// this block), a fixed SET amplitude, the iteration limit, and the timing
// below at a 100 MHz clock.
//
// Device interface: dev_op / dev_all / dev_row / dev_col / dev_amp are
// combinational from the state. DEV_READ is held for one cycle and the
// analog read-out answers later with rd_valid/rd_g (uS). A SET or RESET
// pulse holds dev_op for PULSE_CYC cycles; the whole-array RESET holds it,
// with dev_all high, for INIT_PULSE_CYC cycles followed by one idle cycle.
// target_g must give the target of the cell at dev_row/dev_col.
//
// rst_n is an asynchronous reset. The read-handshake assertion also uses it
// as its disable condition; lint tools report that as a reset used both
// synchronously and asynchronously. The synchronous use is in checking
// code only.
module write_verify_ctrl
  import rsa_pkg::*;
#(
  parameter int unsigned ROWS           = 64,
  parameter int unsigned COLS           = 64,
  parameter int unsigned PULSE_CYC      = 100,
  parameter int unsigned INIT_PULSE_CYC = 2,
  parameter int unsigned RW             = (ROWS > 1) ? $clog2(ROWS) : 1,
  parameter int unsigned CW             = (COLS > 1) ? $clog2(COLS) : 1
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  logic [G_W-1:0] tolerance,
  input  logic [3:0]     init_resets,
  input  logic [7:0]     init_amp,
  input  logic [7:0]     max_iter,
  input  logic [7:0]     set_amp,
  input  logic [7:0]     reset_amp_start,
  input  logic [7:0]     reset_amp_step,
  input  logic [G_W-1:0] target_g,
  output dev_op_e        dev_op,
  output logic           dev_all,
  output logic [RW-1:0]  dev_row,
  output logic [CW-1:0]  dev_col,
  output logic [7:0]     dev_amp,
  input  logic           rd_valid,
  input  logic [G_W-1:0] rd_g,
  output logic           busy,
  output logic           done,
  output logic           all_ok,
  output logic [7:0]     iter,
  output logic [31:0]    n_pulses
);

  localparam int unsigned NCELL = ROWS * COLS;
  localparam int unsigned AW    = $clog2(NCELL);
  localparam int unsigned PCW   = $clog2(PULSE_CYC + INIT_PULSE_CYC + 1);

  typedef enum logic [3:0] {
    S_IDLE, S_INIT, S_INIT_GAP, S_SWEEP, S_READ, S_WAIT, S_PULSE, S_NEXT, S_ITER
  } state_e;

  state_e            state;
  logic [AW-1:0]     addr;
  logic [NCELL-1:0]  fin;
  logic [3:0]        init_left;
  logic [PCW-1:0]    pcnt;
  logic              pulsed;
  dev_op_e           pulse_op;
  logic [7:0]        pulse_amp;

  assign dev_row = RW'(addr / AW'(COLS));
  assign dev_col = CW'(addr % AW'(COLS));
  assign busy    = state != S_IDLE;

  always_comb begin
    dev_op  = DEV_IDLE;
    dev_all = 1'b0;
    dev_amp = '0;
    unique case (state)
      S_INIT:  begin dev_op = DEV_RESET; dev_all = 1'b1; dev_amp = init_amp; end
      S_READ:  dev_op = DEV_READ;
      S_PULSE: begin dev_op = pulse_op; dev_amp = pulse_amp; end
      default: ;
    endcase
  end

  // Compare with the tolerance band.
  wire [G_W:0] hi_lim = {1'b0, target_g} + {1'b0, tolerance};
  wire [G_W:0] rd_up  = {1'b0, rd_g} + {1'b0, tolerance};
  wire too_high = {1'b0, rd_g} > hi_lim;
  wire too_low  = rd_up < {1'b0, target_g};
  wire [15:0] ramp = 16'(reset_amp_start) + 16'(iter) * 16'(reset_amp_step);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      addr      <= '0;
      fin       <= '0;
      init_left <= '0;
      pcnt      <= '0;
      pulsed    <= 1'b0;
      pulse_op  <= DEV_IDLE;
      pulse_amp <= '0;
      done      <= 1'b0;
      all_ok    <= 1'b0;
      iter      <= '0;
      n_pulses  <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          fin       <= '0;
          addr      <= '0;
          iter      <= '0;
          n_pulses  <= '0;
          pulsed    <= 1'b0;
          all_ok    <= 1'b0;
          init_left <= init_resets;
          pcnt      <= PCW'(INIT_PULSE_CYC - 1);
          state     <= (init_resets != 0) ? S_INIT : S_SWEEP;
        end
        S_INIT: begin
          if (pcnt == 0) begin
            init_left <= init_left - 1'b1;
            n_pulses  <= n_pulses + 1'b1;
            state     <= S_INIT_GAP;
          end else pcnt <= pcnt - 1'b1;
        end
        S_INIT_GAP: begin
          pcnt  <= PCW'(INIT_PULSE_CYC - 1);
          state <= (init_left != 0) ? S_INIT : S_SWEEP;
        end
        S_SWEEP: state <= fin[addr] ? S_NEXT : S_READ;
        S_READ:  state <= S_WAIT;
        S_WAIT: if (rd_valid) begin
          if (too_high) begin
            pulse_op  <= DEV_RESET;
            pulse_amp <= (ramp > 16'd255) ? 8'd255 : ramp[7:0];
            pcnt      <= PCW'(PULSE_CYC - 1);
            pulsed    <= 1'b1;
            state     <= S_PULSE;
          end else if (too_low) begin
            pulse_op  <= DEV_SET;
            pulse_amp <= set_amp;
            pcnt      <= PCW'(PULSE_CYC - 1);
            pulsed    <= 1'b1;
            state     <= S_PULSE;
          end else begin
            fin[addr] <= 1'b1;
            state     <= S_NEXT;
          end
        end
        S_PULSE: begin
          if (pcnt == 0) begin
            n_pulses <= n_pulses + 1'b1;
            state    <= S_NEXT;
          end else pcnt <= pcnt - 1'b1;
        end
        S_NEXT: begin
          if (addr == AW'(NCELL - 1)) begin
            addr  <= '0;
            state <= S_ITER;
          end else begin
            addr  <= addr + 1'b1;
            state <= S_SWEEP;
          end
        end
        S_ITER: begin
          iter   <= iter + 1'b1;
          pulsed <= 1'b0;
          if (!pulsed) begin
            all_ok <= 1'b1;
            done   <= 1'b1;
            state  <= S_IDLE;
          end else if (iter + 1'b1 >= max_iter) begin
            done   <= 1'b1;
            state  <= S_IDLE;
          end else begin
            state  <= S_SWEEP;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_read_answered: assert property (@(posedge clk) disable iff (!rst_n) rd_valid |-> state == S_WAIT)
    else $error("write_verify_ctrl: read result without a pending read");

endmodule
