// memristor_array_model: behavioural model of a ROWS x COLS memristor array
// with its read-out, for testing the write-and-verify programming loop.
//
// Not synthesizable logic: conductances (integer uS) move by random steps.
// A SET pulse raises a cell by 8..19 uS; a RESET pulse lowers it by
// amp/16 + 0..7 uS (at least 1); a whole-array RESET (dev_all) scatters all
// cells to a random value 0..40 uS, mimicking the lognormal-like spread after
// identical reset pulses. A DEV_READ is answered RD_LAT cycles later with
// rd_valid/rd_g. Each pulse is applied once, on its first cycle. Values
// saturate to 0..255.
module memristor_array_model
  import rsa_pkg::*;
#(
  parameter int unsigned ROWS   = 4,
  parameter int unsigned COLS   = 4,
  parameter int unsigned RD_LAT = 2,
  parameter int unsigned RW     = (ROWS > 1) ? $clog2(ROWS) : 1,
  parameter int unsigned CW     = (COLS > 1) ? $clog2(COLS) : 1
) (
  input  logic           clk,
  input  dev_op_e        dev_op,
  input  logic           dev_all,
  input  logic [RW-1:0]  dev_row,
  input  logic [CW-1:0]  dev_col,
  input  logic [7:0]     dev_amp,
  output logic           rd_valid,
  output logic [G_W-1:0] rd_g
);

  int g [ROWS][COLS];
  dev_op_e prev_op = DEV_IDLE;
  int rd_cnt = 0;
  logic [G_W-1:0] rd_hold;

  initial begin
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++) g[r][c] = 60 + int'($urandom_range(0, 120));
    rd_valid = 1'b0;
    rd_g = '0;
  end

  function automatic int clip(input int v);
    return (v < 0) ? 0 : (v > 255) ? 255 : v;
  endfunction

  always @(posedge clk) begin
    rd_valid <= 1'b0;
    if (rd_cnt > 0) begin
      rd_cnt = rd_cnt - 1;
      if (rd_cnt == 0) begin
        rd_valid <= 1'b1;
        rd_g     <= rd_hold;
      end
    end
    if (dev_op != prev_op || dev_op == DEV_READ) begin
      unique case (dev_op)
        DEV_READ: begin
          rd_hold = G_W'(g[dev_row][dev_col]);
          rd_cnt  = RD_LAT;
        end
        DEV_SET: g[dev_row][dev_col] = clip(g[dev_row][dev_col] + 8 + int'($urandom_range(0, 11)));
        DEV_RESET: begin
          if (dev_all) begin
            for (int r = 0; r < ROWS; r++)
              for (int c = 0; c < COLS; c++) g[r][c] = int'($urandom_range(0, 40));
          end else begin
            int dec;
            dec = int'(dev_amp) / 16 + int'($urandom_range(0, 7));
            if (dec < 1) dec = 1;
            g[dev_row][dev_col] = clip(g[dev_row][dev_col] - dec);
          end
        end
        default: ;
      endcase
    end
    prev_op = dev_op;
  end

endmodule
