// xbar: behavioural model of one 256 x 128 crossbar array (256 word lines /
// inputs, 128 bit-line columns / outputs) with its WL decoder, switch
// matrices, column multiplexer and ADCs. The real array is analog: inputs
// drive the rows, every cell contributes a current set by its stored weight,
// and each column sums the currents; the mux routes NADC columns at a time to
// the ADCs. This model reproduces that function digitally: it stores signed
// 8-bit weights and returns exact 32-bit dot products (an ideal ADC).
// Interface: weights are written 32 columns at a time (wr_en, wr_row, wr_grp:
// columns 32*wr_grp..+31, wr_data lane j = weight of column 32*wr_grp+j).
// `start` latches the 256 signed 8-bit inputs x (word w, lane j = input
// 32*w+j); the model then converts NADC columns per clock and pulses `done`
// after 128/NADC clocks, when all of y is valid.
// From the paper: the 256x128 size, the matrix-vector function and the
// mux + ADC read-out. This design's choices: int8 weights, ideal ADC, NADC=8.
module xbar
  import imars_pkg::*;
#(
  parameter int unsigned ROWS = 256,
  parameter int unsigned COLS = 128,
  parameter int unsigned NADC = 8,
  localparam int unsigned NW  = ROWS / EDIM,
  localparam int unsigned NGRP = COLS / EDIM
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      wr_en,
  input  logic [$clog2(ROWS)-1:0]   wr_row,
  input  logic [$clog2(NGRP)-1:0]   wr_grp,
  input  vec_t                      wr_data,
  input  logic                      start,
  input  vec_t                      x [NW],
  output logic signed [31:0]        y [COLS],
  output logic                      busy,
  output logic                      done
);

  localparam int unsigned NSTEP = COLS / NADC;

  logic signed [7:0] w [ROWS][COLS];
  logic signed [7:0] xin [ROWS];
  logic [$clog2(NSTEP+1)-1:0] step;

  always_ff @(posedge clk) begin
    if (wr_en)
      for (int j = 0; j < EDIM; j++) w[wr_row][int'(wr_grp) * EDIM + j] <= wr_data[j*8 +: 8];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      done <= 1'b0;
      step <= '0;
      for (int r = 0; r < ROWS; r++) xin[r] <= '0;
      for (int c = 0; c < COLS; c++) y[c] <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        for (int r = 0; r < ROWS; r++) xin[r] <= x[r / EDIM][(r % EDIM)*8 +: 8];
        busy <= 1'b1;
        step <= '0;
      end else if (busy) begin
        // One mux position: NADC columns through the ADCs.
        for (int a = 0; a < NADC; a++) begin
          logic signed [31:0] s;
          s = '0;
          for (int r = 0; r < ROWS; r++) s += 32'(xin[r]) * 32'(w[r][int'(step) * NADC + a]);
          y[int'(step) * NADC + a] <= s;
        end
        if (int'(step) == NSTEP - 1) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
        step <= step + 1'b1;
      end
    end
  end

endmodule
