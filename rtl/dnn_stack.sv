// dnn_stack: a stack of fully connected layers, one crossbar array (xbar)
// per layer, run one after the other. It is used four times in the
// accelerator: the dense-feature stack and the predictor stack of the
// filtering crossbar bank and of the ranking crossbar bank.
// Data: the input is 256 signed 8-bit values (8 words of 32 lanes). Layer l,
// when cfg[l].en is set, multiplies its input by its 256x128 weight matrix;
// each 32-bit sum is requantised to int8 by an arithmetic right shift of
// cfg[l].shift, saturated to -128..127, clamped at 0 when cfg[l].relu is
// set, and forced to 0 for outputs >= cfg[l].out_n. The 128 outputs become
// inputs 0..127 of the next layer (inputs 128..255 are 0). Disabled layers
// are skipped. `out` holds the last enabled layer's 128 outputs (4 words)
// from `done` until the next start.
// Timing: `start` latches x; each enabled layer takes 128/NADC clocks of
// crossbar read-out plus 2 clocks; `done` pulses at the end.
// Weights are loaded with wr_en/wr_layer/wr_row/wr_grp/wr_data (see xbar).
// From the paper: crossbars hold the layer weights and compute the
// matrix-vector products; a stack of several crossbars per DNN. This design's
// choices: NL = 3 layers per stack, the int8 shift-and-saturate
// requantisation with optional ReLU between layers, sequential layers.
module dnn_stack
  import imars_pkg::*;
#(
  parameter int unsigned NL   = 3,
  parameter int unsigned NADC = 8
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  layer_cfg_t            cfg [NL],
  input  logic                  wr_en,
  input  logic [$clog2(NL)-1:0] wr_layer,
  input  logic [7:0]            wr_row,
  input  logic [1:0]            wr_grp,
  input  vec_t                  wr_data,
  input  logic                  start,
  input  vec_t                  x [8],
  output vec_t                  out [4],
  output logic                  busy,
  output logic                  done
);

  typedef enum logic [1:0] {D_IDLE, D_NEXT, D_RUN, D_QUANT} dstate_e;
  dstate_e            st;
  logic [$clog2(NL+1)-1:0] layer;
  vec_t               act [8];
  logic [NL-1:0]      xs_start, xs_done, xs_busy;
  logic signed [31:0] xs_y [NL][128];

  for (genvar l = 0; l < NL; l++) begin : g_xbar
    xbar #(.ROWS(256), .COLS(128), .NADC(NADC)) u_xbar (
      .clk, .rst_n,
      .wr_en  (wr_en && int'(wr_layer) == l),
      .wr_row, .wr_grp, .wr_data,
      .start  (xs_start[l]),
      .x      (act),
      .y      (xs_y[l]),
      .busy   (xs_busy[l]),
      .done   (xs_done[l])
    );
  end

  always_comb begin
    for (int l = 0; l < NL; l++) xs_start[l] = (st == D_NEXT) && (int'(layer) == l) && cfg[l].en;
  end

  function automatic logic [7:0] requant(input logic signed [31:0] s, input layer_cfg_t c, input int j);
    logic signed [31:0] q;
    q = s >>> c.shift;
    if (q > 127)  q = 127;
    if (q < -128) q = -128;
    if (c.relu && q < 0) q = 0;
    if (j >= int'(c.out_n)) q = 0;
    return q[7:0];
  endfunction

  assign busy = (st != D_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st    <= D_IDLE;
      layer <= '0;
      done  <= 1'b0;
      for (int w = 0; w < 8; w++) act[w] <= '0;
      for (int w = 0; w < 4; w++) out[w] <= '0;
    end else begin
      done <= 1'b0;
      unique case (st)
        D_IDLE: if (start) begin
          act   <= x;
          layer <= '0;
          st    <= D_NEXT;
        end
        D_NEXT: begin
          if (int'(layer) >= NL) begin
            for (int w = 0; w < 4; w++) out[w] <= act[w];
            done <= 1'b1;
            st   <= D_IDLE;
          end else if (cfg[layer].en) st <= D_RUN;
          else layer <= layer + 1'b1;
        end
        D_RUN: if (xs_done[layer]) st <= D_QUANT;
        D_QUANT: begin
          for (int j = 0; j < 128; j++) act[j / 32][(j % 32)*8 +: 8] <= requant(xs_y[layer][j], cfg[layer], j);
          for (int w = 4; w < 8; w++) act[w] <= '0;
          layer <= layer + 1'b1;
          st    <= D_NEXT;
        end
        default: st <= D_IDLE;
      endcase
    end
  end

endmodule
