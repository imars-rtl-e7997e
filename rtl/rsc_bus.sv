// rsc_bus: the RecSys communication (RSC) bus, a 256-bit word-serial bus
// that links the functional blocks of the accelerator (the CMA banks, the
// two crossbar banks and the feature buffer behind the inter-bank adder).
// One source drives it per clock: the word of source `src` is registered and
// appears on `data` with `valid` and the destination tag `dst` one clock
// after `req`. A request naming a source that does not exist is a protocol
// error (checked by an assertion). The 256-bit width and the word-serial
// transfer follow the paper; the source numbering, the one-clock register and
// the destination tag are this design's choices.
module rsc_bus
  import imars_pkg::*;
#(
  parameter int unsigned NS  = 34,
  parameter int unsigned DTW = 3
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  vec_t                   src_data [NS],
  input  logic                   req,
  input  logic [$clog2(NS)-1:0]  src,
  input  logic [DTW-1:0]         dst_in,
  output vec_t                   data,
  output logic                   valid,
  output logic [DTW-1:0]         dst
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      data  <= '0;
      valid <= 1'b0;
      dst   <= '0;
    end else begin
      valid <= req;
      if (req) begin
        data <= src_data[src];
        dst  <= dst_in;
      end
    end
  end

  a_src_exists: assert property (@(posedge clk) req |-> int'(src) < NS)
    else $error("rsc_bus: request from source %0d of %0d", src, NS);

endmodule
