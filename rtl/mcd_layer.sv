// mcd_layer: streaming Monte-Carlo Dropout layer.
//
// For every element of the incoming feature stream the layer draws a uniform
// random number r, compares it with the keep rate k, and sends out either 0
// (when r > k, the element is dropped) or the element multiplied by k. This is
// the layer as the method defines it: a random number generator, a
// comparator, a multiplier and a two-way multiplexer choosing between 0 and
// the product. Note that the kept element is scaled by k itself, as in the
// method's pseudocode, not by 1/k as in some software dropout layers.
//
// Formats: in_data/out_data are signed DATA_W-bit fixed point; keep_rate and
// r are unsigned 16-bit fractions (value / 65536). The product is truncated
// by an arithmetic shift right of 16 bits, so the output keeps the input's
// binary point. Over one LFSR period (values 1..65535) P(keep) = k / 65535.
//
// Interface: valid/ready streams in and out, with a `last` flag and a sample
// tag that travel alongside the data unchanged. keep_rate is meant to stay
// constant for a whole run (it is set by the user before the model runs).
//
// Timing: fully pipelined, one element per clock, one register stage of
// latency. in_ready = !out_valid || out_ready, so a stalled output holds its
// data and the random generator steps only on accepted elements; the mask
// drawn for an element therefore does not depend on back-pressure.
module mcd_layer
  import mcd_pkg::*;
#(
  parameter int unsigned DATA_W = mcd_pkg::DFLT_DATA_W,
  parameter int unsigned TAG_W  = 2,
  parameter logic [15:0] SEED   = BASE_SEED
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic [15:0]              keep_rate,
  // input stream from the preceding layer
  input  logic                     in_valid,
  output logic                     in_ready,
  input  logic signed [DATA_W-1:0] in_data,
  input  logic                     in_last,
  input  logic [TAG_W-1:0]         in_tag,
  // output stream to the following layer
  output logic                     out_valid,
  input  logic                     out_ready,
  output logic signed [DATA_W-1:0] out_data,
  output logic                     out_last,
  output logic [TAG_W-1:0]         out_tag,
  output logic                     out_dropped   // this element was zeroed
);

  logic                     accept;
  logic [15:0]              uniform_random;
  logic                     drop;
  logic signed [DATA_W+16:0] product;
  logic signed [DATA_W-1:0] scaled;
  logic signed [DATA_W-1:0] selected;

  assign in_ready = !out_valid || out_ready;
  assign accept   = in_valid && in_ready;

  // Random number generator: one number per accepted element.
  mcd_rng #(.SEED(SEED)) u_rng (
    .clk     (clk),
    .rst_n   (rst_n),
    .advance (accept),
    .rand_o  (uniform_random)
  );

  always_comb begin
    // Compare: drop when uniform_random > keep_rate.
    drop     = uniform_random > keep_rate;
    // Mult: element times keep_rate (keep_rate zero-extended to stay positive).
    product  = in_data * $signed({1'b0, keep_rate});
    scaled   = DATA_W'(product >>> 16);
    // MUX: 0 or the product.
    selected = drop ? '0 : scaled;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid   <= 1'b0;
      out_data    <= '0;
      out_last    <= 1'b0;
      out_tag     <= '0;
      out_dropped <= 1'b0;
    end else if (in_ready) begin
      out_valid   <= in_valid;
      out_data    <= selected;
      out_last    <= in_last;
      out_tag     <= in_tag;
      out_dropped <= drop;
    end
  end

  // Stream rule: a held output may not change until it is taken.
  a_out_stable: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_data) && $stable(out_tag)
                                && $stable(out_last));

endmodule
