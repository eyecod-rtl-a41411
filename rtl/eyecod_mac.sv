// eyecod_mac: one multiply-accumulate unit of a MAC lane.
//
// Each cycle with en high it multiplies a signed 8-bit activation by a
// signed 8-bit weight and adds the product to its accumulator, so that
// partial sums stay in place across kernel taps and input channels (the
// paper's Psum reuse). clr zeroes the accumulator; when clr and en are both
// high the accumulator restarts from the current product.
//
// Interface: act, weight (signed ACT_W), acc (signed ACC_W), registered.
// Timing: acc shows a product one cycle after en.
// From the paper: 8-bit operands (the models are 8-bit quantised) and the
// eight-MAC lane built from this unit. This design's choice: the 24-bit
// accumulator, which holds 256 full-scale products without overflow.
module eyecod_mac
  import eyecod_pkg::*;
#(
  parameter int unsigned AW = ACT_W,
  parameter int unsigned CW = ACC_W
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 clr,
  input  logic                 en,
  input  logic signed [AW-1:0] act,
  input  logic signed [AW-1:0] weight,
  output logic signed [CW-1:0] acc
);
  logic signed [2*AW-1:0] prod;
  assign prod = act * weight;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      acc <= '0;
    else if (clr)    acc <= en ? CW'(prod) : '0;
    else if (en)     acc <= acc + CW'(prod);
  end
endmodule
