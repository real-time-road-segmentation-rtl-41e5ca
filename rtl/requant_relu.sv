// requant_relu: rescaling, saturation and ReLU of one output pixel.
//
// The channel adder tree delivers a wide sum of products of two Q8.8 numbers,
// i.e. a value with 2*FRAC_BITS fractional bits. This stage shifts it right
// arithmetically by FRAC_BITS (truncation towards minus infinity), saturates
// it to the signed PIX_W-bit range and, when relu_en is set, clamps negative
// values to zero. One register stage: dout and out_valid follow din by one
// clock.
//
// The ReLU activation follows the paper. The Q8.8 format, the truncating
// shift and the saturation are this design's choices; the paper gives no
// number format. relu_en is cleared for the last layer, whose outputs are
// the two class scores.
module requant_relu #(
  parameter int IN_W      = 43,
  parameter int PIX_W     = rs_pkg::PIX_W,
  parameter int FRAC_BITS = rs_pkg::FRAC_BITS
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic signed [IN_W-1:0]  din,
  input  logic                    relu_en,
  output logic                    out_valid,
  output logic signed [PIX_W-1:0] dout
);
  localparam logic signed [IN_W-1:0] MAXV = IN_W'((1 << (PIX_W-1)) - 1);
  localparam logic signed [IN_W-1:0] MINV = -IN_W'(1 << (PIX_W-1));

  logic signed [IN_W-1:0]  shifted;
  logic signed [PIX_W-1:0] sat;

  always_comb begin
    shifted = din >>> FRAC_BITS;
    if (shifted > MAXV)      sat = PIX_W'(MAXV);
    else if (shifted < MINV) sat = PIX_W'(MINV);
    else                     sat = PIX_W'(shifted);
    if (relu_en && sat < 0)  sat = '0;
  end

  always_ff @(posedge clk) dout <= sat;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
  end
endmodule
