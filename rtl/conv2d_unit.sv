// conv2d_unit: one of the 64 parallel 2D convolution units.
//
// Each unit convolves one input channel with NF = 2 different 5x5 filters at
// once. Pixels from the padding RAM stream through a line buffer (4 lines +
// 5 registers) that presents the 5x5 window; 2x25 multipliers form the
// products, registered, and one pipelined 25-input adder tree per filter sums
// them. The result is the channel's partial sum for two output maps; the top
// adds the partial sums of all 64 units.
//
// Weights: wgt[f][t] with tap t = ky*K + kx, ky the row offset and kx the
// column offset of the kernel, both 0..K-1, applied as a cross-correlation:
// out(r,c) = sum wgt[ky*K+kx] * in(r+ky-2, c+kx-2). The window register
// win[d][e] holds the pixel d columns back and e rows up, so it meets tap
// ky = K-1-e, kx = K-1-d. Weights must be stable while a scan runs.
//
// Timing: psum_valid follows a pixel with pix_valid && win_ok by
// 2 + clog2(K*K) cycles (window register, product register, 5 adder levels).
//
// Line buffer, 25 multipliers per filter and the pipelined adder tree follow
// the paper; the kernel orientation and pipeline depths are this design's.
module conv2d_unit #(
  parameter int LINE_LEN = rs_pkg::IMG_H + 2*rs_pkg::PAD,
  parameter int K        = rs_pkg::K,
  parameter int NF       = rs_pkg::NF,
  parameter int PIX_W    = rs_pkg::PIX_W,
  parameter int WGT_W    = rs_pkg::WGT_W,
  localparam int PROD_W  = PIX_W + WGT_W,
  localparam int PSUM_W  = PROD_W + $clog2(K*K)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     pix_valid,
  input  logic                     win_ok,
  input  logic        [PIX_W-1:0]  pix,
  input  logic signed [WGT_W-1:0]  wgt [NF][K*K],
  output logic                     psum_valid,
  output logic signed [PSUM_W-1:0] psum [NF]
);
  logic [PIX_W-1:0]         win [K][K];
  logic                     win_v;
  logic signed [PROD_W-1:0] prod [NF][K*K];
  logic                     prod_v;
  logic                     tree_v [NF];

  line_buffer #(.LINE_LEN(LINE_LEN), .K(K), .PIX_W(PIX_W)) u_lb (
    .clk, .rst_n, .shift(pix_valid), .din(pix), .win
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      win_v  <= 1'b0;
      prod_v <= 1'b0;
    end else begin
      win_v  <= pix_valid && win_ok;
      prod_v <= win_v;
    end
  end

  always_ff @(posedge clk) begin
    for (int f = 0; f < NF; f++)
      for (int ky = 0; ky < K; ky++)
        for (int kx = 0; kx < K; kx++)
          prod[f][ky*K+kx] <= $signed(win[K-1-kx][K-1-ky]) * wgt[f][ky*K+kx];
  end

  for (genvar f = 0; f < NF; f++) begin : g_tree
    adder_tree #(.N(K*K), .IN_W(PROD_W)) u_tree (
      .clk, .rst_n, .in_valid(prod_v), .din(prod[f]),
      .out_valid(tree_v[f]), .sum(psum[f])
    );
  end

  assign psum_valid = tree_v[0];
endmodule
