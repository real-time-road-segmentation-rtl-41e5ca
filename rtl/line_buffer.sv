// line_buffer: the 4-line + 5-register line buffer of a 5x5 convolution.
//
// Pixels arrive as one stream (a padded column of LINE_LEN pixels after
// another). The buffer is a chain of (K-1)*LINE_LEN + K storage stages, and the
// KxK window is tapped from it: win[d][e] is the pixel shifted in
// d*LINE_LEN + e shifts ago, i.e. d columns back and e rows up from the newest
// pixel. The chain is built as K rows of K window registers joined by K-1
// delay lines of LINE_LEN-K words. The delay lines are circular RAMs sharing
// one pointer rather than shifting registers; at the taps this is the same
// as the shift-register chain of the paper, with far less data movement.
// The window is registered: it changes on the clock edge after shift.
//
// Four lines and five extra registers, and the tap positions, follow the
// paper; the circular-RAM delay lines are this design's.
module line_buffer #(
  parameter int LINE_LEN = rs_pkg::IMG_H + 2*rs_pkg::PAD,
  parameter int K        = rs_pkg::K,
  parameter int PIX_W    = rs_pkg::PIX_W
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             shift,
  input  logic [PIX_W-1:0] din,
  output logic [PIX_W-1:0] win [K][K]
);
  localparam int DL = LINE_LEN - K;   // delay-line length between window rows
  localparam int PW = (DL > 1) ? $clog2(DL) : 1;

  logic [PIX_W-1:0] dline [K-1][DL];
  logic [PW-1:0]    ptr;
  logic [PIX_W-1:0] dl_out [K-1];

  for (genvar d = 0; d < K-1; d++) begin : g_dlout
    assign dl_out[d] = dline[d][ptr];
  end

  always_ff @(posedge clk) begin
    if (shift) begin
      win[0][0] <= din;
      for (int d = 1; d < K; d++) win[d][0] <= dl_out[d-1];
      for (int d = 0; d < K; d++)
        for (int e = 1; e < K; e++) win[d][e] <= win[d][e-1];
      for (int d = 0; d < K-1; d++) dline[d][ptr] <= win[d][K-1];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     ptr <= '0;
    else if (shift) ptr <= (int'(ptr) == DL-1) ? '0 : ptr + 1'b1;
  end

  initial assert (LINE_LEN > K) else $error("line_buffer: LINE_LEN must exceed K");
endmodule
