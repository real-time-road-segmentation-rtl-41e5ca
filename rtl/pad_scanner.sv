// pad_scanner: the scanning circuit that reads a padded image pixel by pixel.
//
// On start it walks every address of the padding RAMs once, column by column
// (row 0..H_PAD-1 of padded column 0, then column 1, ...), one address per
// clock, W_PAD*H_PAD cycles in all. The same address goes to all 64 padding
// RAMs. Because the RAMs answer one cycle later, pix_valid and win_ok are
// delayed by one cycle so they line up with the RAM data. win_ok marks the
// pixels that complete a full KxK window in the line buffer: row and column
// in the padded image both at least K-1. Exactly IMG_W*IMG_H pixels per scan
// carry win_ok, one per output pixel.
//
// The pixel-by-pixel readout follows the paper; column-major order is what
// its column-per-slot RAM layout implies, and the handshake is this design's.
module pad_scanner #(
  parameter int IMG_W = rs_pkg::IMG_W,
  parameter int IMG_H = rs_pkg::IMG_H,
  parameter int PAD   = rs_pkg::PAD,
  parameter int K     = rs_pkg::K,
  localparam int W_PAD = IMG_W + 2*PAD,
  localparam int H_PAD = IMG_H + 2*PAD,
  localparam int AW    = $clog2(W_PAD * H_PAD)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  output logic          busy,
  output logic [AW-1:0] rd_addr,
  output logic          pix_valid,
  output logic          win_ok
);
  logic [$clog2(W_PAD)-1:0] col;
  logic [$clog2(H_PAD)-1:0] row;
  logic                     ok_now;

  assign ok_now = (int'(row) >= K-1) && (int'(col) >= K-1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      col       <= '0;
      row       <= '0;
      rd_addr   <= '0;
      pix_valid <= 1'b0;
      win_ok    <= 1'b0;
    end else begin
      pix_valid <= busy;
      win_ok    <= busy && ok_now;
      if (busy) begin
        rd_addr <= rd_addr + 1'b1;
        if (int'(row) == H_PAD-1) begin
          row <= '0;
          if (int'(col) == W_PAD-1) begin
            col  <= '0;
            busy <= 1'b0;
          end else begin
            col <= col + 1'b1;
          end
        end else begin
          row <= row + 1'b1;
        end
      end else if (start) begin
        busy    <= 1'b1;
        col     <= '0;
        row     <= '0;
        rd_addr <= '0;
      end
    end
  end
endmodule
