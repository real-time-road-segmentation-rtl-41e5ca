// zero_pad_ram: dual-port RAM holding one channel of a zero-padded image.
//
// The RAM is organised as W_PAD = IMG_W+2*PAD slots of H_PAD = IMG_H+2*PAD
// words; slot c holds padded column c. The padding words are zero "in
// advance": after reset the whole RAM is swept with zeros (ready goes high
// when that is done, W_PAD*H_PAD cycles) and afterwards only interior words
// are ever written. The write port takes the unpadded pixel coordinate and
// stores the pixel at (col+PAD)*H_PAD + row+PAD, so an image sent without
// padding lands in its padded place. The read port is a plain address port
// with one cycle of latency, scanned by pad_scanner.
//
// The column-slot layout and the zeros stored ahead of time follow the paper;
// the reset-time zero sweep and the one-cycle read latency are this design's.
module zero_pad_ram #(
  parameter int IMG_W = rs_pkg::IMG_W,
  parameter int IMG_H = rs_pkg::IMG_H,
  parameter int PAD   = rs_pkg::PAD,
  parameter int PIX_W = rs_pkg::PIX_W,
  localparam int W_PAD = IMG_W + 2*PAD,
  localparam int H_PAD = IMG_H + 2*PAD,
  localparam int DEPTH = W_PAD * H_PAD,
  localparam int AW    = $clog2(DEPTH)
) (
  input  logic                      clk,
  input  logic                      rst_n,
  output logic                      ready,
  input  logic                      we,
  input  logic [$clog2(IMG_H)-1:0]  wr_row,
  input  logic [$clog2(IMG_W)-1:0]  wr_col,
  input  logic [PIX_W-1:0]          wr_data,
  input  logic [AW-1:0]             rd_addr,
  output logic [PIX_W-1:0]          rd_data
);
  logic [PIX_W-1:0] mem [DEPTH];
  logic [AW-1:0]    clr_addr;
  logic             clearing;

  logic [AW-1:0]    wa;
  logic [PIX_W-1:0] wd;
  logic             wen;

  always_comb begin
    if (clearing) begin
      wa  = clr_addr;
      wd  = '0;
      wen = 1'b1;
    end else begin
      wa  = AW'((int'(wr_col) + PAD) * H_PAD + int'(wr_row) + PAD);
      wd  = wr_data;
      wen = we;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      clearing <= 1'b1;
      clr_addr <= '0;
    end else if (clearing) begin
      if (clr_addr == AW'(DEPTH - 1)) clearing <= 1'b0;
      clr_addr <= clr_addr + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (wen) mem[wa] <= wd;
    rd_data <= mem[rd_addr];
  end

  assign ready = !clearing;

  // Writes must wait for the zero sweep, and stay inside the image.
  a_no_early_write: assert property (@(posedge clk) disable iff (!rst_n) we |-> ready);
  a_in_range: assert property (@(posedge clk) disable iff (!rst_n)
                               we |-> (int'(wr_row) < IMG_H && int'(wr_col) < IMG_W));
endmodule
