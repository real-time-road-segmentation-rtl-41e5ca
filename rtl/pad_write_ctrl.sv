// pad_write_ctrl: fills the 64 padding RAMs before a layer runs.
//
// In the first layer (from_input = 1) it takes the input map as a stream of
// pixels, row by row and left to right, each beat carrying the IN_CH input
// channels of one pixel (valid/ready). Each pixel is written to all padding
// RAMs at its (row, col); channels IN_CH..NCH-1 receive zero, so only the
// input channels contribute to the first layer. In every later layer it
// copies the NCH feature memories: it reads addresses 0..IMG_W*IMG_H-1
// (column-major) and, one cycle later, writes the data to the same pixel of
// the padding RAMs. done pulses with the last write. A fill takes
// IMG_W*IMG_H cycles (plus one for a copy), or as long as the input takes.
//
// Storing each pixel at its padded place and reusing the padding RAMs in
// every layer follow the paper; the input order is read off its Fig. 9, and
// the handshake and the copy are this design's.
module pad_write_ctrl #(
  parameter int IMG_W = rs_pkg::IMG_W,
  parameter int IMG_H = rs_pkg::IMG_H,
  parameter int NCH   = rs_pkg::NCH,
  parameter int IN_CH = rs_pkg::IN_CH,
  parameter int PIX_W = rs_pkg::PIX_W,
  localparam int DEPTH = IMG_W * IMG_H,
  localparam int AW  = $clog2(DEPTH),
  localparam int RW  = (IMG_H > 1) ? $clog2(IMG_H) : 1,
  localparam int CW  = (IMG_W > 1) ? $clog2(IMG_W) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic             from_input,
  output logic             done,
  // input stream
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [PIX_W-1:0] in_data [IN_CH],
  // feature memory read
  output logic [AW-1:0]    fm_rd_addr,
  input  logic [PIX_W-1:0] fm_rd_data [NCH],
  // padding RAM write
  output logic             pad_we,
  output logic [RW-1:0]    pad_row,
  output logic [CW-1:0]    pad_col,
  output logic [PIX_W-1:0] pad_data [NCH]
);
  typedef enum logic [1:0] {S_IDLE, S_INPUT, S_COPY} state_t;
  state_t state;

  logic [RW-1:0] row;
  logic [CW-1:0] col;
  logic          last_pix;
  logic          rd_v;     // a feature-memory read is answered this cycle
  logic          rd_last;
  logic [RW-1:0] rd_row;
  logic [CW-1:0] rd_col;

  assign last_pix = (int'(row) == IMG_H-1) && (int'(col) == IMG_W-1);
  assign in_ready = (state == S_INPUT);
  assign fm_rd_addr = AW'(int'(col) * IMG_H + int'(row));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      row     <= '0;
      col     <= '0;
      rd_v    <= 1'b0;
      rd_last <= 1'b0;
      rd_row  <= '0;
      rd_col  <= '0;
    end else begin
      rd_v    <= 1'b0;
      rd_last <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          state <= from_input ? S_INPUT : S_COPY;
          row   <= '0;
          col   <= '0;
        end
        S_INPUT: if (in_valid) begin
          // raster order: along the row first
          if (int'(col) == IMG_W-1) begin
            col <= '0;
            row <= row + 1'b1;
          end else col <= col + 1'b1;
          if (last_pix) begin
            state <= S_IDLE;
            row   <= '0;
          end
        end
        S_COPY: begin
          rd_v   <= 1'b1;
          rd_row <= row;
          rd_col <= col;
          rd_last <= last_pix;
          // column-major, the feature-memory order
          if (int'(row) == IMG_H-1) begin
            row <= '0;
            col <= col + 1'b1;
          end else row <= row + 1'b1;
          if (last_pix) begin
            state <= S_IDLE;
            col   <= '0;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    if (state == S_INPUT) begin
      pad_we  = in_valid;
      pad_row = row;
      pad_col = col;
      for (int ch = 0; ch < NCH; ch++) pad_data[ch] = (ch < IN_CH) ? in_data[ch % IN_CH] : '0;
      done    = in_valid && last_pix;
    end else begin
      pad_we  = rd_v;
      pad_row = rd_row;
      pad_col = rd_col;
      pad_data = fm_rd_data;
      done    = rd_v && rd_last;
    end
  end
endmodule
