// loop_fsm: controller of one convolution layer.
//
// A layer is computed as a series of loops; each loop is one full scan of the
// padded image through the 64 2D convolution units and makes two output
// maps (64 maps in 32 loops for a full layer). On start the FSM
//   FILL   has pad_write_ctrl fill the padding RAMs (input map or copy of the
//          feature memories) and waits for fill_done,
//   WLOAD  reads the weights of loop k from every weight store (w_rd_en),
//   SCAN   starts the scanner and counts the results coming out of the
//          requantiser; result n of the scan is written to feature-memory
//          address n of maps 2k and 2k+1, and also reported as (row, col),
//   and returns to WLOAD until nloops loops are done, then pulses done.
// A loop takes W_PAD*H_PAD scan cycles plus the pipeline latency plus two
// cycles (about 17,700 cycles at the default size).
//
// The loop structure follows the paper; the state sequence and its signals
// are this design's.
module loop_fsm #(
  parameter int IMG_W = rs_pkg::IMG_W,
  parameter int IMG_H = rs_pkg::IMG_H,
  parameter int NCH   = rs_pkg::NCH,
  localparam int NL    = (rs_pkg::NF > 0) ? NCH / rs_pkg::NF : 1,
  localparam int LW    = (NL > 1) ? $clog2(NL) : 1,
  localparam int DEPTH = IMG_W * IMG_H,
  localparam int AW    = $clog2(DEPTH),
  localparam int RW    = (IMG_H > 1) ? $clog2(IMG_H) : 1,
  localparam int CW    = (IMG_W > 1) ? $clog2(IMG_W) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [LW:0]   nloops,
  output logic          busy,
  output logic          done,
  output logic          fill_start,
  input  logic          fill_done,
  output logic          w_rd_en,
  output logic [LW-1:0] loop_idx,
  output logic          scan_start,
  input  logic          res_valid,
  output logic          fm_we,
  output logic [AW-1:0] fm_wr_addr,
  output logic [RW-1:0] res_row,
  output logic [CW-1:0] res_col
);
  typedef enum logic [2:0] {S_IDLE, S_FILL, S_WLOAD, S_SCAN_START, S_SCAN} state_t;
  state_t state;

  logic last_res;
  assign last_res = res_valid && (int'(fm_wr_addr) == DEPTH-1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      loop_idx   <= '0;
      fm_wr_addr <= '0;
      res_row    <= '0;
      res_col    <= '0;
      done       <= 1'b0;
      fill_start <= 1'b0;
      w_rd_en    <= 1'b0;
      scan_start <= 1'b0;
    end else begin
      done       <= 1'b0;
      fill_start <= 1'b0;
      w_rd_en    <= 1'b0;
      scan_start <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          state      <= S_FILL;
          fill_start <= 1'b1;
          loop_idx   <= '0;
        end
        S_FILL: if (fill_done) begin
          state   <= S_WLOAD;
          w_rd_en <= 1'b1;
        end
        S_WLOAD: begin
          state      <= S_SCAN_START;
          scan_start <= 1'b1;
        end
        S_SCAN_START: begin
          state      <= S_SCAN;
          fm_wr_addr <= '0;
          res_row    <= '0;
          res_col    <= '0;
        end
        S_SCAN: begin
          if (res_valid) begin
            fm_wr_addr <= fm_wr_addr + 1'b1;
            if (int'(res_row) == IMG_H-1) begin
              res_row <= '0;
              res_col <= res_col + 1'b1;
            end else res_row <= res_row + 1'b1;
          end
          if (last_res) begin
            if (int'(loop_idx) + 1 == int'(nloops)) begin
              state <= S_IDLE;
              done  <= 1'b1;
            end else begin
              loop_idx <= loop_idx + 1'b1;
              state    <= S_WLOAD;
              w_rd_en  <= 1'b1;
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy  = (state != S_IDLE);
  assign fm_we = res_valid && (state == S_SCAN);

  a_res_only_in_scan: assert property (@(posedge clk) disable iff (!rst_n)
                                       res_valid |-> state == S_SCAN);
  a_nloops: assert property (@(posedge clk) disable iff (!rst_n)
                             start |-> (nloops != 0 && int'(nloops) <= NL));
endmodule
