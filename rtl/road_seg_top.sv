// road_seg_top: FPGA engine of the LiDAR road-segmentation CNN.
//
// Input is a 16-channel spherical-view LiDAR map of IMG_W x IMG_H pixels;
// output is a 2-channel score map of the same size (road / not road). The
// network is NLAYERS = 11 layers of 5x5 convolution (stride 1, zero padding 2),
// 64 maps wide between layers, with ReLU after all but the last layer.
//
// One convolution layer is mapped onto a fixed array that is reused for every
// layer and every pair of output maps:
//   - NCH padding RAMs (zero_pad_ram), one per input channel, hold the
//     layer's input with its zero border;
//   - pad_scanner reads all of them in lock step, pixel by pixel, column
//     by column;
//   - NCH conv2d_unit, each convolving its channel with two filters (weights
//     from its own weight_mem), produce two partial sums per pixel;
//   - two NCH-input adder trees add the partial sums over the channels,
//     one per filter, and requant_relu turns each sum into a 16-bit pixel;
//   - the two new pixels go to maps 2k and 2k+1 of feature_mem.
// One such scan is a "loop"; loop_fsm runs the loops of a layer (32 for a
// 64-map layer, 1 for the 2-map last layer) after pad_write_ctrl has filled
// the padding RAMs, from the input stream in layer 0 and from feature_mem
// afterwards; layer_fsm steps through the layers. Results of the last layer
// also leave on the out_* stream.
//
// Interfaces: input pixels row-major with valid/ready; weights written one at
// a time through w_* (entry = layer*NCH/2 + loop, idx = filter*25 + ky*5 + kx)
// before a frame; out_valid marks one score pair at (out_row, out_col) of
// output maps 2*out_pair and 2*out_pair+1; frame_done pulses at the end of a
// frame. ready is high once the padding RAMs have been zero-filled after
// reset. Timing per frame at the default size: 16,384 input beats + 10 copies
// of 16,385 cycles + 321 loops of about 17,700 cycles, about 5.86 M cycles
// or 16.8 ms at 350 MHz.
//
// The array (64 padding RAMs, 64 two-filter 2D units, adder trees, 64 feature
// memories, two FSMs) follows the paper. Number format (Q8.8), weight store,
// handshakes and the output stream are this design's own.
module road_seg_top #(
  parameter int IMG_W   = rs_pkg::IMG_W,
  parameter int IMG_H   = rs_pkg::IMG_H,
  parameter int NCH     = rs_pkg::NCH,
  parameter int IN_CH   = rs_pkg::IN_CH,
  parameter int OUT_CH  = rs_pkg::OUT_CH,
  parameter int NLAYERS = rs_pkg::NLAYERS,
  localparam int K      = rs_pkg::K,
  localparam int PAD    = rs_pkg::PAD,
  localparam int NF     = rs_pkg::NF,
  localparam int PIX_W  = rs_pkg::PIX_W,
  localparam int WGT_W  = rs_pkg::WGT_W,
  localparam int NL     = NCH / NF,
  localparam int LW     = (NL > 1) ? $clog2(NL) : 1,
  localparam int YW     = (NLAYERS > 1) ? $clog2(NLAYERS) : 1,
  localparam int WDEPTH = NLAYERS * NL,
  localparam int EW     = $clog2(WDEPTH),
  localparam int IW     = $clog2(NF * K * K),
  localparam int CHW    = $clog2(NCH),
  localparam int RW     = (IMG_H > 1) ? $clog2(IMG_H) : 1,
  localparam int CW     = (IMG_W > 1) ? $clog2(IMG_W) : 1,
  localparam int W_PAD  = IMG_W + 2*PAD,
  localparam int H_PAD  = IMG_H + 2*PAD,
  localparam int PAW    = $clog2(W_PAD * H_PAD),
  localparam int FAW    = $clog2(IMG_W * IMG_H),
  localparam int PSUM_W = PIX_W + WGT_W + $clog2(K*K),
  localparam int SUM_W  = PSUM_W + $clog2(NCH)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  output logic                    ready,
  // input map stream
  input  logic                    in_valid,
  output logic                    in_ready,
  input  logic [PIX_W-1:0]        in_data [IN_CH],
  // weight write port
  input  logic                    w_we,
  input  logic [CHW-1:0]          w_ch,
  input  logic [EW-1:0]           w_entry,
  input  logic [IW-1:0]           w_idx,
  input  logic [WGT_W-1:0]        w_data,
  // score stream (last layer)
  output logic                    out_valid,
  output logic [RW-1:0]           out_row,
  output logic [CW-1:0]           out_col,
  output logic [LW-1:0]           out_pair,
  output logic signed [PIX_W-1:0] out_score [NF],
  // status
  output logic                    busy,
  output logic [YW-1:0]           layer,
  output logic                    frame_done
);
  // ---------------- control ----------------
  logic          loop_start, loop_done, loop_busy;
  logic [LW:0]   nloops;
  logic          from_input, relu_en, last_layer;
  logic          fill_start, fill_done;
  logic          w_rd_en;
  logic [LW-1:0] loop_idx;
  logic          scan_start, scan_busy;
  logic          res_valid;
  logic          fm_we;
  logic [FAW-1:0] fm_wr_addr;
  logic [RW-1:0] res_row;
  logic [CW-1:0] res_col;
  logic [NCH-1:0] pad_ready;

  assign ready = &pad_ready;

  layer_fsm #(.NLAYERS(NLAYERS), .NCH(NCH), .OUT_CH(OUT_CH)) u_layer_fsm (
    .clk, .rst_n, .enable(ready), .loop_start, .loop_done, .layer, .nloops,
    .from_input, .relu_en, .last_layer, .frame_done
  );

  loop_fsm #(.IMG_W(IMG_W), .IMG_H(IMG_H), .NCH(NCH)) u_loop_fsm (
    .clk, .rst_n, .start(loop_start), .nloops, .busy(loop_busy), .done(loop_done),
    .fill_start, .fill_done, .w_rd_en, .loop_idx, .scan_start, .res_valid,
    .fm_we, .fm_wr_addr, .res_row, .res_col
  );

  assign busy = loop_busy;

  // ---------------- padding RAM fill ----------------
  logic [FAW-1:0]   fm_rd_addr;
  logic [PIX_W-1:0] fm_rd_data [NCH];
  logic             pad_we;
  logic [RW-1:0]    pad_row;
  logic [CW-1:0]    pad_col;
  logic [PIX_W-1:0] pad_data [NCH];

  pad_write_ctrl #(.IMG_W(IMG_W), .IMG_H(IMG_H), .NCH(NCH), .IN_CH(IN_CH)) u_fill (
    .clk, .rst_n, .start(fill_start), .from_input, .done(fill_done),
    .in_valid, .in_ready, .in_data, .fm_rd_addr, .fm_rd_data,
    .pad_we, .pad_row, .pad_col, .pad_data
  );

  // ---------------- scan ----------------
  logic [PAW-1:0] scan_addr;
  logic           pix_valid, win_ok;

  pad_scanner #(.IMG_W(IMG_W), .IMG_H(IMG_H), .PAD(PAD), .K(K)) u_scan (
    .clk, .rst_n, .start(scan_start), .busy(scan_busy), .rd_addr(scan_addr),
    .pix_valid, .win_ok
  );

  // ---------------- channel array ----------------
  logic signed [PSUM_W-1:0] psum [NCH][NF];
  logic [NCH-1:0]           psum_valid;

  for (genvar ch = 0; ch < NCH; ch++) begin : g_ch
    logic [PIX_W-1:0]        pix;
    logic signed [WGT_W-1:0] wgt [NF][K*K];
    logic signed [PSUM_W-1:0] ps [NF];

    zero_pad_ram #(.IMG_W(IMG_W), .IMG_H(IMG_H), .PAD(PAD), .PIX_W(PIX_W)) u_pad (
      .clk, .rst_n, .ready(pad_ready[ch]), .we(pad_we), .wr_row(pad_row), .wr_col(pad_col),
      .wr_data(pad_data[ch]), .rd_addr(scan_addr), .rd_data(pix)
    );

    weight_mem #(.DEPTH(WDEPTH), .NF(NF), .K(K), .WGT_W(WGT_W)) u_wmem (
      .clk, .we(w_we && int'(w_ch) == ch), .wr_entry(w_entry), .wr_idx(w_idx), .wr_data(w_data),
      .rd_en(w_rd_en), .rd_entry(EW'(int'(layer) * NL + int'(loop_idx))), .wgt
    );

    conv2d_unit #(.LINE_LEN(H_PAD), .K(K), .NF(NF), .PIX_W(PIX_W), .WGT_W(WGT_W)) u_conv (
      .clk, .rst_n, .pix_valid, .win_ok, .pix, .wgt, .psum_valid(psum_valid[ch]), .psum(ps)
    );

    assign psum[ch] = ps;
  end

  // ---------------- channel adder trees, requantisation ----------------
  logic [NF-1:0]            sum_valid, rq_valid;
  logic signed [SUM_W-1:0]  chsum [NF];
  logic signed [PIX_W-1:0]  res [NF];

  for (genvar f = 0; f < NF; f++) begin : g_filt
    logic signed [PSUM_W-1:0] col_in [NCH];
    for (genvar ch = 0; ch < NCH; ch++) begin : g_in
      assign col_in[ch] = psum[ch][f];
    end
    adder_tree #(.N(NCH), .IN_W(PSUM_W)) u_chtree (
      .clk, .rst_n, .in_valid(psum_valid[0]), .din(col_in),
      .out_valid(sum_valid[f]), .sum(chsum[f])
    );
    requant_relu #(.IN_W(SUM_W), .PIX_W(PIX_W), .FRAC_BITS(rs_pkg::FRAC_BITS)) u_rq (
      .clk, .rst_n, .in_valid(sum_valid[f]), .din(chsum[f]), .relu_en,
      .out_valid(rq_valid[f]), .dout(res[f])
    );
  end

  assign res_valid = rq_valid[0];

  // ---------------- feature maps ----------------
  logic [PIX_W-1:0] fm_wr_data [2];
  assign fm_wr_data[0] = res[0];
  assign fm_wr_data[1] = res[NF-1];

  feature_mem #(.NCH(NCH), .DEPTH(IMG_W * IMG_H), .PIX_W(PIX_W)) u_fmem (
    .clk, .we(fm_we), .wr_pair(loop_idx), .wr_addr(fm_wr_addr), .wr_data(fm_wr_data),
    .rd_addr(fm_rd_addr), .rd_data(fm_rd_data)
  );

  // ---------------- score output ----------------
  assign out_valid = fm_we && last_layer;
  assign out_row   = res_row;
  assign out_col   = res_col;
  assign out_pair  = loop_idx;
  assign out_score = res;

  // All channel units run in lock step.
  a_lockstep: assert property (@(posedge clk) disable iff (!rst_n)
                               psum_valid == '0 || psum_valid == '1);
  a_scan_idle_fill: assert property (@(posedge clk) disable iff (!rst_n)
                                     pad_we |-> !scan_busy);
endmodule
