// tb_road_seg_full: one complete frame through the engine at its full size.
//
// A 16-channel 256x64 input map, 64 feature channels, 11 layers, 2 score
// maps, every parameter at its default. Random Q8.8 weights (|w| <= 1/16)
// and inputs (|x| <= 8); every one of the 2x256x64 scores is compared with
// cnn_ref_pkg. Also checks the paper's timing figures at 350 MHz: each 2D
// convolution loop takes about 18,000 cycles (here one 260x68 scan plus the
// pipeline) and the frame about 16.9 ms; 321 loops run per frame.
module tb_road_seg_full;
  import cnn_ref_pkg::*;
  localparam int IMG_W = 256, IMG_H = 64, NCH = 64, IN_CH = 16, OUT_CH = 2, NLAYERS = 11;
  localparam int NFRAMES = 1;
  localparam int NL = NCH/2, DEPTH = IMG_W*IMG_H, W_PAD = IMG_W+4, H_PAD = IMG_H+4;
  localparam int NWTS = NLAYERS*NL*NCH*NW;

  logic clk = 0, rst_n = 0, ready, in_valid = 0, in_ready;
  logic [15:0] in_data [IN_CH];
  logic w_we = 0;
  logic [$clog2(NCH)-1:0] w_ch = '0;
  logic [$clog2(NLAYERS*NL)-1:0] w_entry = '0;
  logic [5:0] w_idx = '0;
  logic [15:0] w_data = '0;
  logic out_valid;
  logic [$clog2(IMG_H)-1:0] out_row;
  logic [$clog2(IMG_W)-1:0] out_col;
  logic [((NL > 1) ? $clog2(NL) : 1)-1:0] out_pair;
  logic signed [15:0] out_score [2];
  logic busy, frame_done;
  logic [$clog2(NLAYERS)-1:0] layer;

  road_seg_top dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int wts [], inmap [], ref_score [], got [];
  int got_cnt [];
  int cyc = 0;
  int n_stall = 0, n_fill_in = 0, n_fill_copy = 0, n_loops = 0, n_frames = 0, n_out = 0;
  int n_multi_loop_layers = 0, n_single_loop_layers = 0;
  int last_scan = -1, loop_len_min = 1 << 30, loop_len_max = 0;

  task automatic check(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("FAIL %s", msg); end
  endtask

  initial begin
    repeat (8000000) @(posedge clk);
    failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // ---- monitors ----
  always @(posedge clk) if (rst_n) begin
    cyc <= cyc + 1;
    if (in_ready && !in_valid) n_stall++;
    if (dut.fill_start) begin if (dut.from_input) n_fill_in++; else n_fill_copy++; end
    if (dut.loop_start) begin if (dut.nloops > 1) n_multi_loop_layers++; else n_single_loop_layers++; end
    if (dut.scan_start) begin
      if (last_scan >= 0 && dut.loop_idx != 0) begin
        if (cyc - last_scan < loop_len_min) loop_len_min = cyc - last_scan;
        if (cyc - last_scan > loop_len_max) loop_len_max = cyc - last_scan;
      end
      last_scan = cyc; n_loops++;
    end
    if (frame_done) n_frames++;
    if (out_valid) begin
      for (int f = 0; f < 2; f++) begin
        int o, idx;
        o = 2*int'(out_pair) + f;
        if (o < OUT_CH) begin
          idx = o*DEPTH + int'(out_row)*IMG_W + int'(out_col);
          got[idx] = int'(out_score[f]);
          got_cnt[idx]++;
        end
      end
      n_out++;
    end
  end

  initial begin
    for (int i = 0; i < IN_CH; i++) in_data[i] = '0;
    wts = new [NWTS]; inmap = new [IN_CH*DEPTH];
    got = new [OUT_CH*DEPTH]; got_cnt = new [OUT_CH*DEPTH];
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    while (!ready) @(posedge clk);
    for (int fr = 0; fr < NFRAMES; fr++) begin
      int t0, t_in, nl_expected, sat0, relu0;
      // weights: layer 1 large enough to saturate
      for (int i = 0; i < NWTS; i++) begin
        int lay, wr;
        lay = i / (NL*NCH*NW);
        wr = (lay == 0) ? 64 : 16;
        wts[i] = $signed($urandom_range(0, 2*wr)) - wr;
      end
      for (int i = 0; i < NWTS; i++) begin
        @(negedge clk);
        w_we = 1; w_entry = $bits(w_entry)'(i / (NCH*NW)); w_ch = $bits(w_ch)'((i / NW) % NCH);
        w_idx = 6'(i % NW); w_data = 16'(wts[i]);
      end
      @(negedge clk); w_we = 0;
      for (int i = 0; i < IN_CH*DEPTH; i++) inmap[i] = $signed($urandom_range(0, 4096)) - 2048;
      for (int i = 0; i < OUT_CH*DEPTH; i++) begin got[i] = 0; got_cnt[i] = 0; end
      sat0 = n_saturated; relu0 = n_relu_clamped;
      network(IMG_W, IMG_H, NCH, IN_CH, OUT_CH, NLAYERS, inmap, wts, ref_score);
      check(n_relu_clamped > relu0, "reference: ReLU not exercised");
      // stream the input map, row-major, with random gaps
      t_in = cyc;
      for (int r = 0; r < IMG_H; r++)
        for (int c = 0; c < IMG_W; c++) begin
          @(negedge clk);
          while ($urandom_range(0, 63) == 0) begin in_valid = 0; @(negedge clk); end
          in_valid = 1;
          for (int ch = 0; ch < IN_CH; ch++) in_data[ch] = 16'(inmap[(ch*IMG_H + r)*IMG_W + c]);
          while (!in_ready) @(negedge clk);
          @(posedge clk);
        end
      @(negedge clk); in_valid = 0;
      t0 = cyc;
      while (!frame_done) @(posedge clk);
      @(negedge clk);
      nl_expected = (NLAYERS-1)*NL + 1;
      check(n_loops == (fr+1)*nl_expected, $sformatf("%0d loops, expected %0d", n_loops, (fr+1)*nl_expected));
      check(n_out == (fr+1)*DEPTH, $sformatf("%0d score outputs, expected %0d", n_out, (fr+1)*DEPTH));
      for (int i = 0; i < OUT_CH*DEPTH; i++) begin
        check(got_cnt[i] == 1, $sformatf("score %0d written %0d times", i, got_cnt[i]));
        check(got[i] == ref_score[i], $sformatf("frame %0d score[%0d] = %0d, expected %0d", fr, i, got[i], ref_score[i]));
      end
      $display("frame %0d: %0d cycles after the input, %0d with it; %.2f ms at 350 MHz",
               fr, cyc - t0, cyc - t_in, real'(cyc - t_in) / 350.0e3);
      check(cyc - t_in <= 16.9e-3 * 350.0e6 * 1.05, "frame slower than the paper's 16.9 ms at 350 MHz");
      check(loop_len_max <= 18000, "a 2D convolution loop takes more than about 18,000 cycles");
    end
    // one loop = one scan of the padded map plus the pipeline
    check(loop_len_min >= W_PAD*H_PAD && loop_len_max <= W_PAD*H_PAD + 30,
          $sformatf("loop length %0d..%0d, scan is %0d", loop_len_min, loop_len_max, W_PAD*H_PAD));
    $display("mechanisms: stalls=%0d input_fills=%0d copy_fills=%0d multi_loop_layers=%0d single_loop_layers=%0d relu_clamps=%0d saturations=%0d frames=%0d loop_len=%0d",
             n_stall, n_fill_in, n_fill_copy, n_multi_loop_layers, n_single_loop_layers, n_relu_clamped, n_saturated, n_frames, loop_len_max);
    check(n_fill_in == NFRAMES, "input fills");
    check(n_fill_copy == NFRAMES*(NLAYERS-1), "copy fills");
    check(n_frames == NFRAMES, "frames");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
