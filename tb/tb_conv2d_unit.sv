// tb_conv2d_unit: self-checking test of one 2D convolution unit.
// Streams zero-padded random images column by column (with idle cycles), as
// the scanner does, and compares both partial sums of every window with a
// direct 5x5 cross-correlation of the unpadded image. Also checks the
// latency of 2 + clog2(25) = 7 cycles from the completing pixel.
module tb_conv2d_unit;
  localparam int IMG_W = 7, IMG_H = 5, PAD = 2, K = 5, NF = 2;
  localparam int W_PAD = IMG_W + 2*PAD, H_PAD = IMG_H + 2*PAD;
  logic clk = 0, rst_n = 0, pix_valid = 0, win_ok = 0;
  logic [15:0] pix = '0;
  logic signed [15:0] wgt [NF][K*K];
  logic psum_valid;
  logic signed [36:0] psum [NF];
  int checks = 0, failures = 0;
  int img [IMG_H][IMG_W];
  longint expq0 [$], expq1 [$];
  int cyc = 0, sentq [$];

  conv2d_unit #(.LINE_LEN(H_PAD), .K(K), .NF(NF)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic int px(int r, int c);
    if (r < 0 || r >= IMG_H || c < 0 || c >= IMG_W) return 0;
    return img[r][c];
  endfunction

  always @(posedge clk) if (rst_n && psum_valid) begin
    longint e [NF]; int sc;
    e[0] = expq0.pop_front(); e[1] = expq1.pop_front(); sc = sentq.pop_front();
    for (int f = 0; f < NF; f++) begin
      checks++;
      if (longint'(psum[f]) != e[f]) begin failures++; if (failures < 10) $display("FAIL f=%0d %0d expected %0d", f, psum[f], e[f]); end
    end
    checks++;
    if (cyc - sc != 7) begin failures++; $display("FAIL latency %0d", cyc - sc); end
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int frame = 0; frame < 3; frame++) begin
      for (int f = 0; f < NF; f++) for (int t = 0; t < K*K; t++) wgt[f][t] = $signed(16'($urandom()));
      for (int r = 0; r < IMG_H; r++) for (int c = 0; c < IMG_W; c++)
        img[r][c] = (frame == 0) ? ((r == 2 && c == 3) ? 1 : 0) : int'($signed(16'($urandom())));
      for (int pc = 0; pc < W_PAD; pc++)
        for (int pr = 0; pr < H_PAD; pr++) begin
          @(negedge clk);
          if ($urandom_range(0, 4) == 0) begin pix_valid = 0; win_ok = 0; @(negedge clk); end
          pix_valid = 1;
          pix = 16'(px(pr - PAD, pc - PAD));
          win_ok = (pr >= K-1 && pc >= K-1);
          if (win_ok) begin
            longint e [NF];
            int orow, ocol;
            orow = pr - (K-1); ocol = pc - (K-1);
            for (int f = 0; f < NF; f++) begin
              e[f] = 0;
              for (int ky = 0; ky < K; ky++) for (int kx = 0; kx < K; kx++)
                e[f] += longint'(px(orow + ky - PAD, ocol + kx - PAD)) * longint'(wgt[f][ky*K+kx]);
            end
            expq0.push_back(e[0]); expq1.push_back(e[1]); sentq.push_back(cyc);
          end
        end
      @(negedge clk); pix_valid = 0; win_ok = 0;
      repeat (10) @(posedge clk);
    end
    checks++;
    if (expq0.size() != 0) begin failures++; $display("FAIL %0d results missing", expq0.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
