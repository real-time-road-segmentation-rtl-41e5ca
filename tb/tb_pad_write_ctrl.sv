// tb_pad_write_ctrl: self-checking test of the padding-RAM fill controller.
// Input mode: a row-major stream with random valid gaps; every accepted beat
// must become one write at the right (row, col) with the input channels and
// zeros above them. Copy mode: a model feature memory with one cycle of read
// latency; every pixel must be written once with the data of all channels.
// done must pulse exactly with the last write.
module tb_pad_write_ctrl;
  localparam int IMG_W = 4, IMG_H = 3, NCH = 4, IN_CH = 2, DEPTH = IMG_W*IMG_H;
  logic clk = 0, rst_n = 0, start = 0, from_input = 0, done;
  logic in_valid = 0, in_ready;
  logic [15:0] in_data [IN_CH];
  logic [3:0] fm_rd_addr;
  logic [15:0] fm_rd_data [NCH];
  logic pad_we;
  logic [1:0] pad_row, pad_col;
  logic [15:0] pad_data [NCH];
  int checks = 0, failures = 0;
  int fm [NCH][DEPTH];
  int written [IMG_H][IMG_W];
  int img [IMG_H][IMG_W][IN_CH];
  int nstall = 0;

  pad_write_ctrl #(.IMG_W(IMG_W), .IMG_H(IMG_H), .NCH(NCH), .IN_CH(IN_CH)) dut (.*);
  always #5 clk = ~clk;

  always_ff @(posedge clk) for (int ch = 0; ch < NCH; ch++) fm_rd_data[ch] <= 16'(fm[ch][fm_rd_addr]);

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic check(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", msg); end
  endtask

  // monitor writes
  int nwr, ndone;
  bit mode_input;
  always @(posedge clk) if (rst_n) begin
    if (done) ndone++;
    if (pad_we) begin
      int r, c;
      r = int'(pad_row); c = int'(pad_col);
      written[r][c]++;
      for (int ch = 0; ch < NCH; ch++) begin
        int e;
        if (mode_input) e = (ch < IN_CH) ? img[r][c][ch] : 0;
        else e = fm[ch][c*IMG_H + r];
        check(int'(pad_data[ch]) == e, $sformatf("pixel (%0d,%0d) ch %0d = %h expected %h", r, c, ch, pad_data[ch], e));
      end
      if (mode_input) check(nwr == r*IMG_W + c, "input not in row-major order");
      check(done == (nwr == DEPTH-1), "done not with the last write");
      nwr++;
    end
  end

  initial begin
    for (int i = 0; i < IN_CH; i++) in_data[i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int pass = 0; pass < 4; pass++) begin
      mode_input = (pass % 2 == 0);
      nwr = 0; ndone = 0;
      for (int r = 0; r < IMG_H; r++) for (int c = 0; c < IMG_W; c++) begin
        written[r][c] = 0;
        for (int ch = 0; ch < IN_CH; ch++) img[r][c][ch] = int'($urandom_range(1, 65535));
      end
      for (int ch = 0; ch < NCH; ch++) for (int a = 0; a < DEPTH; a++) fm[ch][a] = int'($urandom_range(1, 65535));
      @(negedge clk); start = 1; from_input = mode_input; @(negedge clk); start = 0;
      if (mode_input) begin
        for (int r = 0; r < IMG_H; r++) for (int c = 0; c < IMG_W; c++) begin
          while ($urandom_range(0, 2) == 0) begin in_valid = 0; nstall++; @(negedge clk); end
          in_valid = 1;
          for (int ch = 0; ch < IN_CH; ch++) in_data[ch] = 16'(img[r][c][ch]);
          check(in_ready, "in_ready low during input fill");
          @(negedge clk);
        end
        in_valid = 0;
        #1 check(!in_ready, "in_ready high after the fill");
      end else repeat (DEPTH + 3) @(negedge clk);
      repeat (3) @(negedge clk);
      check(nwr == DEPTH, $sformatf("%0d writes, expected %0d", nwr, DEPTH));
      check(ndone == 1, "done count");
      for (int r = 0; r < IMG_H; r++) for (int c = 0; c < IMG_W; c++) check(written[r][c] == 1, "pixel not written once");
    end
    check(nstall > 0, "no input stall exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
