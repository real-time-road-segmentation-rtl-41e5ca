// tb_zero_pad_ram: self-checking test of the zero-padding RAM.
// Checks that the zero sweep after reset takes W_PAD*H_PAD cycles, that
// pixels written by (row, col) land at (col+2)*H_PAD + row+2, and that every
// padding word reads back zero, also after a second image overwrote the first.
module tb_zero_pad_ram;
  localparam int IMG_W = 6, IMG_H = 4, PAD = 2;
  localparam int W_PAD = IMG_W + 2*PAD, H_PAD = IMG_H + 2*PAD, DEPTH = W_PAD*H_PAD;
  localparam int AW = $clog2(DEPTH);
  logic clk = 0, rst_n = 0, ready, we = 0;
  logic [$clog2(IMG_H)-1:0] wr_row = '0;
  logic [$clog2(IMG_W)-1:0] wr_col = '0;
  logic [15:0] wr_data = '0, rd_data;
  logic [AW-1:0] rd_addr = '0;
  int checks = 0, failures = 0;
  int img [IMG_H][IMG_W];

  zero_pad_ram #(.IMG_W(IMG_W), .IMG_H(IMG_H), .PAD(PAD)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic check(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", msg); end
  endtask

  initial begin
    int n;
    repeat (2) @(posedge clk);
    rst_n = 1;
    n = 0;
    @(posedge clk);
    while (!ready) begin n++; @(posedge clk); end
    check(n >= DEPTH - 2 && n <= DEPTH + 1, $sformatf("clear took %0d cycles, expected about %0d", n, DEPTH));
    for (int pass = 0; pass < 2; pass++) begin
      for (int r = 0; r < IMG_H; r++)
        for (int c = 0; c < IMG_W; c++) begin
          img[r][c] = 1 + int'($urandom_range(0, 65534));
          @(negedge clk);
          we = 1; wr_row = r[$bits(wr_row)-1:0]; wr_col = c[$bits(wr_col)-1:0]; wr_data = img[r][c][15:0];
        end
      @(negedge clk); we = 0;
      for (int a = 0; a < DEPTH; a++) begin
        int pc, pr, exp;
        pc = a / H_PAD; pr = a % H_PAD;
        if (pc >= PAD && pc < PAD+IMG_W && pr >= PAD && pr < PAD+IMG_H) exp = img[pr-PAD][pc-PAD];
        else exp = 0;
        rd_addr = a[AW-1:0];
        @(posedge clk); #1;
        check(int'(rd_data) == exp, $sformatf("addr %0d read %h expected %h", a, rd_data, exp));
        @(negedge clk);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
