// tb_pad_scanner: self-checking test of the padded-image scanner.
// Checks that one scan lasts W_PAD*H_PAD cycles, that addresses run
// 0..DEPTH-1 one per cycle, that pix_valid follows the address by one cycle,
// and that win_ok is set exactly for padded rows and columns >= K-1.
module tb_pad_scanner;
  localparam int IMG_W = 5, IMG_H = 3, PAD = 2, K = 5;
  localparam int W_PAD = IMG_W + 2*PAD, H_PAD = IMG_H + 2*PAD, DEPTH = W_PAD*H_PAD;
  localparam int AW = $clog2(DEPTH);
  logic clk = 0, rst_n = 0, start = 0, busy, pix_valid, win_ok;
  logic [AW-1:0] rd_addr;
  int checks = 0, failures = 0;

  pad_scanner #(.IMG_W(IMG_W), .IMG_H(IMG_H), .PAD(PAD), .K(K)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic check(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", msg); end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int scan = 0; scan < 2; scan++) begin
      int nbusy, nvalid, nok, prev_addr;
      bit prev_busy;
      @(negedge clk); start = 1;
      nbusy = 0; nvalid = 0; nok = 0; prev_busy = 0; prev_addr = 0;
      for (int cyc = 0; cyc < DEPTH + 10; cyc++) begin
        @(posedge clk); #1;
        start = 0;
        if (pix_valid) begin
          int pc, pr;
          check(prev_busy, "pix_valid without busy one cycle before");
          pc = prev_addr / H_PAD; pr = prev_addr % H_PAD;
          check(win_ok == (pc >= K-1 && pr >= K-1), $sformatf("win_ok wrong at address %0d", prev_addr));
          nvalid++; if (win_ok) nok++;
        end else check(!win_ok, "win_ok without pix_valid");
        if (busy) begin
          check(int'(rd_addr) == nbusy, $sformatf("address %0d expected %0d", rd_addr, nbusy));
          nbusy++;
        end
        prev_busy = busy; prev_addr = int'(rd_addr);
      end
      check(nbusy == DEPTH, $sformatf("scan lasted %0d cycles, expected %0d", nbusy, DEPTH));
      check(nvalid == DEPTH, $sformatf("%0d valid pixels, expected %0d", nvalid, DEPTH));
      check(nok == IMG_W*IMG_H, $sformatf("%0d full windows, expected %0d", nok, IMG_W*IMG_H));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
