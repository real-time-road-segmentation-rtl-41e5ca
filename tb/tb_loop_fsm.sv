// tb_loop_fsm: self-checking test of the per-layer loop controller.
// Models the fill controller (done some cycles after fill_start) and the
// datapath (DEPTH results some cycles after scan_start, with gaps) and checks
// the sequence fill -> (weight read, scan) x nloops -> done, the loop index
// of each weight read, and the feature-memory address, pair, row and column
// of every result, for a full layer (4 loops) and a one-loop layer.
module tb_loop_fsm;
  localparam int IMG_W = 3, IMG_H = 2, NCH = 8, DEPTH = IMG_W*IMG_H;
  logic clk = 0, rst_n = 0, start = 0;
  logic [2:0] nloops = '0;
  logic busy, done, fill_start, fill_done = 0, w_rd_en, scan_start, res_valid = 0, fm_we;
  logic [1:0] loop_idx;
  logic [2:0] fm_wr_addr;
  logic res_row;
  logic [1:0] res_col;
  int checks = 0, failures = 0;

  loop_fsm #(.IMG_W(IMG_W), .IMG_H(IMG_H), .NCH(NCH)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic check(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", msg); end
  endtask

  task automatic wait_for(ref logic sig, input string what);
    int n = 0;
    while (!sig && n < 100) begin @(posedge clk); #1; n++; end
    check(sig == 1, {"timeout waiting for ", what});
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int layer = 0; layer < 3; layer++) begin
      int nl;
      nl = (layer == 1) ? 1 : 4;
      @(negedge clk); start = 1; nloops = 3'(nl); @(negedge clk); start = 0;
      #1 wait_for(fill_start, "fill_start");
      repeat ($urandom_range(2, 6)) @(negedge clk);
      check(!w_rd_en && !scan_start, "scan started before fill done");
      fill_done = 1; @(negedge clk); fill_done = 0;
      for (int lp = 0; lp < nl; lp++) begin
        #1 wait_for(w_rd_en, "w_rd_en");
        check(int'(loop_idx) == lp, $sformatf("weight read for loop %0d, expected %0d", loop_idx, lp));
        @(negedge clk);
        check(scan_start, "scan_start one cycle after the weight read");
        repeat (4) @(negedge clk);
        for (int n = 0; n < DEPTH; n++) begin
          while ($urandom_range(0, 2) == 0) begin res_valid = 0; @(negedge clk); end
          res_valid = 1;
          #1;
          check(fm_we, "result not written");
          check(int'(fm_wr_addr) == n, $sformatf("address %0d expected %0d", fm_wr_addr, n));
          check(int'(loop_idx) == lp, "pair");
          check(int'(res_row) == n % IMG_H && int'(res_col) == n / IMG_H, "row/col");
          check(!done, "done early");
          @(negedge clk);
        end
        res_valid = 0;
      end
      #1 check(done, "done after the last result");
      @(negedge clk);
      check(!busy, "busy after done");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
