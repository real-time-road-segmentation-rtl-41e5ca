// tb_layer_fsm: self-checking test of the layer controller.
// Acts as the loop FSM (loop_done some cycles after loop_start) and checks
// that the layers run 0..NLAYERS-1 with the right loop count, input source
// and ReLU setting, that frame_done pulses once per frame, that frames run
// back to back, and that nothing starts while enable is low.
module tb_layer_fsm;
  localparam int NLAYERS = 4, NCH = 8, OUT_CH = 2;
  logic clk = 0, rst_n = 0, enable = 0, loop_start, loop_done = 0;
  logic [1:0] layer;
  logic [2:0] nloops;
  logic from_input, relu_en, last_layer, frame_done;
  int checks = 0, failures = 0;

  layer_fsm #(.NLAYERS(NLAYERS), .NCH(NCH), .OUT_CH(OUT_CH)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic check(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", msg); end
  endtask

  int nframe_done = 0;
  always @(posedge clk) if (rst_n && frame_done) nframe_done++;

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    repeat (10) begin @(negedge clk); check(!loop_start, "started while disabled"); end
    enable = 1;
    for (int fr = 0; fr < 2; fr++)
      for (int l = 0; l < NLAYERS; l++) begin
        int n = 0;
        while (!loop_start && n < 20) begin @(negedge clk); n++; end
        check(loop_start, "loop_start missing");
        check(int'(layer) == l, $sformatf("layer %0d expected %0d", layer, l));
        check(int'(nloops) == ((l == NLAYERS-1) ? OUT_CH/2 : NCH/2), $sformatf("nloops %0d in layer %0d", nloops, l));
        check(from_input == (l == 0), "from_input");
        check(relu_en == (l != NLAYERS-1), "relu_en");
        check(last_layer == (l == NLAYERS-1), "last_layer");
        repeat ($urandom_range(1, 5)) @(negedge clk);
        check(!loop_start, "second loop_start");
        loop_done = 1; @(negedge clk); loop_done = 0;
        check(frame_done == (l == NLAYERS-1), "frame_done pulse");
        check(nframe_done == fr, "frame_done count");
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
