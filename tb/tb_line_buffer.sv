// tb_line_buffer: self-checking test of the 5x5 line buffer.
// Shifts random pixels in with random idle cycles and checks, after every
// shift, that win[d][e] holds the pixel shifted in d*LINE_LEN+e shifts ago.
module tb_line_buffer;
  localparam int LINE_LEN = 9, K = 5, N = 400;
  logic clk = 0, rst_n = 0, shift = 0;
  logic [15:0] din = '0;
  logic [15:0] win [K][K];
  int checks = 0, failures = 0;
  int hist [N];

  line_buffer #(.LINE_LEN(LINE_LEN), .K(K), .PIX_W(16)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < N; n++) begin
      @(negedge clk);
      while ($urandom_range(0, 3) == 0) begin shift = 0; @(negedge clk); end
      hist[n] = int'($urandom_range(0, 65535));
      shift = 1; din = hist[n][15:0];
      @(negedge clk); shift = 0;
      if (n >= (K-1)*LINE_LEN + K - 1)
        for (int d = 0; d < K; d++)
          for (int e = 0; e < K; e++) begin
            checks++;
            if (int'(win[d][e]) != hist[n - (d*LINE_LEN + e)]) begin
              failures++;
              if (failures < 10) $display("FAIL n=%0d win[%0d][%0d]=%h expected %h", n, d, e, win[d][e], hist[n - (d*LINE_LEN + e)]);
            end
          end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
