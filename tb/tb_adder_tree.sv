// tb_adder_tree: self-checking test of the pipelined adder tree.
// Feeds random signed operand sets, one per cycle with gaps, to a 25-input and
// a 64-input tree and checks every sum and its latency of clog2(N) cycles.
module tb_adder_tree;
  localparam int W = 32;
  logic clk = 0, rst_n = 0, v = 0;
  logic signed [W-1:0] a25 [25];
  logic signed [W-1:0] a64 [64];
  logic ov25, ov64;
  logic signed [W+4:0] s25;
  logic signed [W+5:0] s64;
  int checks = 0, failures = 0;
  longint exp25 [$], exp64 [$];
  int cyc = 0, sent_cyc [$];

  adder_tree #(.N(25), .IN_W(W)) dut25 (.clk, .rst_n, .in_valid(v), .din(a25), .out_valid(ov25), .sum(s25));
  adder_tree #(.N(64), .IN_W(W)) dut64 (.clk, .rst_n, .in_valid(v), .din(a64), .out_valid(ov64), .sum(s64));
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always @(posedge clk) begin
    if (rst_n && ov25) begin
      longint e; int sc;
      e = exp25.pop_front(); sc = sent_cyc.pop_front();
      checks += 2;
      if (longint'(s25) != e) begin failures++; $display("FAIL sum25 %0d expected %0d", s25, e); end
      if (cyc - sc != 5) begin failures++; $display("FAIL latency25 %0d", cyc - sc); end
    end
    if (rst_n && ov64) begin
      longint e;
      e = exp64.pop_front();
      checks++;
      if (longint'(s64) != e) begin failures++; $display("FAIL sum64 %0d expected %0d", s64, e); end
    end
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 300; n++) begin
      longint e25, e64;
      @(negedge clk);
      v = ($urandom_range(0, 2) != 0);
      e25 = 0; e64 = 0;
      for (int i = 0; i < 25; i++) begin
        a25[i] = (n < 10) ? ((n % 2) ? 32'sh7fffffff : 32'sh80000000) : $signed($urandom());
        e25 += longint'(a25[i]);
      end
      for (int i = 0; i < 64; i++) begin
        a64[i] = (n < 10) ? ((n % 2) ? 32'sh7fffffff : 32'sh80000000) : $signed($urandom());
        e64 += longint'(a64[i]);
      end
      if (v) begin exp25.push_back(e25); exp64.push_back(e64); sent_cyc.push_back(cyc); end
    end
    @(negedge clk); v = 0;
    repeat (10) @(posedge clk);
    checks++;
    if (exp25.size() != 0 || exp64.size() != 0) begin failures++; $display("FAIL missing sums"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
