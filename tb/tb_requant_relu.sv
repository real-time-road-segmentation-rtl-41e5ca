// tb_requant_relu: self-checking test of rescaling, saturation and ReLU.
// Random 43-bit sums (small, mid-range and huge), with ReLU on and off,
// checked against an independent model one cycle later.
module tb_requant_relu;
  localparam int IN_W = 43;
  logic clk = 0, rst_n = 0, v = 0, relu = 0, ov;
  logic signed [IN_W-1:0] din = '0;
  logic signed [15:0] dout;
  int checks = 0, failures = 0;
  int nsat = 0, nrelu = 0;

  requant_relu #(.IN_W(IN_W), .PIX_W(16), .FRAC_BITS(8)) dut (
    .clk, .rst_n, .in_valid(v), .din, .relu_en(relu), .out_valid(ov), .dout);
  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic int model(longint s, bit r);
    longint q;
    q = s >>> 8;
    if (q > 32767) q = 32767;
    if (q < -32768) q = -32768;
    if (r && q < 0) q = 0;
    return int'(q);
  endfunction

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 2000; n++) begin
      longint s; int e;
      case ($urandom_range(0, 2))
        0: s = longint'($signed($urandom_range(0, 1 << 20))) - (1 << 19);
        1: s = longint'($signed($urandom())) ;
        default: s = (longint'($signed($urandom())) <<< 10);
      endcase
      @(negedge clk);
      v = 1; relu = $urandom_range(0, 1) == 1; din = s[IN_W-1:0];
      e = model(s, relu);
      if ((s >>> 8) > 32767 || (s >>> 8) < -32768) nsat++;
      if (relu && s < 0) nrelu++;
      @(posedge clk); #1;
      checks += 2;
      if (!ov) begin failures++; $display("FAIL no valid"); end
      if (int'(dout) != e) begin failures++; if (failures < 10) $display("FAIL in %0d relu %0d out %0d expected %0d", s, relu, dout, e); end
    end
    checks++;
    if (nsat == 0 || nrelu == 0) begin failures++; $display("FAIL saturation or ReLU never exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
