// tb_feature_mem: self-checking test of the feature-map memories.
// Writes random pixel pairs to random map pairs and addresses, keeps a model
// of all banks, and checks the parallel read of every bank.
module tb_feature_mem;
  localparam int NCH = 8, DEPTH = 16, AW = 4;
  logic clk = 0, we = 0;
  logic [1:0] wr_pair = '0;
  logic [AW-1:0] wr_addr = '0, rd_addr = '0;
  logic [15:0] wr_data [2];
  logic [15:0] rd_data [NCH];
  int checks = 0, failures = 0;
  int model [NCH][DEPTH];

  feature_mem #(.NCH(NCH), .DEPTH(DEPTH), .PIX_W(16)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    wr_data[0] = '0; wr_data[1] = '0;
    // initialise every word
    for (int p = 0; p < NCH/2; p++) for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk); we = 1; wr_pair = 2'(p); wr_addr = AW'(a);
      wr_data[0] = 16'(p*100 + a); wr_data[1] = 16'(p*100 + a + 50);
      model[2*p][a] = p*100 + a; model[2*p+1][a] = p*100 + a + 50;
    end
    for (int n = 0; n < 400; n++) begin
      @(negedge clk);
      we = $urandom_range(0, 1) == 1;
      wr_pair = 2'($urandom_range(0, NCH/2 - 1)); wr_addr = AW'($urandom_range(0, DEPTH-1));
      wr_data[0] = 16'($urandom()); wr_data[1] = 16'($urandom());
      rd_addr = AW'($urandom_range(0, DEPTH-1));
      @(posedge clk); #1;
      for (int ch = 0; ch < NCH; ch++) begin
        checks++;
        if (int'(rd_data[ch]) != model[ch][rd_addr]) begin failures++; if (failures < 10) $display("FAIL ch %0d addr %0d: %h vs %h", ch, rd_addr, rd_data[ch], model[ch][rd_addr]); end
      end
      if (we) begin
        model[2*wr_pair][wr_addr] = int'(wr_data[0]);
        model[2*wr_pair+1][wr_addr] = int'(wr_data[1]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
