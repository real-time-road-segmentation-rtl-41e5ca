// tb_weight_mem: self-checking test of a weight store.
// Writes every weight of every entry one at a time in random order, then
// reads entries in random order and checks all 2x25 weights, and that the
// output holds while rd_en is low.
module tb_weight_mem;
  localparam int DEPTH = 6, NF = 2, K = 5, NW = NF*K*K;
  logic clk = 0, we = 0, rd_en = 0;
  logic [2:0] wr_entry = '0, rd_entry = '0;
  logic [5:0] wr_idx = '0;
  logic [15:0] wr_data = '0;
  logic signed [15:0] wgt [NF][K*K];
  int checks = 0, failures = 0;
  int model [DEPTH][NW];

  weight_mem #(.DEPTH(DEPTH), .NF(NF), .K(K), .WGT_W(16)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic check_entry(int e);
    for (int f = 0; f < NF; f++) for (int t = 0; t < K*K; t++) begin
      checks++;
      if (int'(wgt[f][t]) != model[e][f*K*K+t]) begin failures++; if (failures < 10) $display("FAIL entry %0d f %0d t %0d", e, f, t); end
    end
  endtask

  initial begin
    int order [DEPTH*NW];
    for (int i = 0; i < DEPTH*NW; i++) order[i] = i;
    order.shuffle();
    for (int i = 0; i < DEPTH*NW; i++) begin
      int e, x;
      e = order[i] / NW; x = order[i] % NW;
      model[e][x] = int'($signed(16'($urandom())));
      @(negedge clk); we = 1; wr_entry = 3'(e); wr_idx = 6'(x); wr_data = 16'(model[e][x]);
    end
    @(negedge clk); we = 0;
    for (int n = 0; n < 30; n++) begin
      int e;
      e = $urandom_range(0, DEPTH-1);
      @(negedge clk); rd_en = 1; rd_entry = 3'(e);
      @(negedge clk); rd_en = 0; rd_entry = 3'((e + 1) % DEPTH);
      check_entry(e);
      repeat (3) @(negedge clk);
      check_entry(e);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
