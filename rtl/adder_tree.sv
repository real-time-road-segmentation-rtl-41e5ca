// adder_tree: pipelined binary adder tree.
//
// Sums N signed operands of IN_W bits. The operands are padded with zeros to
// the next power of two and added pairwise, one tree level per clock, so the
// sum appears LAT = clog2(N) cycles after the operands, with its valid flag.
// The output is IN_W+clog2(N) bits wide and cannot overflow. It accepts new
// operands every cycle.
//
// The engine uses it twice: with N=25 after the multipliers of each 5x5
// filter, and with N=64 to add the partial sums of the 64 channel units.
// That both trees are pipelined follows the paper; one register per level is
// this design's choice.
module adder_tree #(
  parameter int N    = 25,
  parameter int IN_W = 32,
  localparam int LAT   = (N > 1) ? $clog2(N) : 0,
  localparam int OUT_W = IN_W + LAT
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic signed [IN_W-1:0]  din [N],
  output logic                    out_valid,
  output logic signed [OUT_W-1:0] sum
);
  localparam int NP = 1 << LAT;

  logic signed [OUT_W-1:0] lvl [LAT+1][NP];
  logic                    vld [LAT+1];

  always_comb begin
    for (int i = 0; i < NP; i++)
      lvl[0][i] = (i < N) ? OUT_W'(din[i]) : '0;
    vld[0] = in_valid;
  end

  for (genvar l = 0; l < LAT; l++) begin : g_lvl
    always_ff @(posedge clk) begin
      for (int i = 0; i < (NP >> (l+1)); i++)
        lvl[l+1][i] <= lvl[l][2*i] + lvl[l][2*i+1];
      for (int i = (NP >> (l+1)); i < NP; i++)
        lvl[l+1][i] <= '0;
    end
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) vld[l+1] <= 1'b0;
      else        vld[l+1] <= vld[l];
    end
  end

  assign sum       = lvl[LAT][0];
  assign out_valid = vld[LAT];
endmodule
