// weight_mem: weight store of one 2D convolution unit.
//
// Holds, for every (layer, loop) entry, the NF x K*K = 2 x 25 weights that the
// unit's two filters need for that pass; entry = layer*LOOPS + loop. A host
// writes one weight at a time: wr_idx = f*K*K + t with t = ky*K+kx. At the
// start of a pass the loop controller reads one whole entry (rd_en), and the
// registered word stays on wgt until the next read, so the weights are stable
// for the whole scan. One cycle read latency.
//
// The paper shows the filters (Fig. 8) but not where they are kept; this
// on-chip store and its write port are this design's, sized so that the
// weights of all layers stay on chip.
module weight_mem #(
  parameter int DEPTH = rs_pkg::NLAYERS * (rs_pkg::NCH / rs_pkg::NF),
  parameter int NF    = rs_pkg::NF,
  parameter int K     = rs_pkg::K,
  parameter int WGT_W = rs_pkg::WGT_W,
  localparam int NW   = NF * K * K,
  localparam int EW   = $clog2(DEPTH),
  localparam int IW   = $clog2(NW)
) (
  input  logic                    clk,
  input  logic                    we,
  input  logic [EW-1:0]           wr_entry,
  input  logic [IW-1:0]           wr_idx,
  input  logic [WGT_W-1:0]        wr_data,
  input  logic                    rd_en,
  input  logic [EW-1:0]           rd_entry,
  output logic signed [WGT_W-1:0] wgt [NF][K*K]
);
  logic [NW*WGT_W-1:0] mem [DEPTH];
  logic [NW*WGT_W-1:0] word;

  always_ff @(posedge clk) begin
    if (we) mem[wr_entry][int'(wr_idx)*WGT_W +: WGT_W] <= wr_data;
    if (rd_en) word <= mem[rd_entry];
  end

  always_comb
    for (int f = 0; f < NF; f++)
      for (int t = 0; t < K*K; t++)
        wgt[f][t] = word[(f*K*K + t)*WGT_W +: WGT_W];
endmodule
