// feature_mem: the 64 feature-map memories.
//
// NCH banks of DEPTH = IMG_W*IMG_H words of PIX_W bits (256 kbit each at the
// default size). Every layer's output is written into the same banks, in
// place: while a layer runs, its input has already been copied into the
// padding RAMs, so the banks are free to receive the new maps. A conv pass
// writes one pixel of each of the two maps 2k and 2k+1 per write (wr_pair =
// k). The read port reads the same address of every bank at once, with one
// cycle of latency, for the copy into the padding RAMs. Address = col*IMG_H +
// row, the order in which the column scan produces outputs.
//
// 64 memories of 256 kbit, shared by all layers, follow the paper; the
// addressing and the port structure are this design's.
module feature_mem #(
  parameter int NCH   = rs_pkg::NCH,
  parameter int DEPTH = rs_pkg::IMG_W * rs_pkg::IMG_H,
  parameter int PIX_W = rs_pkg::PIX_W,
  localparam int AW   = $clog2(DEPTH),
  localparam int PW   = (NCH > 2) ? $clog2(NCH/2) : 1
) (
  input  logic             clk,
  input  logic             we,
  input  logic [PW-1:0]    wr_pair,
  input  logic [AW-1:0]    wr_addr,
  input  logic [PIX_W-1:0] wr_data [2],
  input  logic [AW-1:0]    rd_addr,
  output logic [PIX_W-1:0] rd_data [NCH]
);
  for (genvar ch = 0; ch < NCH; ch++) begin : g_bank
    logic [PIX_W-1:0] mem [DEPTH];
    logic             bank_we;
    assign bank_we = we && (int'(wr_pair) == ch / 2);
    always_ff @(posedge clk) begin
      if (bank_we) mem[wr_addr] <= wr_data[ch % 2];
      rd_data[ch] <= mem[rd_addr];
    end
  end
endmodule
