// layer_fsm: steps the network through its NLAYERS convolution layers.
//
// For each layer it starts loop_fsm and waits for it to finish. It supplies
// the per-layer settings: the first layer fills the padding RAMs from the
// input stream, later layers from the feature memories; the first NLAYERS-1
// layers run NCH/2 loops and apply ReLU, the last layer runs OUT_CH/2 loops
// (one, for the two score maps) without ReLU. After the last layer it pulses
// frame_done and starts again at layer 0, waiting for the next input map.
// It begins only once enable (the padding RAMs' zero fill done) is high.
//
// A second FSM driving the per-layer loops follows the paper. The paper
// counts 11 x 32 = 352 loops per frame, but also says the last layer has a
// depth of 2; this design runs 10 x 32 + 1 = 321 loops.
module layer_fsm #(
  parameter int NLAYERS = rs_pkg::NLAYERS,
  parameter int NCH     = rs_pkg::NCH,
  parameter int OUT_CH  = rs_pkg::OUT_CH,
  localparam int NL     = NCH / rs_pkg::NF,
  localparam int LW     = (NL > 1) ? $clog2(NL) : 1,
  localparam int YW     = (NLAYERS > 1) ? $clog2(NLAYERS) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          enable,
  output logic          loop_start,
  input  logic          loop_done,
  output logic [YW-1:0] layer,
  output logic [LW:0]   nloops,
  output logic          from_input,
  output logic          relu_en,
  output logic          last_layer,
  output logic          frame_done
);
  typedef enum logic [1:0] {S_IDLE, S_RUN} state_t;
  state_t state;

  assign last_layer = (int'(layer) == NLAYERS-1);
  assign from_input = (layer == '0);
  assign relu_en    = !last_layer;
  assign nloops     = (LW+1)'(rs_pkg::loops_of_layer(int'(layer), NLAYERS, NCH, OUT_CH));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      layer      <= '0;
      loop_start <= 1'b0;
      frame_done <= 1'b0;
    end else begin
      loop_start <= 1'b0;
      frame_done <= 1'b0;
      unique case (state)
        S_IDLE: if (enable) begin
          state      <= S_RUN;
          loop_start <= 1'b1;
        end
        S_RUN: if (loop_done) begin
          if (last_layer) begin
            layer      <= '0;
            frame_done <= 1'b1;
            state      <= S_IDLE;
          end else begin
            layer      <= layer + 1'b1;
            loop_start <= 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
