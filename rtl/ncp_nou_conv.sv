// ncp_nou_conv: NOU-conv, the hardwired int8 multiply-accumulate array.
//
// The array holds TOC x THW accumulators (16 x 32 = 512 MACs in the paper's
// configuration) and computes one matrix outer product per cycle: a column of
// TOC weights (one input channel's weight for TOC output channels) times a row
// of THW activations (THW spatially consecutive pixels of that input channel,
// one pixel-major TM word). Accumulation over the input channels is done by
// the accumulators themselves, not by an adder tree, as the paper describes.
//
// Interface and timing: with `mac_i` high the array adds w_i * x_i^T; `first_i`
// marks the first input channel, which overwrites the accumulators instead of
// adding. `last_i` marks the last one: the completed TOC x THW tile is copied
// into an output register bank on the following clock edge and `done_o`
// pulses for one cycle. The output bank keeps the tile while the array
// already accumulates the next one, so a caller can drain results and feed
// new operands at the same time. The output bank is this design's choice;
// the paper states only that the array is active every cycle.
module ncp_nou_conv #(
  parameter int TOC = 16,
  parameter int THW = 32
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              mac_i,
  input  logic              first_i,
  input  logic              last_i,
  input  logic signed [7:0] w_i [TOC],
  input  logic signed [7:0] x_i [THW],
  output logic              done_o,
  output logic signed [31:0] acc_o [TOC][THW]
);

  logic signed [31:0] acc [TOC][THW];

  for (genvar o = 0; o < TOC; o++) begin : g_oc
    for (genvar p = 0; p < THW; p++) begin : g_px
      logic signed [31:0] nxt;
      assign nxt = (first_i ? 32'sd0 : acc[o][p]) + 32'(w_i[o] * x_i[p]);
      always_ff @(posedge clk) begin
        if (mac_i) acc[o][p] <= nxt;
        if (mac_i && last_i) acc_o[o][p] <= nxt;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) done_o <= 1'b0;
    else        done_o <= mac_i && last_i;
  end

endmodule
