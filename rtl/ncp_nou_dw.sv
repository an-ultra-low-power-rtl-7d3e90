// ncp_nou_dw: NOU-dw, the depthwise 3x3 convolution pipelines.
//
// TOC independent channel pipelines, each with nine multipliers and an adder
// tree of eight adders, as in the classical convolution pipeline the paper
// adopts. Each cycle a lane takes its channel's 3x3 input window and 3x3
// kernel and, LAT_DW = 3 cycles later, presents the int32 sum of the nine
// products:
//   stage 1  nine int8 x int8 products
//   stage 2  first adder-tree levels (four pair sums and the ninth product)
//   stage 3  remaining adder-tree levels
// A new window is accepted every cycle, so the unit is fully pipelined.
// Window index t = 3*ky + kx. The stage split is this design's choice.
module ncp_nou_dw #(
  parameter int TOC = 16
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               valid_i,
  input  logic signed [7:0]  win_i [TOC][9],
  input  logic signed [7:0]  k_i   [TOC][9],
  output logic               valid_o,
  output logic signed [31:0] sum_o [TOC]
);

  logic [2:0] vld;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) vld <= '0;
    else        vld <= {vld[1:0], valid_i};
  end
  assign valid_o = vld[2];

  for (genvar c = 0; c < TOC; c++) begin : g_ch
    logic signed [15:0] prod [9];
    logic signed [17:0] s1 [5];
    always_ff @(posedge clk) begin
      for (int t = 0; t < 9; t++) prod[t] <= win_i[c][t] * k_i[c][t];
      for (int t = 0; t < 4; t++) s1[t] <= 18'(prod[2*t]) + 18'(prod[2*t+1]);
      s1[4] <= 18'(prod[8]);
      sum_o[c] <= (32'(s1[0]) + 32'(s1[1])) + (32'(s1[2]) + 32'(s1[3])) + 32'(s1[4]);
    end
  end

endmodule
