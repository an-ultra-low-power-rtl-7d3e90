// ncp_nou_post: NOU-post, the fused post-operation unit.
//
// LANES parallel pipelines (the paper's Toc = 16) each turn one value into an
// int8 result through the chain the paper lists: a source multiplexer (MAC
// array accumulator, depthwise adder tree, or a tensor read from TM), an
// optional element-wise addition, int2float, float32 multiply-add for batch
// normalisation (x * scale + bias), float2int and ReLU. One vector of LANES
// values is accepted every cycle and leaves LAT_POST = 4 cycles later:
//   stage 1  select source, add residual, int2float
//   stage 2  float32 multiply by the per-lane scale
//   stage 3  float32 add of the per-lane bias
//   stage 4  float2int (round to nearest even, saturate to int8), ReLU
// When `bn` is low the floating-point stages are bypassed and the integer sum
// is saturated to int8 directly. The residual is added in the integer domain
// before BN, matching the "+ BN+ReLU" order of the dense block. The exact
// stage split, the rounding and the place of the addition are this design's
// choices; the paper names the modules and their interconnection only.
// `tag_i` is carried unchanged alongside the data for the caller's use
// (typically the write-back address).
module ncp_nou_post
  import ncp_fp_pkg::*;
#(
  parameter int LANES = 16,
  parameter int TAGW  = 24
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     valid_i,
  input  logic [1:0]               sel_i,      // 0 conv, 1 dw, 2 TM
  input  logic signed [31:0]       conv_i [LANES],
  input  logic signed [31:0]       dw_i   [LANES],
  input  logic signed [7:0]        tm_i   [LANES],
  input  logic                     res_en_i,   // element-wise addition
  input  logic signed [7:0]        res_i  [LANES],
  input  logic                     bn_i,
  input  logic [31:0]              scale_i [LANES],
  input  logic [31:0]              bias_i  [LANES],
  input  logic                     relu_i,
  input  logic [TAGW-1:0]          tag_i,
  output logic                     valid_o,
  output logic signed [7:0]        data_o [LANES],
  output logic [TAGW-1:0]          tag_o
);

  localparam int LAT_POST = 4;

  // pipeline control
  logic [LAT_POST-1:0] vld;
  logic [TAGW-1:0]     tag  [LAT_POST];
  logic [LAT_POST-1:0] bn_p, relu_p;

  logic signed [31:0] x1 [LANES], x2 [LANES], x3 [LANES];
  logic [31:0]        f1 [LANES], f2 [LANES], f3 [LANES];
  logic [31:0]        sc1 [LANES], bi1 [LANES], bi2 [LANES];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vld <= '0;
    end else begin
      vld <= {vld[LAT_POST-2:0], valid_i};
    end
  end

  always_ff @(posedge clk) begin
    tag[0]  <= tag_i;
    bn_p[0] <= bn_i;
    relu_p[0] <= relu_i;
    for (int s = 1; s < LAT_POST; s++) begin
      tag[s]    <= tag[s-1];
      bn_p[s]   <= bn_p[s-1];
      relu_p[s] <= relu_p[s-1];
    end
  end

  for (genvar l = 0; l < LANES; l++) begin : g_lane
    logic signed [31:0] src, sum;
    always_comb begin
      unique case (sel_i)
        2'd0:    src = conv_i[l];
        2'd1:    src = dw_i[l];
        default: src = 32'(tm_i[l]);
      endcase
      sum = src + (res_en_i ? 32'(res_i[l]) : 32'sd0);
    end

    always_ff @(posedge clk) begin
      // stage 1
      x1[l]  <= sum;
      f1[l]  <= fp_i2f(sum);
      sc1[l] <= scale_i[l];
      bi1[l] <= bias_i[l];
      // stage 2
      x2[l]  <= x1[l];
      f2[l]  <= fp_mul(f1[l], sc1[l]);
      bi2[l] <= bi1[l];
      // stage 3
      x3[l]  <= x2[l];
      f3[l]  <= fp_add(f2[l], bi2[l]);
    end

    // stage 4
    logic signed [7:0] q;
    always_comb begin
      if (bn_p[2])             q = fp_f2i8(f3[l]);
      else if (x3[l] > 32'sd127)  q = 8'sd127;
      else if (x3[l] < -32'sd128) q = -8'sd128;
      else                     q = x3[l][7:0];
      if (relu_p[2] && q < 0) q = 8'sd0;
    end
    always_ff @(posedge clk) data_o[l] <= q;
  end

  assign valid_o = vld[LAT_POST-1];
  assign tag_o   = tag[LAT_POST-1];

endmodule
