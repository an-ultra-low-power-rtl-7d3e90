// ncp_layout_conv: layout conversion circuit (interleaved -> pixel-major).
//
// Two TOC x THW register arrays, A and B, work in ping-pong. The array being
// filled takes TOC channel values of one pixel per cycle (a column). After THW
// pixels it is full and switches to readout: it then emits one row per cycle,
// THW consecutive pixels of a single channel, for TOC cycles, while new input
// is written into the other array. When that one is full and the first has
// been read empty, the roles swap again. This is the structure and order of
// operation the paper gives; the handshake below is this design's own.
//
// Interface: `in_valid_i` with `in_ready_o` accepts a column `in_i`.
// Readout needs no acknowledge: `out_valid_o` marks a row `out_o` of channel
// `out_ch_o` (0 .. TOC-1 within the tile) and `out_last_o` the last row of a
// tile. The first row appears two cycles after the column that completes a
// tile. `in_ready_o` only drops if both arrays are full, which cannot happen
// at one column per cycle because TOC <= THW. `swap_o` pulses when an array
// completes filling (the ping-pong exchange).
module ncp_layout_conv #(
  parameter int TOC = 16,
  parameter int THW = 32
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       in_valid_i,
  output logic                       in_ready_o,
  input  logic signed [7:0]          in_i  [TOC],
  output logic                       out_valid_o,
  output logic                       out_last_o,
  output logic [$clog2(TOC)-1:0]     out_ch_o,
  output logic signed [7:0]          out_o [THW],
  output logic                       swap_o
);

  logic signed [7:0] arr [2][TOC][THW];
  logic [1:0]                 full;
  logic                       fsel, dsel;
  logic [$clog2(THW)-1:0]     fcnt;
  logic [$clog2(TOC)-1:0]     dcnt;

  logic acc_in, drain;
  assign in_ready_o = !full[fsel];
  assign acc_in     = in_valid_i && in_ready_o;
  assign drain      = full[dsel];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      full <= '0; fsel <= 1'b0; dsel <= 1'b0; fcnt <= '0; dcnt <= '0;
      out_valid_o <= 1'b0; out_last_o <= 1'b0; out_ch_o <= '0; swap_o <= 1'b0;
    end else begin
      swap_o      <= 1'b0;
      out_valid_o <= drain;
      out_last_o  <= drain && (dcnt == $clog2(TOC)'(TOC - 1));
      out_ch_o    <= dcnt;
      if (drain) begin
        if (dcnt == $clog2(TOC)'(TOC - 1)) begin
          dcnt       <= '0;
          full[dsel] <= 1'b0;
          dsel       <= !dsel;
        end else dcnt <= dcnt + 1'b1;
      end
      if (acc_in) begin
        if (fcnt == $clog2(THW)'(THW - 1)) begin
          fcnt       <= '0;
          full[fsel] <= 1'b1;
          fsel       <= !fsel;
          swap_o     <= 1'b1;
        end else fcnt <= fcnt + 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (acc_in)
      for (int c = 0; c < TOC; c++) arr[fsel][c][fcnt] <= in_i[c];
    if (drain)
      for (int p = 0; p < THW; p++) out_o[p] <= arr[dsel][dcnt][p];
  end

endmodule
