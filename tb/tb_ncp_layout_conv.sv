// tb_ncp_layout_conv: self-checking test of the layout conversion circuit.
//
// Streams NT tiles of THW pixel columns (TOC channels each) into the
// converter, first back to back at one column per cycle and then with random
// gaps, and checks that every tile comes out as TOC rows of THW pixels of one
// channel in channel order, that the first row appears two cycles after the
// tile's last column, that the input is never refused at full rate, and that
// the two arrays alternate (one ping-pong swap per tile).
module tb_ncp_layout_conv;
  localparam int TOC = 16, THW = 32, NT = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, in_ready, out_valid, out_last, swap;
  logic [$clog2(TOC)-1:0] out_ch;
  logic signed [7:0] in_d [TOC], out_d [THW];

  ncp_layout_conv #(.TOC(TOC), .THW(THW)) dut (
    .clk, .rst_n, .in_valid_i(in_valid), .in_ready_o(in_ready), .in_i(in_d),
    .out_valid_o(out_valid), .out_last_o(out_last), .out_ch_o(out_ch), .out_o(out_d),
    .swap_o(swap)
  );

  int checks = 0, failures = 0, cyc = 0, swaps = 0;
  logic [7:0] data [NT][TOC][THW];
  int last_in_cyc [NT];
  int tile_o = 0, row_o = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) if (rst_n) begin
    if (swap) swaps++;
    if (out_valid) begin
      checks++;
      if (int'(out_ch) != row_o || out_last != (row_o == TOC - 1)) begin
        failures++;
        $display("row order: ch %0d exp %0d", out_ch, row_o);
      end
      if (row_o == 0) begin
        checks++;
        if (cyc - last_in_cyc[tile_o] != 2) begin
          failures++;
          $display("tile %0d first row %0d cycles after its last column", tile_o,
                   cyc - last_in_cyc[tile_o]);
        end
      end
      for (int p = 0; p < THW; p++) begin
        checks++;
        if (out_d[p] !== data[tile_o][row_o][p]) begin
          failures++;
          if (failures < 10) $display("tile %0d row %0d px %0d: %h vs %h", tile_o, row_o, p,
                                      out_d[p], data[tile_o][row_o][p]);
        end
      end
      row_o++;
      if (row_o == TOC) begin row_o = 0; tile_o++; end
    end
  end

  initial begin
    foreach (data[t, c, p]) data[t][c][p] = 8'($urandom);
    in_valid = 0;
    foreach (in_d[c]) in_d[c] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < NT; t++)
      for (int p = 0; p < THW; p++) begin
        @(negedge clk);
        if (t >= NT / 2)
          while ($urandom % 3 == 0) begin in_valid = 0; @(negedge clk); end
        in_valid = 1;
        foreach (in_d[c]) in_d[c] = data[t][c][p];
        checks++;
        if (!in_ready) begin failures++; $display("input refused"); end
        if (p == THW - 1) last_in_cyc[t] = cyc;
      end
    @(negedge clk) in_valid = 0;
    repeat (TOC + 5) @(posedge clk);
    checks += 2;
    if (tile_o != NT) begin failures++; $display("%0d tiles out", tile_o); end
    if (swaps != NT) begin failures++; $display("%0d swaps", swaps); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
