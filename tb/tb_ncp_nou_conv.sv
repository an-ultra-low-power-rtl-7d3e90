// tb_ncp_nou_conv: self-checking test of the NOU-conv MAC array.
//
// Accumulates several tiles of random outer products with random input
// channel counts, some back to back, and compares the captured TOC x THW
// tile with sums computed in the testbench. Checks that `done_o` rises one
// cycle after the last product and that the captured tile stays unchanged
// while the array works on the next one.
module tb_ncp_nou_conv;
  localparam int TOC = 16, THW = 32;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic mac, first, last, done;
  logic signed [7:0]  w [TOC], x [THW];
  logic signed [31:0] acc [TOC][THW];

  ncp_nou_conv #(.TOC(TOC), .THW(THW)) dut (
    .clk, .rst_n, .mac_i(mac), .first_i(first), .last_i(last), .w_i(w), .x_i(x),
    .done_o(done), .acc_o(acc)
  );

  int checks = 0, failures = 0;
  int ref_acc [TOC][THW];

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_tile(string what);
    for (int o = 0; o < TOC; o++)
      for (int p = 0; p < THW; p++) begin
        checks++;
        if (acc[o][p] !== ref_acc[o][p]) begin
          failures++;
          if (failures < 10) $display("%s [%0d][%0d]: got %0d exp %0d", what, o, p,
                                      acc[o][p], ref_acc[o][p]);
        end
      end
  endtask

  initial begin
    mac = 0; first = 0; last = 0;
    foreach (w[i]) w[i] = 0;
    foreach (x[i]) x[i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 12; t++) begin
      int k;
      int prev [TOC][THW];
      k = 1 + int'($urandom % 40);
      if (t == 11) k = 512;
      prev = ref_acc;
      for (int i = 0; i < k; i++) begin
        @(negedge clk);
        mac = 1; first = (i == 0); last = (i == k - 1);
        foreach (w[o]) w[o] = (t == 0) ? -8'sd128 : 8'($urandom);
        foreach (x[p]) x[p] = (t == 0) ? -8'sd128 : 8'($urandom);
        for (int o = 0; o < TOC; o++)
          for (int p = 0; p < THW; p++)
            ref_acc[o][p] = (i == 0 ? 0 : ref_acc[o][p]) + int'(w[o]) * int'(x[p]);
        // the previous tile must still be held while the new one accumulates
        if (t > 0 && i == 1) begin
          int keep [TOC][THW];
          keep = ref_acc; ref_acc = prev;
          check_tile("held");
          ref_acc = keep;
        end
        @(posedge clk); #1;
        checks++;
        if (done !== (i == k - 1)) begin
          failures++;
          $display("done at wrong time (tile %0d, step %0d)", t, i);
        end
      end
      check_tile("tile");
      prev = ref_acc;
      if (t % 3 == 0) begin
        @(negedge clk); mac = 0; first = 0; last = 0;
        repeat (2) @(negedge clk);
        check_tile("idle");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
