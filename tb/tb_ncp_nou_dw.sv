// tb_ncp_nou_dw: self-checking test of the NOU-dw depthwise pipelines.
//
// Feeds random 3x3 windows and kernels to all lanes, mostly one per cycle
// with occasional gaps, and checks every lane's sum of nine products against
// the testbench's own sum, three cycles after the input (fully pipelined).
module tb_ncp_nou_dw;
  localparam int TOC = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic valid_i, valid_o;
  logic signed [7:0]  win [TOC][9], k [TOC][9];
  logic signed [31:0] sum [TOC];

  ncp_nou_dw #(.TOC(TOC)) dut (
    .clk, .rst_n, .valid_i, .win_i(win), .k_i(k), .valid_o, .sum_o(sum)
  );

  int checks = 0, failures = 0, cyc = 0;
  logic [32*TOC-1:0] exp_s [$];
  int exp_c [$];
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) if (rst_n && valid_o) begin
    logic [32*TOC-1:0] e;
    int c0;
    e = exp_s.pop_front(); c0 = exp_c.pop_front();
    checks++;
    if (cyc - c0 != 3) begin
      failures++;
      $display("latency %0d", cyc - c0);
    end
    for (int c = 0; c < TOC; c++) begin
      checks++;
      if (sum[c] !== e[32*c +: 32]) begin
        failures++;
        if (failures < 10) $display("lane %0d got %0d exp %0d", c, sum[c], $signed(e[32*c +: 32]));
      end
    end
  end

  initial begin
    valid_i = 0;
    foreach (win[c, t]) begin win[c][t] = 0; k[c][t] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 2000; n++) begin
      logic [32*TOC-1:0] e;
      int es;
      @(negedge clk);
      valid_i = ($urandom % 8) != 0;
      for (int c = 0; c < TOC; c++) begin
        es = 0;
        for (int t = 0; t < 9; t++) begin
          win[c][t] = (n == 5) ? -8'sd128 : 8'($urandom);
          k[c][t]   = (n == 5) ? -8'sd128 : 8'($urandom);
          es += int'(win[c][t]) * int'(k[c][t]);
        end
        e[32*c +: 32] = es;
      end
      if (valid_i) begin exp_s.push_back(e); exp_c.push_back(cyc); end
    end
    @(negedge clk) valid_i = 0;
    repeat (6) @(posedge clk);
    checks++;
    if (exp_s.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
