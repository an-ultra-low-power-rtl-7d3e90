// tb_ncp_nou_post: self-checking test of NOU-post.
//
// Streams random vectors (one per cycle, with idle gaps) through all source
// selections with and without residual addition, BN and ReLU, and compares
// every lane with the golden model, which computes BN in double precision
// and rounds once to float32. Also checks that each result appears exactly
// four cycles after its input and that the tag travels with it.
module tb_ncp_nou_post;
  import ncp_ref_pkg::*;

  localparam int L = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic               valid_i, res_en, bn, relu, valid_o;
  logic [1:0]         sel;
  logic signed [31:0] conv_i [L], dw_i [L];
  logic signed [7:0]  tm_i [L], res_i [L], data_o [L];
  logic [31:0]        scale [L], bias [L];
  logic [23:0]        tag_i, tag_o;

  ncp_nou_post #(.LANES(L), .TAGW(24)) dut (
    .clk, .rst_n, .valid_i, .sel_i(sel), .conv_i, .dw_i, .tm_i, .res_en_i(res_en),
    .res_i, .bn_i(bn), .scale_i(scale), .bias_i(bias), .relu_i(relu), .tag_i,
    .valid_o, .data_o, .tag_o
  );

  int checks = 0, failures = 0, cyc = 0;
  logic [8*L-1:0]    exp_q [$];
  int                exp_t [$];
  int                exp_c [$];

  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // checker
  always @(negedge clk) if (rst_n && valid_o) begin
    logic [8*L-1:0] e;
    int t, c0;
    e = exp_q.pop_front(); t = exp_t.pop_front(); c0 = exp_c.pop_front();
    checks++;
    if (cyc - c0 != 4 || tag_o != 24'(t)) begin
      failures++;
      $display("latency/tag mismatch: %0d cycles, tag %h vs %h", cyc - c0, tag_o, t);
    end
    for (int l = 0; l < L; l++) begin
      checks++;
      if (data_o[l] !== e[8*l +: 8]) begin
        failures++;
        if (failures < 20) $display("lane %0d: got %0d exp %0d", l, data_o[l], e[8*l +: 8]);
      end
    end
  end

  initial begin
    valid_i = 0; sel = 0; res_en = 0; bn = 0; relu = 0; tag_i = 0;
    for (int l = 0; l < L; l++) begin
      conv_i[l] = 0; dw_i[l] = 0; tm_i[l] = 0; res_i[l] = 0; scale[l] = 0; bias[l] = 0;
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      logic [8*L-1:0] e;
      @(negedge clk);
      valid_i = ($urandom % 4) != 0;
      sel = 2'($urandom % 3); res_en = 1'($urandom); bn = ($urandom % 4) != 0;
      relu = 1'($urandom); tag_i = 24'($urandom);
      for (int l = 0; l < L; l++) begin
        int x;
        conv_i[l] = (n < 100) ? 32'($urandom % 256) - 128 : 32'($urandom % 2000000) - 1000000;
        dw_i[l]   = 32'($urandom % 600000) - 300000;
        tm_i[l]   = 8'($urandom);
        res_i[l]  = 8'($urandom);
        scale[l]  = rand_f(-20, 2, 0);
        bias[l]   = rand_f(-4, 7, 0);
        x = (sel == 0) ? conv_i[l] : (sel == 1) ? dw_i[l] : int'(tm_i[l]);
        e[8*l +: 8] = post(x, res_en ? int'(res_i[l]) : 0, bn, scale[l], bias[l], relu);
      end
      if (valid_i) begin
        exp_q.push_back(e); exp_t.push_back(int'(tag_i)); exp_c.push_back(cyc);
      end
    end
    @(negedge clk) valid_i = 0;
    repeat (10) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin
      failures++;
      $display("%0d results missing", exp_q.size());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
