// tb_ncp_nou: self-checking test of the NOU with its sequencer.
//
// The NOU is connected to a tensor memory. The testbench fills the memory
// with random feature maps, weights, depthwise kernels and BN tables (the
// same contents in the golden model), then executes one instruction of each
// kind and each variant: move; 1x1 convolution with pixel-major and
// interleaved results, with and without BN/ReLU and residual; depthwise
// convolution with stride 1 and 2, interleaved results with residual and
// pixel-major results through the layout converter; bn, relu and add;
// max pooling, down- and up-sampling; global average pooling. After each
// instruction the whole of Bank1 and BankO is read back and compared with
// the golden model. It also checks that the MAC array multiplies on every
// cycle of a convolution's accumulation phase (TOC*THW MACs per cycle) and
// counts the layout converter's ping-pong swaps.
module tb_ncp_nou;
  import ncp_pkg::*;
  import ncp_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, busy, done;
  instr_t instr;
  logic [2:0]       n_en, n_we, t_en, t_we;
  logic [TM_AW-1:0] n_addr [3], t_addr [3];
  logic [255:0]     n_wdata [3], t_wdata [3], t_rdata [3];
  logic [31:0]      n_be [3], t_be [3];

  // testbench access to the memory while the NOU is idle
  logic             tb_own, tb_we, tb_en;
  logic [TM_AW-1:0] tb_addr;
  logic [255:0]     tb_wdata;

  ncp_nou dut (
    .clk, .rst_n, .start_i(start), .instr_i(instr), .busy_o(busy), .done_o(done),
    .tm_en_o(n_en), .tm_we_o(n_we), .tm_addr_o(n_addr), .tm_wdata_o(n_wdata),
    .tm_be_o(n_be), .tm_rdata_i(t_rdata)
  );

  always_comb begin
    t_en = n_en; t_we = n_we; t_addr = n_addr; t_wdata = n_wdata; t_be = n_be;
    if (tb_own) begin
      t_en = '0; t_we = '0;
      t_en[0] = tb_en; t_we[0] = tb_we; t_addr[0] = tb_addr; t_wdata[0] = tb_wdata;
      t_be[0] = '1;
    end
  end

  ncp_tensor_mem #(.NP(3)) u_tm (
    .clk, .rst_n, .en_i(t_en), .we_i(t_we), .addr_i(t_addr), .wdata_i(t_wdata),
    .be_i(t_be), .rdata_o(t_rdata)
  );

  int checks = 0, failures = 0;
  int macs = 0, swaps = 0;
  always @(posedge clk) begin
    if (dut.u_conv.mac_i) macs++;
    if (dut.lcc_swap) swaps++;
  end

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic tm_write(input int a, input logic [255:0] d);
    @(negedge clk);
    tb_en = 1; tb_we = 1; tb_addr = TM_AW'(a); tb_wdata = d;
    rm[a] = d;
    @(negedge clk);
    tb_en = 0; tb_we = 0;
  endtask

  function automatic logic [255:0] rnd_word();
    return {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
  endfunction

  // compare a range of memory with the model
  task automatic compare(input int lo, input int hi, input string what);
    int bad;
    bad = 0;
    for (int a = lo; a < hi; a++) begin
      @(negedge clk);
      tb_en = 1; tb_we = 0; tb_addr = TM_AW'(a);
      @(negedge clk);
      tb_en = 0;
      if (t_rdata[0] !== rm[a]) begin
        bad++;
        if (bad < 4) $display("%s: word %0d\n  got %h\n  exp %h", what, a, t_rdata[0], rm[a]);
      end
    end
    checks++;
    if (bad != 0) begin
      failures++;
      $display("%s: %0d words differ", what, bad);
    end
  endtask

  task automatic exec(input instr_t i, input string what);
    int m0;
    m0 = macs;
    @(negedge clk);
    tb_own = 0; instr = i; start = 1;
    @(negedge clk);
    start = 0;
    wait (done);
    @(negedge clk);
    tb_own = 1;
    ncp_ref_pkg::run(i);
    compare(4096, 8192, what);
    compare(30720, 31744, what);
    if (i.opcode == OP_CONV) begin
      checks++;
      if (macs - m0 != int'(i.cout) / TOC * (int'(i.h) * int'(i.w) / THW) * int'(i.cin)
                       / (i.k3 && i.stride2 ? 4 : 1) * (i.k3 ? 9 : 1)) begin
        failures++;
        $display("%s: %0d MAC-array cycles", what, macs - m0);
      end
    end
  endtask

  function automatic instr_t mk(input opcode_e op, input int src0, input int src1,
      input int src2, input int dst, input int h, input int w, input int cin,
      input int cout, input bit bn, input bit relu, input bit il, input bit s2,
      input bit res, input int aux);
    instr_t i;
    i = '0;
    i.opcode = op; i.src0 = TM_AW'(src0); i.src1 = TM_AW'(src1); i.src2 = TM_AW'(src2);
    i.dst = TM_AW'(dst); i.h = 9'(h); i.w = 9'(w); i.cin = 10'(cin); i.cout = 10'(cout);
    i.bn = bn; i.relu = relu; i.out_il = il; i.stride2 = s2; i.res_add = res;
    i.aux = 16'(aux);
    return i;
  endfunction

  localparam int B0 = 0, B1 = 4096, B2 = 8192, B3 = 16384, BI = 24576, BO = 30720;

  initial begin
    start = 0; instr = '0; tb_own = 1; tb_en = 0; tb_we = 0; tb_addr = '0; tb_wdata = '0;
    for (int a = 0; a < TM_WORDS; a++) rm[a] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // contents
    for (int a = B1; a < B1 + 4096; a++) tm_write(a, '0);
    for (int a = BO; a < BO + 1024; a++) tm_write(a, '0);
    for (int a = B0; a < B0 + 2600; a++) tm_write(a, rnd_word());
    for (int a = B2; a < B2 + 1700; a++) tm_write(a, rnd_word());
    for (int a = BI; a < BI + 300; a++) tm_write(a, rnd_word());
    // BN tables: 128 channels, table A with scales 2^-12..2^-8 (convolutions),
    // table B with scales 2^-3..2^0 (element-wise and depthwise)
    for (int t = 0; t < 2; t++)
      for (int wd = 0; wd < 32; wd++) begin
        logic [255:0] d;
        for (int j = 0; j < 4; j++) begin
          d[64*j +: 32]      = (t == 0) ? rand_f(-12, -8, 0) : rand_f(-7, 0, 0);
          d[64*j + 32 +: 32] = rand_f(-3, 5, 0);
        end
        tm_write(B3 + 64 * t + wd, d);
      end

    exec(mk(OP_MOVE, B0 + 5, 0, 0, B1 + 7, 0, 0, 0, 0, 0, 0, 0, 0, 0, 40), "move");
    exec(mk(OP_CONV, B0, B2, B3, B1, 8, 8, 32, 32, 1, 1, 0, 0, 0, 0), "conv pm bn relu");
    exec(mk(OP_CONV, B0, B2 + 100, B3, B1 + 300, 8, 8, 48, 48, 1, 0, 1, 0, 1, B0 + 2000),
         "conv il bn residual");
    exec(mk(OP_CONV, B0 + 64, B2, B3, BO, 4, 8, 16, 16, 0, 0, 0, 0, 1, B0 + 900),
         "conv pm residual no bn");
    begin
      instr_t k;
      k = mk(OP_CONV, BI + 7, B2 + 600, B3, B1 + 2000, 4, 64, 3, 32, 1, 1, 0, 0, 0, 0);
      k.k3 = 1'b1;
      exec(k, "conv 3x3 s1 pm bn relu");
      k = mk(OP_CONV, BI, B2 + 700, B3, B1 + 2400, 8, 64, 3, 32, 1, 0, 1, 1, 0, 0);
      k.k3 = 1'b1;
      exec(k, "conv 3x3 s2 il bn");
    end
    exec(mk(OP_DWCONV, B0, B2 + 300, B3 + 64, B1 + 600, 8, 8, 32, 0, 1, 1, 1, 0, 1, BI),
         "dwconv s1 il residual");
    exec(mk(OP_DWCONV, B0 + 200, B2 + 400, B3 + 64, B1 + 800, 16, 8, 64, 0, 1, 0, 0, 1, 0, 0),
         "dwconv s2 pm");
    exec(mk(OP_DWCONV, B0 + 7, B2 + 500, B3 + 64, B1 + 1000, 8, 8, 32, 0, 1, 1, 0, 0, 0, 0),
         "dwconv s1 pm");
    exec(mk(OP_BN, B0 + 11, 0, B3 + 64, B1 + 1200, 8, 8, 20, 0, 0, 0, 0, 0, 0, 0), "bn");
    exec(mk(OP_RELU, B0 + 13, 0, 0, B1 + 1300, 8, 8, 8, 0, 0, 0, 0, 0, 0, 0), "relu");
    exec(mk(OP_ADD, B0 + 17, BI + 5, B3 + 64, B1 + 1400, 8, 8, 8, 0, 1, 1, 0, 0, 0, 0),
         "add bn relu");
    exec(mk(OP_MAXP, B0 + 19, 0, 0, B1 + 1500, 8, 8, 64, 0, 0, 0, 0, 0, 0, 0), "maxp");
    exec(mk(OP_DSAM, B0 + 23, 0, 0, B1 + 1600, 8, 4, 32, 0, 0, 0, 0, 0, 0, 0), "dsam");
    exec(mk(OP_USAM, B0 + 29, 0, 0, B1 + 1700, 4, 4, 32, 0, 0, 0, 0, 0, 0, 0), "usam");
    exec(mk(OP_GAP, B0 + 31, 0, 0, BO + 500, 8, 8, 64, 0, 0, 0, 0, 0, 0, 0), "gap");

    checks++;
    if (swaps < 4) begin
      failures++;
      $display("layout converter swapped only %0d times", swaps);
    end
    $display("layout converter swaps: %0d", swaps);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
