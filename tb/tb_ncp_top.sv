// tb_ncp_top: end-to-end test of the neural co-processor at full size.
//
// Plays the host: through the word-level host port it clears the 992 KB
// tensor memory, loads an input image, weights, depthwise kernels and BN
// tables, and writes a CNN program in the style of the paper's network (a
// 3x3 stride-2 stem convolution, max pooling, then a linear depthwise block DWConv-BN / PWConv-BN-ReLU /
// DWConv-BN-ReLU, a jump over a trap, a suspend, then a dense block with a
// residual addition, global average pooling, a move of the result into
// BankO and an end). One instruction is written and the program is started
// through SPI, and the status is read through SPI. At the suspend and at the
// end the testbench reads the whole tensor memory back and compares it with
// the golden model run over the same instructions.
//
// Counted mechanisms (each must happen): jump, suspend, end, resume, tensor
// memory hand-over between I/O and NOU, layout converter ping-pong swap,
// 3x3 (im2col) convolution step,
// residual addition, fused BN, SPI command, host port access.
module tb_ncp_top;
  import ncp_pkg::*;
  import ncp_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic sck, cs_n, mosi, miso;
  logic h_req, h_we, h_im, h_run, h_ready, h_rvalid;
  logic [TM_AW-1:0] h_addr;
  logic [255:0] h_wdata, h_rdata;
  logic running, ended;

  ncp_top dut (
    .clk, .rst_n, .spi_sck_i(sck), .spi_cs_n_i(cs_n), .spi_mosi_i(mosi), .spi_miso_o(miso),
    .host_req_i(h_req), .host_we_i(h_we), .host_im_i(h_im), .host_run_i(h_run),
    .host_addr_i(h_addr), .host_wdata_i(h_wdata), .host_ready_o(h_ready),
    .host_rvalid_o(h_rvalid), .host_rdata_o(h_rdata), .running_o(running), .ended_o(ended)
  );

  int checks = 0, failures = 0;

  // mechanism counters
  int n_jump = 0, n_sup = 0, n_end = 0, n_resume = 0, n_handover = 0, n_swap = 0;
  int n_res = 0, n_bn = 0, n_spi = 0, n_host = 0, n_k3 = 0;
  logic sel_q = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.u_sc.st == 2'd2) begin            // decode state
      if (dut.u_sc.im_rdata_i.opcode == OP_JUMP) n_jump++;
      if (dut.u_sc.im_rdata_i.opcode == OP_SUP)  n_sup++;
      if (dut.u_sc.im_rdata_i.opcode == OP_END)  n_end++;
    end
    if (dut.u_nou.u_lcc.swap_o) n_swap++;
    if (dut.u_nou.u_conv.mac_i && dut.u_nou.ins.k3) n_k3++;
    if (dut.u_nou.u_post.valid_i && dut.u_nou.u_post.res_en_i) n_res++;
    if (dut.u_nou.u_post.valid_i && dut.u_nou.u_post.bn_i) n_bn++;
    sel_q <= dut.tm_sel;
    if (sel_q != dut.tm_sel) n_handover++;
    if (h_req) n_host++;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------ host port
  task automatic host_wr(input int a, input logic [255:0] d, input bit im = 0);
    @(negedge clk);
    while (!h_ready) @(negedge clk);
    h_req = 1; h_we = 1; h_im = im; h_addr = TM_AW'(a); h_wdata = d;
    if (!im) rm[a] = d;
    @(negedge clk);
    h_req = 0; h_we = 0; h_im = 0;
  endtask

  task automatic host_rd(input int a, output logic [255:0] d);
    @(negedge clk);
    h_req = 1; h_we = 0; h_addr = TM_AW'(a);
    @(negedge clk);
    h_req = 0;
    d = h_rdata;
  endtask

  task automatic host_run();
    @(negedge clk);
    h_req = 1; h_run = 1;
    @(negedge clk);
    h_req = 0; h_run = 0;
  endtask

  // ------------------------------------------------------------ SPI master
  task automatic spi_byte(input logic [7:0] tx, output logic [7:0] rx);
    for (int b = 7; b >= 0; b--) begin
      mosi = tx[b];
      repeat (4) @(posedge clk);
      sck = 1; rx[b] = miso;
      repeat (4) @(posedge clk);
      sck = 0;
    end
  endtask

  task automatic spi_xfer(input logic [7:0] tx [], output logic [7:0] rx []);
    rx = new[tx.size()];
    cs_n = 0;
    repeat (4) @(posedge clk);
    foreach (tx[i]) spi_byte(tx[i], rx[i]);
    repeat (4) @(posedge clk);
    cs_n = 1;
    repeat (8) @(posedge clk);
    n_spi++;
  endtask

  // ------------------------------------------------------------ helpers
  function automatic logic [255:0] rnd_word();
    return {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
  endfunction

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

  task automatic compare_all(input string what);
    logic [255:0] d;
    int bad;
    bad = 0;
    for (int a = 0; a < TM_WORDS; a++) begin
      host_rd(a, d);
      if (d !== rm[a]) begin
        bad++;
        if (bad < 4) $display("%s: word %0d\n  got %h\n  exp %h", what, a, d, rm[a]);
      end
    end
    checks++;
    if (bad != 0) begin
      failures++;
      $display("%s: %0d words differ", what, bad);
    end
  endtask

  localparam int B0 = 0, B1 = 4096, B2 = 8192, B3 = 16384, BI = 24576, BO = 30720;

  instr_t prog [16];
  int     nprog;

  initial begin
    logic [7:0] tx [], rx [];
    sck = 0; cs_n = 1; mosi = 0;
    h_req = 0; h_we = 0; h_im = 0; h_run = 0; h_addr = '0; h_wdata = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // clear the memory, then load data
    for (int a = 0; a < TM_WORDS; a++) host_wr(a, '0);
    for (int a = B0; a < B0 + 256; a++) host_wr(a, rnd_word());   // 16x16x32 interleaved
    for (int a = BI; a < BI + 192; a++) host_wr(a, rnd_word());   // 32x64x3 pixel-major
    for (int a = B2; a < B2 + 400; a++) host_wr(a, rnd_word());   // weights and kernels
    for (int t = 0; t < 2; t++)
      for (int wd = 0; wd < 8; wd++) begin
        logic [255:0] d;
        for (int j = 0; j < 4; j++) begin
          d[64*j +: 32]      = (t == 0) ? rand_f(-12, -8, 0) : rand_f(-7, -1, 0);
          d[64*j + 32 +: 32] = rand_f(-3, 5, 0);
        end
        host_wr(B3 + 64 * t + wd, d);
      end

    // program: table 0 of BN (B3) for 1x1 convolutions, table 1 (B3+64) otherwise
    prog[0]  = mk(OP_CONV,   BI, B2 + 300, B3, B0, 32, 64, 3, 32, 1, 1, 1, 1, 0, 0);
    prog[0].k3 = 1'b1;                                           // 3x3 stride-2 stem
    prog[1]  = mk(OP_MAXP,   B0, 0, 0, B1, 16, 32, 32, 0, 0, 0, 0, 0, 0, 0);
    prog[2]  = mk(OP_DWCONV, B1, B2, B3 + 64, B0 + 1000, 8, 16, 32, 0, 1, 0, 0, 0, 0, 0);
    prog[3]  = mk(OP_CONV,   B0 + 1000, B2 + 20, B3, B1 + 200, 8, 16, 32, 32, 1, 1, 1, 0, 0, 0);
    prog[4]  = mk(OP_DWCONV, B1 + 200, B2 + 10, B3 + 64, B0 + 2000, 8, 16, 32, 0, 1, 1, 1, 0, 0, 0);
    prog[5]  = mk(OP_JUMP,   0, 0, 0, 7, 0, 0, 0, 0, 0, 0, 0, 0, 0, 0);
    prog[6]  = mk(OP_MOVE,   B2, 0, 0, B0 + 2000, 0, 0, 0, 0, 0, 0, 0, 0, 0, 64); // trap
    prog[7]  = mk(OP_SUP,    0, 0, 0, 0, 0, 0, 0, 0, 0, 0, 0, 0, 0, 0);
    prog[8]  = mk(OP_DWCONV, B0 + 2000, B2 + 100, B3 + 64, B1 + 400, 8, 16, 32, 0, 1, 0, 0, 0, 0, 0);
    prog[9]  = mk(OP_CONV,   B1 + 400, B2 + 120, B3, BI + 1000, 8, 16, 32, 32, 1, 1, 1, 0, 1, B0 + 2000);
    prog[10] = mk(OP_GAP,    BI + 1000, 0, 0, B1 + 600, 8, 16, 32, 0, 0, 0, 0, 0, 0, 0);
    prog[11] = mk(OP_MOVE,   B1 + 600, 0, 0, BO, 0, 0, 0, 0, 0, 0, 0, 0, 0, 1);
    prog[12] = mk(OP_END,    0, 0, 0, 0, 0, 0, 0, 0, 0, 0, 0, 0, 0, 0);
    nprog = 13;

    // instruction 0 through SPI, the rest through the host port
    tx = new[19];
    tx[0] = 8'h03; tx[1] = 0; tx[2] = 0;
    for (int b = 0; b < 16; b++) tx[3 + b] = prog[0][8*b +: 8];
    spi_xfer(tx, rx);
    for (int i = 1; i < nprog; i++) host_wr(i, 256'(prog[i]), 1);

    // run to the suspend, started through SPI
    tx = new[1]; tx[0] = 8'h04;
    spi_xfer(tx, rx);
    checks++;
    if (!running) begin failures++; $display("not running after SPI RUN"); end
    wait (!running);
    for (int i = 0; i < 5; i++) ncp_ref_pkg::run(prog[i]);
    tx = new[3]; tx[0] = 8'h05; tx[1] = 0; tx[2] = 0;
    spi_xfer(tx, rx);
    checks++;
    if (rx[2] != 8'h00) begin failures++; $display("status after sup: %h", rx[2]); end
    compare_all("after sup");

    // resume to the end
    n_resume++;
    host_run();
    wait (!running);
    for (int i = 8; i < 12; i++) ncp_ref_pkg::run(prog[i]);
    checks++;
    if (!ended || dut.u_sc.pc != 0) begin
      failures++; $display("end: ended=%0d pc=%0d", ended, dut.u_sc.pc);
    end
    compare_all("after end");

    $display("mechanisms: jump %0d sup %0d end %0d resume %0d handover %0d swap %0d",
             n_jump, n_sup, n_end, n_resume, n_handover, n_swap);
    $display("            residual %0d bn %0d spi %0d host %0d 3x3-MAC %0d", n_res, n_bn,
             n_spi, n_host, n_k3);
    checks += 11;
    if (n_jump == 0)     begin failures++; $display("no jump"); end
    if (n_sup == 0)      begin failures++; $display("no suspend"); end
    if (n_end == 0)      begin failures++; $display("no end"); end
    if (n_resume == 0)   begin failures++; $display("no resume"); end
    if (n_handover == 0) begin failures++; $display("no hand-over"); end
    if (n_swap == 0)     begin failures++; $display("no ping-pong swap"); end
    if (n_res == 0)      begin failures++; $display("no residual"); end
    if (n_bn == 0)       begin failures++; $display("no BN"); end
    if (n_spi == 0)      begin failures++; $display("no SPI"); end
    if (n_host == 0)     begin failures++; $display("no host access"); end
    if (n_k3 == 0)       begin failures++; $display("no 3x3 convolution"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
