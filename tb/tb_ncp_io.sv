// tb_ncp_io: self-checking test of the host interface.
//
// A behavioural SPI master (mode 0, SCK = clk / 8) writes tensor-memory words
// and instructions, reads words back, sends RUN and reads the status byte;
// the host port writes and reads words directly. A behavioural tensor memory
// and instruction memory sit behind the block. Checks the stored data, the
// returned data, the RUN pulse, and that accesses wait while the controller
// is running.
module tb_ncp_io;
  import ncp_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic sck, cs_n, mosi, miso;
  logic h_req, h_we, h_im, h_run, h_ready, h_rvalid;
  logic [TM_AW-1:0] h_addr;
  logic [255:0] h_wdata, h_rdata;
  logic running, ended, run, im_we, tm_en, tm_we;
  logic [IM_AW-1:0] im_addr;
  logic [127:0] im_wdata;
  logic [TM_AW-1:0] tm_addr;
  logic [255:0] tm_wdata, tm_rdata;

  ncp_io dut (
    .clk, .rst_n, .spi_sck_i(sck), .spi_cs_n_i(cs_n), .spi_mosi_i(mosi), .spi_miso_o(miso),
    .host_req_i(h_req), .host_we_i(h_we), .host_im_i(h_im), .host_run_i(h_run),
    .host_addr_i(h_addr), .host_wdata_i(h_wdata), .host_ready_o(h_ready),
    .host_rvalid_o(h_rvalid), .host_rdata_o(h_rdata),
    .running_i(running), .ended_i(ended), .run_o(run),
    .im_we_o(im_we), .im_addr_o(im_addr), .im_wdata_o(im_wdata),
    .tm_en_o(tm_en), .tm_we_o(tm_we), .tm_addr_o(tm_addr), .tm_wdata_o(tm_wdata),
    .tm_rdata_i(tm_rdata)
  );

  // behavioural memories
  logic [255:0] tm [32768];
  logic [127:0] im [128];
  int runs = 0;
  always @(posedge clk) begin
    if (tm_en && tm_we) tm[tm_addr] <= tm_wdata;
    if (tm_en && !tm_we) tm_rdata <= tm[tm_addr];
    if (im_we) im[im_addr] <= im_wdata;
    if (run) runs++;
    if ((tm_en || im_we) && running) begin
      failures++; $display("access while running");
    end
  end

  int checks = 0, failures = 0;
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

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
  endtask

  task automatic expect_eq(input logic [255:0] got, input logic [255:0] exp, input string w);
    checks++;
    if (got !== exp) begin failures++; $display("%s: %h vs %h", w, got, exp); end
  endtask

  initial begin
    logic [7:0] tx [], rx [];
    logic [255:0] d, g;
    logic [127:0] ins;
    sck = 0; cs_n = 1; mosi = 0; running = 0; ended = 0;
    h_req = 0; h_we = 0; h_im = 0; h_run = 0; h_addr = 0; h_wdata = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (4) @(posedge clk);
    // SPI writes and reads of TM words in several banks
    for (int n = 0; n < 4; n++) begin
      int a;
      a = (n == 0) ? 0 : (n == 3) ? 31743 : int'($urandom % 31744);
      d = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
      tx = new[35];
      tx[0] = 8'h01; tx[1] = 8'(a >> 8); tx[2] = 8'(a);
      for (int b = 0; b < 32; b++) tx[3 + b] = d[8*b +: 8];
      spi_xfer(tx, rx);
      expect_eq(tm[a], d, "SPI write to TM");
      tx = new[36];
      foreach (tx[i]) tx[i] = 0;
      tx[0] = 8'h02; tx[1] = 8'(a >> 8); tx[2] = 8'(a);
      spi_xfer(tx, rx);
      for (int b = 0; b < 32; b++) g[8*b +: 8] = rx[4 + b];
      expect_eq(g, d, "SPI read of TM");
    end
    // SPI instruction write
    ins = {$urandom, $urandom, $urandom, $urandom};
    tx = new[19];
    tx[0] = 8'h03; tx[1] = 0; tx[2] = 8'd77;
    for (int b = 0; b < 16; b++) tx[3 + b] = ins[8*b +: 8];
    spi_xfer(tx, rx);
    expect_eq(256'(im[77]), 256'(ins), "SPI write to IM");
    // status
    ended = 1;
    tx = new[3]; tx[0] = 8'h05; tx[1] = 0; tx[2] = 0;
    spi_xfer(tx, rx);
    expect_eq(256'(rx[2]), 256'(8'b10), "status byte");
    // RUN
    tx = new[1]; tx[0] = 8'h04;
    spi_xfer(tx, rx);
    expect_eq(256'(runs), 256'(1), "RUN pulse");
    // host port write, then a read
    @(negedge clk);
    h_req = 1; h_we = 1; h_addr = 15'd8200; h_wdata = {8{32'hcafe_0001}};
    @(negedge clk);
    h_req = 1; h_we = 0; h_addr = 15'd8200;
    @(negedge clk);
    h_req = 0;
    checks++;
    if (!h_rvalid) begin failures++; $display("no host read data"); end
    expect_eq(h_rdata, {8{32'hcafe_0001}}, "host read");
    // requests wait while the controller runs
    running = 1;
    d = {8{32'h1234_5678}};
    tx = new[35];
    tx[0] = 8'h01; tx[1] = 8'(100 >> 8); tx[2] = 8'(100);
    for (int b = 0; b < 32; b++) tx[3 + b] = d[8*b +: 8];
    spi_xfer(tx, rx);
    expect_eq(256'(h_ready), 0, "host not ready while running");
    expect_eq(tm[100] == d, 0, "write held while running");
    running = 0;
    repeat (3) @(posedge clk);
    expect_eq(tm[100], d, "held write done after running");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
