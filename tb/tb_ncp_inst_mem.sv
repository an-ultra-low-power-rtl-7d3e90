// tb_ncp_inst_mem: self-checking test of the 2 KB instruction memory.
//
// Fills all 128 entries with random instructions, rewrites some, and reads
// every entry back, checking the data and the one-cycle read latency, also
// while a write to another entry happens in the same cycle.
module tb_ncp_inst_mem;
  logic clk = 0;
  always #5 clk = ~clk;

  logic we, re;
  logic [6:0] waddr, raddr;
  logic [127:0] wdata, rdata;
  logic [127:0] model [128];

  ncp_inst_mem dut (.clk, .we_i(we), .waddr_i(waddr), .wdata_i(wdata), .re_i(re),
                    .raddr_i(raddr), .rdata_o(rdata));

  int checks = 0, failures = 0;
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; re = 0; waddr = 0; raddr = 0; wdata = 0;
    for (int i = 0; i < 128 + 40; i++) begin
      @(negedge clk);
      we = 1; waddr = (i < 128) ? 7'(i) : 7'($urandom);
      wdata = {$urandom, $urandom, $urandom, $urandom};
      model[waddr] = wdata;
    end
    @(negedge clk) we = 0;
    for (int i = 0; i < 128; i++) begin
      @(negedge clk);
      re = 1; raddr = 7'(i);
      we = 1; waddr = 7'(i + 64); wdata = model[7'(i + 64)];
      @(negedge clk);
      re = 0; we = 0;
      checks++;
      if (rdata !== model[i]) begin
        failures++;
        $display("entry %0d: %h vs %h", i, rdata, model[i]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
