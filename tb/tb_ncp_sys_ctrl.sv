// tb_ncp_sys_ctrl: self-checking test of the system controller.
//
// A behavioural instruction memory holds a short program with neural
// instructions, a jump, a suspend and an end; a stand-in NOU answers each
// start with `done` after a random number of cycles. The testbench checks
// the order of the instructions handed to the NOU, that it is started once
// per neural instruction and only when idle, that `sup` stops and a new start
// resumes after it, that `end` stops and resets PC to 0, the tensor-memory
// ownership signal, and the number of cycles per instruction.
module tb_ncp_sys_ctrl;
  import ncp_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, im_re, nou_start, nou_done, tm_sel, running, ended;
  logic [IM_AW-1:0] pc;
  instr_t im_q, nou_instr;
  instr_t prog [IM_DEPTH];

  ncp_sys_ctrl dut (
    .clk, .rst_n, .start_i(start), .im_re_o(im_re), .pc_o(pc), .im_rdata_i(im_q),
    .nou_start_o(nou_start), .nou_instr_o(nou_instr), .nou_done_i(nou_done),
    .tm_sel_o(tm_sel), .running_o(running), .ended_o(ended)
  );

  // instruction memory model: one-cycle read
  always @(posedge clk) if (im_re) im_q <= prog[pc];

  // NOU stand-in
  int busy_left = 0;
  int started [$];
  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  always @(posedge clk) begin
    nou_done <= 1'b0;
    if (nou_start) begin
      if (busy_left != 0) begin failures++; $display("NOU started while busy"); end
      started.push_back(int'(nou_instr.dst));
      busy_left <= 1 + int'($urandom % 20);
    end else if (busy_left > 0) begin
      busy_left <= busy_left - 1;
      if (busy_left == 1) nou_done <= 1'b1;
    end
  end

  function automatic instr_t mk(input opcode_e op, input int tag);
    instr_t i;
    i = '0; i.opcode = op; i.dst = TM_AW'(tag);
    return i;
  endfunction

  task automatic expect_eq(input int got, input int exp, input string what);
    checks++;
    if (got != exp) begin
      failures++;
      $display("%s: got %0d exp %0d", what, got, exp);
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t0;
    foreach (prog[i]) prog[i] = mk(OP_END, 0);
    prog[0] = mk(OP_CONV, 100);
    prog[1] = mk(OP_DWCONV, 101);
    prog[2] = mk(OP_JUMP, 5);
    prog[3] = mk(OP_BN, 999);      // skipped by the jump
    prog[5] = mk(OP_ADD, 105);
    prog[6] = mk(OP_SUP, 0);
    prog[7] = mk(OP_GAP, 107);
    prog[8] = mk(OP_END, 0);
    start = 0; nou_done = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    expect_eq(int'(tm_sel), 0, "I/O owns TM when halted");
    start = 1; @(negedge clk); start = 0;
    expect_eq(int'(tm_sel), 1, "NOU owns TM when running");
    wait (!running);
    @(negedge clk);
    expect_eq(started.size(), 3, "instructions before sup");
    expect_eq(started[0], 100, "first"); expect_eq(started[1], 101, "second");
    expect_eq(started[2], 105, "after jump");
    expect_eq(int'(pc), 7, "PC after sup");
    expect_eq(int'(ended), 0, "sup is not end");
    expect_eq(int'(tm_sel), 0, "TM back to I/O");
    // resume
    start = 1; @(negedge clk); start = 0;
    wait (!running);
    @(negedge clk);
    expect_eq(started.size(), 4, "instructions after resume");
    expect_eq(started[3], 107, "resumed instruction");
    expect_eq(int'(pc), 0, "PC reset by end");
    expect_eq(int'(ended), 1, "end flag");
    // control instructions take two cycles each: jump then end
    prog[0] = mk(OP_JUMP, 9);
    prog[9] = mk(OP_END, 0);
    start = 1; t0 = cyc; @(negedge clk); start = 0;
    wait (!running);
    expect_eq(cyc - t0, 5, "cycles for jump + end");
    expect_eq(started.size(), 4, "no NOU start for control instructions");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
