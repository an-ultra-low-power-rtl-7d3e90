// tb_ncp_tensor_mem: self-checking test of the six-bank tensor memory.
//
// Writes random words with random byte masks at random addresses of every
// bank (including each bank's first and last word) through all three ports,
// with up to three accesses per cycle to different banks, and reads them
// back, checking the data against a model and the one-cycle read latency.
module tb_ncp_tensor_mem;
  import ncp_pkg::*;
  localparam int NP = 3, W = 256, WORDS = 31744;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [NP-1:0]    en, we;
  logic [TM_AW-1:0] addr [NP];
  logic [W-1:0]     wdata [NP], rdata [NP];
  logic [W/8-1:0]   be [NP];

  ncp_tensor_mem #(.NP(NP)) dut (
    .clk, .rst_n, .en_i(en), .we_i(we), .addr_i(addr), .wdata_i(wdata), .be_i(be),
    .rdata_o(rdata)
  );

  int checks = 0, failures = 0;
  logic [W-1:0] model [int];
  int bases [7] = '{0, 4096, 8192, 16384, 24576, 30720, 31744};

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int pick(input int b);
    int r;
    r = int'($urandom % 4);
    if (r == 0) return bases[b];
    if (r == 1) return bases[b + 1] - 1;
    return bases[b] + int'($urandom % 32'(bases[b + 1] - bases[b]));
  endfunction

  initial begin
    int used [$];
    en = '0; we = '0;
    foreach (addr[p]) begin addr[p] = '0; wdata[p] = '0; be[p] = '0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    // write phase: each cycle up to NP accesses to distinct banks
    for (int n = 0; n < 400; n++) begin
      int bank [NP];
      int a;
      @(negedge clk);
      bank[0] = int'($urandom % 6);
      bank[1] = (bank[0] + 1 + int'($urandom % 5)) % 6;
      do bank[2] = int'($urandom % 6); while (bank[2] == bank[0] || bank[2] == bank[1]);
      for (int p = 0; p < NP; p++) begin
        a = pick(bank[p]);
        en[p] = ($urandom % 4) != 0; we[p] = 1;
        addr[p] = TM_AW'(a);
        wdata[p] = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
        be[p] = (n < 100) ? '1 : {$urandom};
        if (en[p]) begin
          logic [W-1:0] m;
          m = model.exists(a) ? model[a] : '0;
          if (!model.exists(a)) be[p] = '1;   // first write fills the word
          for (int b = 0; b < W / 8; b++) if (be[p][b]) m[8*b +: 8] = wdata[p][8*b +: 8];
          model[a] = m;
        end
      end
    end
    @(negedge clk) en = '0;
    // read phase: port p reads while other ports read other banks
    foreach (model[a]) used.push_back(a);
    for (int i = 0; i < used.size(); i++) begin
      int p;
      p = i % NP;
      @(negedge clk);
      en = '0; we = '0;
      en[p] = 1; addr[p] = TM_AW'(used[i]);
      @(negedge clk);
      en = '0;
      checks++;
      if (rdata[p] !== model[used[i]]) begin
        failures++;
        if (failures < 10) $display("addr %0d port %0d: %h vs %h", used[i], p, rdata[p],
                                    model[used[i]]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
