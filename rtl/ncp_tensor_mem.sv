// ncp_tensor_mem: the 992 KB tensor memory (TM).
//
// Six single-port banks of TTM-byte words share one word address space in
// the order Bank0 (128 KB), Bank1 (128 KB), Bank2 (256 KB), Bank3 (256 KB),
// BankI (192 KB) and BankO (32 KB); the sizes and roles are the paper's.
// Feature maps ping-pong between Bank0 and Bank1, weights and BN tables sit
// in Bank2/Bank3, the input image in BankI and results in BankO.
//
// The memory offers NP request ports. Each bank is single-port and serves at
// most one of them per cycle, so one cycle can read a feature, read a weight
// and write a result when they lie in three different banks; this is how the
// NOU keeps its arrays busy. Two ports addressing the same bank in one cycle
// is a usage error flagged by an assertion; the lower-numbered port wins.
// Reads return data one cycle after the request. The multi-port bank
// crossbar is this design's reading of "a single-port SRAM consisting of 6
// banks"; the paper shows one addr/data/wr_en/rd_en interface.
module ncp_tensor_mem
  import ncp_pkg::*;
#(
  parameter int NP = 3,
  parameter int W  = TTM * 8
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [NP-1:0]    en_i,
  input  logic [NP-1:0]    we_i,
  input  logic [TM_AW-1:0] addr_i  [NP],
  input  logic [W-1:0]     wdata_i [NP],
  input  logic [W/8-1:0]   be_i    [NP],
  output logic [W-1:0]     rdata_o [NP]
);

  localparam int NB = 6;
  localparam int DEPTHS [NB] = '{BANK0_WORDS, BANK1_WORDS, BANK2_WORDS,
                                 BANK3_WORDS, BANKI_WORDS, BANKO_WORDS};
  localparam int BASES  [NB] = '{0, 4096, 8192, 16384, 24576, 30720};

  logic [W-1:0] bank_q [NB];
  logic [2:0]   bank_of [NP];
  logic [2:0]   rsel_q  [NP];

  for (genvar p = 0; p < NP; p++) begin : g_port
    assign bank_of[p] = tm_bank(addr_i[p]);
    always_ff @(posedge clk) rsel_q[p] <= bank_of[p];
    assign rdata_o[p] = bank_q[rsel_q[p]];
  end

  for (genvar b = 0; b < NB; b++) begin : g_bank
    localparam int DEPTH = DEPTHS[b];
    localparam int AW    = $clog2(DEPTH);
    logic             en, we;
    logic [TM_AW-1:0] a;
    logic [W-1:0]     wd;
    logic [W/8-1:0]   be;
    logic [NP-1:0]    hit;

    always_comb begin
      en = 1'b0; we = 1'b0; a = '0; wd = '0; be = '0;
      for (int p = NP - 1; p >= 0; p--) begin
        hit[p] = en_i[p] && (bank_of[p] == 3'(b));
        if (hit[p]) begin
          en = 1'b1; we = we_i[p]; a = addr_i[p] - TM_AW'(BASES[b]);
          wd = wdata_i[p]; be = be_i[p];
        end
      end
    end

    ncp_sram_bank #(.DEPTH(DEPTH), .W(W)) u_bank (
      .clk(clk), .en_i(en), .we_i(we), .addr_i(a[AW-1:0]),
      .wdata_i(wd), .be_i(be), .rdata_o(bank_q[b])
    );

    // A single-port bank takes at most one access per cycle.
    a_one_access: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(hit))
      else $error("tensor memory: two ports access bank %0d in one cycle", b);
  end

endmodule
