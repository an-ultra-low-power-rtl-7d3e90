// ncp_inst_mem: the 2 KB instruction memory (IM).
//
// DEPTH = 128 instructions of 128 bits (2 KB, the paper's size) holding the
// CNN program. The host writes it through the I/O block before inference; the
// system controller reads the instruction at the program counter. One write
// port and one read port; a read returns the word at the next clock edge.
// The two-port organisation is this design's choice.
module ncp_inst_mem #(
  parameter int DEPTH = 128,
  parameter int W     = 128
) (
  input  logic                     clk,
  input  logic                     we_i,
  input  logic [$clog2(DEPTH)-1:0] waddr_i,
  input  logic [W-1:0]             wdata_i,
  input  logic                     re_i,
  input  logic [$clog2(DEPTH)-1:0] raddr_i,
  output logic [W-1:0]             rdata_o
);

  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we_i) mem[waddr_i] <= wdata_i;
    if (re_i) rdata_o <= mem[raddr_i];
  end

endmodule
