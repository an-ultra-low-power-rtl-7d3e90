// ncp_sram_bank: one single-port SRAM bank of the tensor memory.
//
// DEPTH words of W bits with a byte write mask. One access per cycle: a
// write stores the enabled bytes of `wdata_i`; a read returns the word on
// `rdata_o` at the next clock edge. Written as an array so that a memory
// compiler macro can replace it; the byte mask is this design's choice.
module ncp_sram_bank #(
  parameter int DEPTH = 4096,
  parameter int W     = 256
) (
  input  logic                     clk,
  input  logic                     en_i,
  input  logic                     we_i,
  input  logic [$clog2(DEPTH)-1:0] addr_i,
  input  logic [W-1:0]             wdata_i,
  input  logic [W/8-1:0]           be_i,
  output logic [W-1:0]             rdata_o
);

  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (en_i) begin
      if (we_i) begin
        for (int b = 0; b < W / 8; b++)
          if (be_i[b]) mem[addr_i][8*b +: 8] <= wdata_i[8*b +: 8];
      end else begin
        rdata_o <= mem[addr_i];
      end
    end
  end

endmodule
