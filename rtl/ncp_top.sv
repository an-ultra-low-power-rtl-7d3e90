// ncp_top: the neural co-processor (NCP).
//
// The NCP runs the convolutional backbone of a tiny CNN entirely from on-chip
// memory, next to a host microcontroller that does pre- and post-processing.
// Its five parts are wired as in the paper's block diagram:
//   IO    SPI slave and a word-level host port (for an external SDIO core)
//   IM    2 KB instruction memory holding the CNN program
//   SC    system controller with the program counter
//   NOU   neural operation unit: layer sequencer, NOU-conv, NOU-dw,
//         NOU-post and the layout conversion circuit
//   TM    992 KB tensor memory in six banks
// A two-input multiplexer in front of the tensor memory gives it to the I/O
// block (select 0) while the controller is suspended and to the NOU (select
// 1) while a program runs, as in the diagram. The NOU additionally uses two
// more bank ports for its weight read and result write streams.
//
// Use: the host writes weights, BN tables and the image into TM and the
// program into IM, issues RUN and polls `running_o` (or the SPI status
// command) until the program reaches `sup` or `end`, then reads the results.
module ncp_top
  import ncp_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  // SPI link to the host
  input  logic             spi_sck_i,
  input  logic             spi_cs_n_i,
  input  logic             spi_mosi_i,
  output logic             spi_miso_o,
  // word-level host port (SDIO device core side)
  input  logic             host_req_i,
  input  logic             host_we_i,
  input  logic             host_im_i,
  input  logic             host_run_i,
  input  logic [TM_AW-1:0] host_addr_i,
  input  logic [TTM*8-1:0] host_wdata_i,
  output logic             host_ready_o,
  output logic             host_rvalid_o,
  output logic [TTM*8-1:0] host_rdata_o,
  // status
  output logic             running_o,
  output logic             ended_o
);

  localparam int W = TTM * 8;

  // IO
  logic             run;
  logic             im_we;
  logic [IM_AW-1:0] im_waddr;
  logic [127:0]     im_wdata;
  logic             io_en, io_we;
  logic [TM_AW-1:0] io_addr;
  logic [W-1:0]     io_wdata;

  // SC / IM
  logic             im_re;
  logic [IM_AW-1:0] pc;
  logic [127:0]     im_rdata;
  logic             nou_start, nou_done, nou_busy, tm_sel;
  instr_t           nou_instr;

  // TM
  logic [2:0]       n_en, n_we, t_en, t_we;
  logic [TM_AW-1:0] n_addr [3], t_addr [3];
  logic [W-1:0]     n_wdata [3], t_wdata [3], t_rdata [3];
  logic [W/8-1:0]   n_be [3], t_be [3];

  ncp_io u_io (
    .clk(clk), .rst_n(rst_n),
    .spi_sck_i(spi_sck_i), .spi_cs_n_i(spi_cs_n_i), .spi_mosi_i(spi_mosi_i),
    .spi_miso_o(spi_miso_o),
    .host_req_i(host_req_i), .host_we_i(host_we_i), .host_im_i(host_im_i),
    .host_run_i(host_run_i), .host_addr_i(host_addr_i), .host_wdata_i(host_wdata_i),
    .host_ready_o(host_ready_o), .host_rvalid_o(host_rvalid_o), .host_rdata_o(host_rdata_o),
    .running_i(running_o), .ended_i(ended_o), .run_o(run),
    .im_we_o(im_we), .im_addr_o(im_waddr), .im_wdata_o(im_wdata),
    .tm_en_o(io_en), .tm_we_o(io_we), .tm_addr_o(io_addr), .tm_wdata_o(io_wdata),
    .tm_rdata_i(t_rdata[0])
  );

  ncp_inst_mem u_im (
    .clk(clk), .we_i(im_we), .waddr_i(im_waddr), .wdata_i(im_wdata),
    .re_i(im_re), .raddr_i(pc), .rdata_o(im_rdata)
  );

  ncp_sys_ctrl u_sc (
    .clk(clk), .rst_n(rst_n), .start_i(run), .im_re_o(im_re), .pc_o(pc),
    .im_rdata_i(instr_t'(im_rdata)), .nou_start_o(nou_start), .nou_instr_o(nou_instr),
    .nou_done_i(nou_done), .tm_sel_o(tm_sel), .running_o(running_o), .ended_o(ended_o)
  );

  ncp_nou u_nou (
    .clk(clk), .rst_n(rst_n), .start_i(nou_start), .instr_i(nou_instr),
    .busy_o(nou_busy), .done_o(nou_done),
    .tm_en_o(n_en), .tm_we_o(n_we), .tm_addr_o(n_addr), .tm_wdata_o(n_wdata),
    .tm_be_o(n_be), .tm_rdata_i(t_rdata)
  );

  // I/O-NOU multiplexer in front of the tensor memory
  always_comb begin
    for (int p = 0; p < 3; p++) begin
      t_en[p]    = tm_sel && n_en[p];
      t_we[p]    = n_we[p];
      t_addr[p]  = n_addr[p];
      t_wdata[p] = n_wdata[p];
      t_be[p]    = n_be[p];
    end
    if (!tm_sel) begin
      t_en[0]    = io_en;
      t_we[0]    = io_we;
      t_addr[0]  = io_addr;
      t_wdata[0] = io_wdata;
      t_be[0]    = '1;
    end
  end

  ncp_tensor_mem #(.NP(3)) u_tm (
    .clk(clk), .rst_n(rst_n), .en_i(t_en), .we_i(t_we), .addr_i(t_addr),
    .wdata_i(t_wdata), .be_i(t_be), .rdata_o(t_rdata)
  );

  // The NOU only works while the controller owns the tensor memory.
  a_nou_owns_tm: assert property (@(posedge clk) disable iff (!rst_n) nou_busy |-> tm_sel);

endmodule
