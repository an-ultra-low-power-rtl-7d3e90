// ncp_io: host interface of the NCP (SPI slave and a word-level host port).
//
// The MCU loads the program and the weights, sends each input image, starts
// the co-processor and reads the results through this block. The paper names
// SDIO and SPI links only; the command set below and the word-level host
// port are this design's own. The host port is where an SDIO device core
// (not part of this RTL) would attach; SPI is decoded here.
//
// SPI: mode 0 (sample MOSI on the rising SCK edge, change MISO after the
// falling one), most significant bit first, one transaction per CS_N low
// period. SCK, CS_N and MOSI are synchronised into `clk`, which must run at
// least four times faster than SCK. Commands (first byte):
//   0x01 WR_TM  addr[15:8] addr[7:0] then TTM data bytes (byte 0 first)
//   0x02 RD_TM  addr[15:8] addr[7:0], one dummy byte, then TTM bytes are
//               returned on MISO (byte 0 first)
//   0x03 WR_IM  addr[15:8] addr[7:0] then 16 instruction bytes (bits 7:0 first)
//   0x04 RUN    start the system controller at its current PC
//   0x05 STAT   one dummy byte, then every further byte returned is
//               {6'b0, ended, running}
//
// Host port: a one-cycle `host_req_i` performs a TM or IM access
// (`host_im_i`) or, with `host_run_i`, a start. TM read data returns on
// `host_rdata_o` with `host_rvalid_o`. Accesses wait while the system
// controller runs (`host_ready_o` low); the host port takes precedence over
// SPI requests, which are held until served.
module ncp_io
  import ncp_pkg::*;
#(
  parameter int NB = TTM
) (
  input  logic             clk,
  input  logic             rst_n,
  // SPI
  input  logic             spi_sck_i,
  input  logic             spi_cs_n_i,
  input  logic             spi_mosi_i,
  output logic             spi_miso_o,
  // word-level host port (SDIO side)
  input  logic             host_req_i,
  input  logic             host_we_i,
  input  logic             host_im_i,
  input  logic             host_run_i,
  input  logic [TM_AW-1:0] host_addr_i,
  input  logic [NB*8-1:0]  host_wdata_i,
  output logic             host_ready_o,
  output logic             host_rvalid_o,
  output logic [NB*8-1:0]  host_rdata_o,
  // system controller
  input  logic             running_i,
  input  logic             ended_i,
  output logic             run_o,
  // instruction memory write
  output logic             im_we_o,
  output logic [IM_AW-1:0] im_addr_o,
  output logic [127:0]     im_wdata_o,
  // tensor memory (through the I/O-NOU mux)
  output logic             tm_en_o,
  output logic             tm_we_o,
  output logic [TM_AW-1:0] tm_addr_o,
  output logic [NB*8-1:0]  tm_wdata_o,
  input  logic [NB*8-1:0]  tm_rdata_i
);

  typedef enum logic [7:0] {
    C_WR_TM = 8'h01, C_RD_TM = 8'h02, C_WR_IM = 8'h03, C_RUN = 8'h04, C_STAT = 8'h05
  } cmd_e;

  // --------------------------------------------------------------------------
  // SPI bit and byte level
  // --------------------------------------------------------------------------
  logic [2:0] sck_s, cs_s, mosi_s;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sck_s <= '0; cs_s <= '1; mosi_s <= '0;
    end else begin
      sck_s <= {sck_s[1:0], spi_sck_i};
      cs_s  <= {cs_s[1:0], spi_cs_n_i};
      mosi_s <= {mosi_s[1:0], spi_mosi_i};
    end
  end
  logic sck_rise, sck_fall, cs_act, cs_start;
  assign sck_rise = sck_s[1] && !sck_s[2];
  assign sck_fall = !sck_s[1] && sck_s[2];
  assign cs_act   = !cs_s[1];
  assign cs_start = !cs_s[1] && cs_s[2];

  logic [2:0]  bitc;
  logic [7:0]  rxsh, txsh;
  logic        rx_byte;          // a full byte arrived this cycle
  logic [7:0]  rx_data;
  logic [7:0]  tx_next;          // byte to send next
  logic [5:0]  txb;              // loads so far; the next load is byte txb + 1

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bitc <= '0; rxsh <= '0; txsh <= '0; rx_byte <= 1'b0; rx_data <= '0; txb <= '0;
    end else begin
      rx_byte <= 1'b0;
      if (!cs_act || cs_start) begin
        bitc <= '0;
        txsh <= '0;
        txb  <= '0;
      end else begin
        if (sck_rise) begin
          rxsh <= {rxsh[6:0], mosi_s[1]};
          bitc <= bitc + 1'b1;
          if (bitc == 3'd7) begin
            rx_byte <= 1'b1;
            rx_data <= {rxsh[6:0], mosi_s[1]};
          end
        end
        if (sck_fall) begin
          if (bitc == 3'd0) begin              // first bit of a new byte
            txsh <= tx_next;
            txb  <= txb + 1'b1;
          end else txsh <= {txsh[6:0], 1'b0};
        end
      end
    end
  end
  assign spi_miso_o = txsh[7];

  // --------------------------------------------------------------------------
  // SPI command level
  // --------------------------------------------------------------------------
  logic [7:0]        cmd;
  logic [5:0]        bytec;      // bytes received in this transaction
  logic [15:0]       addr;
  logic [NB*8-1:0]   buf_d;
  logic              s_req, s_we, s_im, s_run;   // pending SPI request
  logic [TM_AW-1:0]  s_addr;
  logic              rd_have;    // SPI read data is in rbuf

  // request arbitration
  logic  grant_h, grant_s, can_go;
  assign can_go       = !running_i;
  assign grant_h      = host_req_i && can_go;
  assign grant_s      = s_req && can_go && !host_req_i;
  assign host_ready_o = can_go;

  logic            rd_q, rd_spi_q;
  logic [NB*8-1:0] rbuf;         // data returned to SPI

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cmd <= '0; bytec <= '0; addr <= '0; buf_d <= '0;
      s_req <= 1'b0; s_we <= 1'b0; s_im <= 1'b0; s_run <= 1'b0; s_addr <= '0;
      rd_have <= 1'b0; rd_q <= 1'b0; rd_spi_q <= 1'b0; rbuf <= '0;
    end else begin
      rd_q     <= (grant_h && !host_we_i && !host_im_i && !host_run_i) ||
                  (grant_s && !s_we && !s_im && !s_run);
      rd_spi_q <= grant_s && !s_we && !s_im && !s_run;
      if (grant_s) s_req <= 1'b0;
      if (rd_spi_q) begin
        rbuf    <= tm_rdata_i;
        rd_have <= 1'b1;
      end
      if (cs_start) begin
        bytec <= '0;
        rd_have <= 1'b0;
        cmd <= '0;
      end else if (rx_byte) begin
        bytec <= bytec + 1'b1;
        if (bytec == 0) begin
          cmd <= rx_data;
          if (rx_data == C_RUN) begin
            s_req <= 1'b1; s_run <= 1'b1; s_we <= 1'b0; s_im <= 1'b0;
          end
        end else if (bytec == 1) begin
          addr[15:8] <= rx_data;
        end else if (bytec == 2) begin
          addr[7:0] <= rx_data;
          if (cmd == C_RD_TM) begin
            s_req <= 1'b1; s_run <= 1'b0; s_we <= 1'b0; s_im <= 1'b0;
            s_addr <= TM_AW'({addr[15:8], rx_data});
          end
        end else begin
          if (cmd == C_WR_TM || cmd == C_WR_IM)
            buf_d[8*(32'(bytec) - 3) +: 8] <= rx_data;
          if (cmd == C_WR_TM && bytec == 6'(NB + 2)) begin
            s_req <= 1'b1; s_run <= 1'b0; s_we <= 1'b1; s_im <= 1'b0;
            s_addr <= TM_AW'(addr);
          end
          if (cmd == C_WR_IM && bytec == 6'd18) begin
            s_req <= 1'b1; s_run <= 1'b0; s_we <= 1'b1; s_im <= 1'b1;
            s_addr <= TM_AW'(addr);
          end
        end
      end
    end
  end

  // Byte n of a transaction (counted from 0) returns, for RD_TM, word byte
  // n - 4 and, for STAT, the status; every other byte returns 0. Byte 0 is
  // always 0. A byte is chosen when its first bit is loaded, so the read data only has to be
  // ready by the start of byte 4.
  always_comb begin
    tx_next = 8'd0;
    if (cmd == C_RD_TM && rd_have && txb >= 6'd3 && txb < 6'(NB + 3))
      tx_next = rbuf[8*(32'(txb) - 3) +: 8];
    else if (cmd == C_STAT)
      tx_next = {6'd0, ended_i, running_i};
  end

  // the byte completing a write lands in buf_d in the same edge that sets
  // s_req, so the request is served from buf_d one cycle later at the
  // earliest
  always_comb begin
    tm_en_o = 1'b0; tm_we_o = 1'b0; tm_addr_o = '0; tm_wdata_o = '0;
    im_we_o = 1'b0; im_addr_o = '0; im_wdata_o = '0; run_o = 1'b0;
    if (grant_h) begin
      run_o     = host_run_i;
      tm_en_o   = !host_run_i && !host_im_i;
      tm_we_o   = host_we_i;
      tm_addr_o = host_addr_i;
      tm_wdata_o = host_wdata_i;
      im_we_o   = !host_run_i && host_im_i && host_we_i;
      im_addr_o = host_addr_i[IM_AW-1:0];
      im_wdata_o = host_wdata_i[127:0];
    end else if (grant_s) begin
      run_o     = s_run;
      tm_en_o   = !s_run && !s_im;
      tm_we_o   = s_we;
      tm_addr_o = s_addr;
      tm_wdata_o = buf_d;
      im_we_o   = !s_run && s_im;
      im_addr_o = s_addr[IM_AW-1:0];
      im_wdata_o = buf_d[127:0];
    end
  end

  assign host_rvalid_o = rd_q && !rd_spi_q;
  assign host_rdata_o  = tm_rdata_i;

endmodule
