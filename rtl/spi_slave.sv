// spi_slave: SPI link to the Bluetooth SoC (the SPI master).
//
// SPI mode 0, MSB first, byte oriented, active-low chip select. SCLK, CS and
// MOSI are oversampled by the system clock through two-flop synchronisers,
// so clk must run at least 8x SCLK. The first byte after CS falls is the
// command; MISO carries the reply from the second byte on:
//   0x01 STATUS  reply: flags {ctrl_state[1:0], 2'b0, fifo_ovf, manual, af, event},
//                logit[31:24..7:0], dropped[15:8], dropped[7:0]
//   0x02 READ    reply: loop-buffer words from address 0 upwards, high byte
//                first, as long as CS stays low (auto-increment)
//   0x03 DONE    the host has the window; pulses xfer_done at the command byte
//   0x04 WEIGHT  followed by groups of 5 bytes {sel, addr_hi, addr_lo,
//                data_hi, data_lo}; each group pulses wt_we for one cycle
// Memory reads are issued one byte ahead of need (rd_en, rdata valid on
// the next cycle). The paper states only that the SoC reads the data over SPI
// and that the FPGA has configuration and status registers; the command set,
// the framing and the weight-write path are this design's.
module spi_slave
  import afd_pkg::*;
#(
  parameter int AW = 16
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          spi_sclk,
  input  logic          spi_cs_n,
  input  logic          spi_mosi,
  output logic          spi_miso,
  // status
  input  logic [1:0]    st_state,
  input  logic          st_event,
  input  logic          st_af,
  input  logic          st_manual,
  input  logic          st_fifo_ovf,
  input  mac_t          st_logit,
  input  logic [15:0]   st_dropped,
  // loop-buffer read
  output logic          rd_en,
  output logic [AW-1:0] rd_addr,
  input  logic [15:0]   rd_data,
  // commands
  output logic          xfer_done,
  output logic          wt_we,
  output wsel_e         wt_sel,
  output logic [15:0]   wt_addr,
  output wgt_t          wt_data
);
  typedef enum logic [7:0] {
    CMD_STATUS = 8'h01,
    CMD_READ   = 8'h02,
    CMD_DONE   = 8'h03,
    CMD_WEIGHT = 8'h04
  } cmd_e;

  logic [2:0] sclk_s, cs_s;
  logic [1:0] mosi_s;
  wire sclk_rise = sclk_s[1] && !sclk_s[2];
  wire sclk_fall = !sclk_s[1] && sclk_s[2];
  wire cs_fall   = !cs_s[1] && cs_s[2];
  wire cs_act    = !cs_s[1];

  logic [2:0]  bit_cnt;
  logic [6:0]  rx_sh;
  logic [7:0]  tx_sh;
  logic [15:0] byte_idx;    // completed bytes in this transfer (wraps)
  logic        first;       // the byte being received is the command
  logic [7:0]  cmd_q;
  logic [2:0]  grp;         // byte position within a weight group
  logic [2:0]  w_sel;
  logic [15:0] w_addr;
  logic [7:0]  w_dhi;

  wire [7:0] rx_byte = {rx_sh, mosi_s[1]};
  wire [7:0] cmd_now = first ? rx_byte : cmd_q;

  // Byte sent in slot n+1 when byte n completes.
  function automatic logic [7:0] status_byte(input logic [15:0] n);
    unique case (n)
      16'd0:   return {st_state, 2'b0, st_fifo_ovf, st_manual, st_af, st_event};
      16'd1:   return st_logit[31:24];
      16'd2:   return st_logit[23:16];
      16'd3:   return st_logit[15:8];
      16'd4:   return st_logit[7:0];
      16'd5:   return st_dropped[15:8];
      16'd6:   return st_dropped[7:0];
      default: return 8'h00;   // also after byte_idx wraps
    endcase
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sclk_s    <= '0;
      cs_s      <= '1;
      mosi_s    <= '0;
      bit_cnt   <= '0;
      rx_sh     <= '0;
      tx_sh     <= '0;
      byte_idx  <= '0;
      first     <= 1'b1;
      cmd_q     <= '0;
      grp       <= '0;
      w_sel     <= '0;
      w_addr    <= '0;
      w_dhi     <= '0;
      spi_miso  <= 1'b0;
      rd_en     <= 1'b0;
      rd_addr   <= '0;
      xfer_done <= 1'b0;
      wt_we     <= 1'b0;
      wt_sel    <= SEL_DW1;
      wt_addr   <= '0;
      wt_data   <= '0;
    end else begin
      sclk_s    <= {sclk_s[1:0], spi_sclk};
      cs_s      <= {cs_s[1:0], spi_cs_n};
      mosi_s    <= {mosi_s[0], spi_mosi};
      rd_en     <= 1'b0;
      xfer_done <= 1'b0;
      wt_we     <= 1'b0;
      if (cs_fall) begin
        bit_cnt  <= '0;
        byte_idx <= '0;
        first    <= 1'b1;
        tx_sh    <= '0;
        grp      <= '0;
        spi_miso <= 1'b0;
        rd_addr  <= '0;
        rd_en    <= 1'b1;            // prefetch word 0
      end else if (cs_act && sclk_rise) begin
        rx_sh   <= rx_byte[6:0];
        bit_cnt <= bit_cnt + 1'b1;
        if (bit_cnt == 3'd7) begin
          byte_idx <= byte_idx + 1'b1;
          first    <= 1'b0;
          if (first) cmd_q <= rx_byte;
          // reply for the next byte slot
          unique case (cmd_now)
            CMD_STATUS: tx_sh <= status_byte(byte_idx);
            CMD_READ: begin
              if (byte_idx[0] == 1'b0) begin
                tx_sh <= rd_data[15:8];
              end else begin
                tx_sh   <= rd_data[7:0];
                rd_addr <= rd_addr + 1'b1;
                rd_en   <= 1'b1;
              end
            end
            default: tx_sh <= 8'h00;
          endcase
          // command actions
          if (first && rx_byte == CMD_DONE) xfer_done <= 1'b1;
          if (!first && cmd_q == CMD_WEIGHT) begin
            unique case (grp)
              3'd0: w_sel         <= rx_byte[2:0];  // upper bits ignored
              3'd1: w_addr[15:8]  <= rx_byte;
              3'd2: w_addr[7:0]   <= rx_byte;
              3'd3: w_dhi         <= rx_byte;
              default: begin
                wt_we   <= 1'b1;
                wt_sel  <= wsel_e'(w_sel);
                wt_addr <= w_addr;
                wt_data <= {w_dhi, rx_byte};
              end
            endcase
            grp <= (grp == 3'd4) ? 3'd0 : grp + 1'b1;
          end
        end
      end else if (cs_act && sclk_fall) begin
        spi_miso <= tx_sh[7];
        tx_sh    <= {tx_sh[6:0], 1'b0};
      end
    end
  end
endmodule
