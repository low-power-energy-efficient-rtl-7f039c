// afd_top: FPGA top of the ECG loop recorder with on-device AF detection.
//
// Data path: the ADC interface reads both ECG channels at every data-ready
// pulse; the recorder controller writes each sample into the loop buffer and
// pushes it into the sample FIFO, from which the streaming network consumes
// it at its own pace. After one window (H0 time steps) the network's logit
// decides: no AF -> the buffer is cleared and recording restarts; AF (or a
// press of the push button) -> irq to the Bluetooth SoC and a flashing LED,
// and the window is kept until the SoC has read it over SPI and sent DONE.
//
//   adc_* --> adc_spi_master --> recorder_ctrl --> loop_buffer (SPRAM)
//                                     |   ^                ^
//                                     v   | result         | read-out
//                               stream_fifo --> dnn_af     spi_slave <-- spi_*
//
//   spi2_* --> emmc_ctrl --> emmc_* (eMMC flash, 1-bit bus)
//
// Network weights are written over the same SPI (WEIGHT command) after
// reset. When the phone is out of reach the SoC sends a window back over the
// second SPI and emmc_ctrl stores it in eMMC; emmc_busy tells the SoC to
// wait (card not yet initialised, or both block buffers in use). The eMMC
// CMD and DAT0 lines are split into out/enable/in for the I/O pads; the
// controller's error flag and counters are not routed to a pin or to the
// STATUS reply (a debug probe point only). The
// clock comes from outside (on the FPGA, its oscillator). Single clock,
// asynchronous active-low reset.
module afd_top
  import afd_pkg::*;
#(
  parameter int H0         = 30720,
  parameter int K1         = 128,
  parameter int S1         = 8,
  parameter int C1         = 128,
  parameter int K2         = 16,
  parameter int S2         = 8,
  parameter int C2         = 32,
  parameter int DEPTH      = 65536,
  parameter int FIFO_DEPTH = 256,
  parameter int ADC_DIV    = 2,
  parameter int LED_HALF   = 6000000,
  parameter int EMMC_DIV   = 2
) (
  input  logic clk,
  input  logic rst_n,
  // ADC
  input  logic adc_drdy_n,
  output logic adc_cs_n,
  output logic adc_sclk,
  input  logic adc_miso,
  // Bluetooth SoC
  input  logic spi_sclk,
  input  logic spi_cs_n,
  input  logic spi_mosi,
  output logic spi_miso,
  output logic irq,
  // second SPI from the SoC and the eMMC bus
  input  logic spi2_sclk,
  input  logic spi2_cs_n,
  input  logic spi2_mosi,
  output logic emmc_busy,
  output logic emmc_clk,
  output logic emmc_cmd_o,
  output logic emmc_cmd_oe,
  input  logic emmc_cmd_i,
  output logic emmc_dat_o,
  output logic emmc_dat_oe,
  input  logic emmc_dat_i,
  // board
  input  logic button,
  output logic led
);
  localparam int CIN    = 2;
  localparam int AW     = $clog2(DEPTH);
  localparam int WINDOW = H0 * CIN;

  logic  smp_valid;
  act_t  smp_data;
  adc_spi_master #(.NCH(CIN), .SAMPLE_W(ACT_W), .DIV(ADC_DIV)) u_adc (
    .clk, .rst_n, .adc_drdy_n, .adc_cs_n, .adc_sclk, .adc_miso,
    .smp_valid, .smp_data(smp_data));

  logic nn_push, nn_clr;
  act_t nn_data;
  logic res_valid, res_af;
  mac_t res_logit;
  logic mem_en, mem_we;
  logic [AW-1:0] mem_addr, host_rd_addr;
  logic [15:0] mem_wdata, mem_rdata;
  logic host_rd_en, xfer_done;
  logic [1:0] ctrl_state;
  logic af_flag, manual_flag;
  mac_t logit_q;
  logic [15:0] dropped_cnt;

  recorder_ctrl #(.DEPTH(DEPTH), .WINDOW(WINDOW), .LED_HALF(LED_HALF)) u_ctrl (
    .clk, .rst_n,
    .smp_valid, .smp_data,
    .nn_push, .nn_data, .nn_clr,
    .res_valid, .res_af, .res_logit,
    .mem_en, .mem_we, .mem_addr, .mem_wdata,
    .host_rd_en, .host_rd_addr, .xfer_done,
    .button, .irq, .led,
    .state_o(ctrl_state), .af_flag, .manual_flag, .logit_q, .dropped_cnt);

  loop_buffer #(.DEPTH(DEPTH)) u_mem (
    .clk, .en(mem_en), .we(mem_we), .addr(mem_addr), .wdata(mem_wdata), .rdata(mem_rdata));

  logic        fifo_valid, fifo_ready;
  logic [15:0] fifo_ovf_cnt;
  act_t        fifo_data;
  stream_fifo #(.W(ACT_W), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst_n, .clr(nn_clr),
    .push(nn_push), .din(nn_data), .full(), .overflow_cnt(fifo_ovf_cnt),
    .m_valid(fifo_valid), .m_ready(fifo_ready), .m_data(fifo_data));

  logic        wt_we;
  wsel_e       wt_sel;
  logic [15:0] wt_addr;
  wgt_t        wt_data;
  dnn_af #(.CIN(CIN), .H0(H0), .K1(K1), .S1(S1), .C1(C1), .K2(K2), .S2(S2), .C2(C2)) u_dnn (
    .clk, .rst_n, .clr(nn_clr),
    .wt_we, .wt_sel, .wt_addr, .wt_data,
    .s_valid(fifo_valid), .s_ready(fifo_ready), .s_data(fifo_data),
    .res_valid, .res_logit, .res_af);

  spi_slave #(.AW(AW)) u_spi (
    .clk, .rst_n, .spi_sclk, .spi_cs_n, .spi_mosi, .spi_miso,
    .st_state(ctrl_state), .st_event(irq), .st_af(af_flag), .st_manual(manual_flag),
    .st_fifo_ovf(fifo_ovf_cnt != '0), .st_logit(logit_q), .st_dropped(dropped_cnt),
    .rd_en(host_rd_en), .rd_addr(host_rd_addr), .rd_data(mem_rdata),
    .xfer_done, .wt_we, .wt_sel, .wt_addr, .wt_data);

  logic        emmc_ready, emmc_buf_busy, emmc_err;
  logic [15:0] emmc_ovf, emmc_blocks;
  emmc_ctrl #(.CLK_DIV(EMMC_DIV)) u_emmc (
    .clk, .rst_n, .spi2_sclk, .spi2_cs_n, .spi2_mosi,
    .emmc_clk, .emmc_cmd_o, .emmc_cmd_oe, .emmc_cmd_i,
    .emmc_dat_o, .emmc_dat_oe, .emmc_dat_i,
    .ready(emmc_ready), .busy(emmc_buf_busy), .err(emmc_err),
    .ovf_cnt(emmc_ovf), .blocks(emmc_blocks));
  assign emmc_busy = emmc_buf_busy | ~emmc_ready;

endmodule
