// adc_spi_master: reads the ECG samples from the external ADC.
//
// The ADC is free-running and signals a new conversion with an active-low
// data-ready line. On each falling edge of the (synchronised) adc_drdy_n the
// master pulls adc_cs_n low and clocks NCH*SAMPLE_W bits in SPI mode 0
// (SCLK idle low, MISO sampled on the rising edge, MSB first, channel 0
// first). SCLK runs at clk/(2*DIV). When the frame is complete the samples
// leave as an element stream: smp_valid is high for NCH consecutive cycles
// carrying channel 0, 1, ... (no back-pressure; the consumer buffers).
// Channel 0 is on smp_data 2*DIV*NCH*SAMPLE_W + 5 cycles after the clock
// edge at which adc_drdy_n is first seen low (two-flop synchroniser).
// The paper only says the FPGA gathers the ADC's samples; the ADC part, its
// frame format and this SPI timing are this design's assumptions.
module adc_spi_master #(
  parameter int NCH      = 2,
  parameter int SAMPLE_W = 16,
  parameter int DIV      = 2
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                adc_drdy_n,
  output logic                adc_cs_n,
  output logic                adc_sclk,
  input  logic                adc_miso,
  output logic                smp_valid,
  output logic [SAMPLE_W-1:0] smp_data
);
  localparam int NB  = NCH * SAMPLE_W;
  localparam int BB  = $clog2(NB + 1);
  localparam int DB  = $clog2(DIV + 1);
  localparam int CHB = (NCH > 1) ? $clog2(NCH) : 1;

  typedef enum logic [1:0] {S_IDLE, S_SHIFT, S_EMIT} state_e;
  state_e state;

  logic [2:0]    drdy_sync;
  logic [NB-1:0] shreg;
  logic [BB-1:0] nbit;
  logic [DB-1:0] div_cnt;
  logic [CHB-1:0] ch;

  wire drdy_fall = drdy_sync[2] && !drdy_sync[1];

  assign smp_valid = (state == S_EMIT);
  assign smp_data  = shreg[NB-1 -: SAMPLE_W];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      drdy_sync <= '1;
      state     <= S_IDLE;
      adc_cs_n  <= 1'b1;
      adc_sclk  <= 1'b0;
      shreg     <= '0;
      nbit      <= '0;
      div_cnt   <= '0;
      ch        <= '0;
    end else begin
      drdy_sync <= {drdy_sync[1:0], adc_drdy_n};
      unique case (state)
        S_IDLE: if (drdy_fall) begin
          adc_cs_n <= 1'b0;
          nbit     <= '0;
          div_cnt  <= '0;
          state    <= S_SHIFT;
        end
        S_SHIFT: begin
          if (div_cnt == DB'(DIV - 1)) begin
            div_cnt <= '0;
            if (!adc_sclk) begin
              if (nbit == BB'(NB)) begin
                adc_cs_n <= 1'b1;
                ch       <= '0;
                state    <= S_EMIT;
              end else begin
                adc_sclk <= 1'b1;                   // rising edge: sample
                shreg    <= {shreg[NB-2:0], adc_miso};
                nbit     <= nbit + 1'b1;
              end
            end else begin
              adc_sclk <= 1'b0;                     // falling edge: ADC shifts
            end
          end else begin
            div_cnt <= div_cnt + 1'b1;
          end
        end
        S_EMIT: begin
          shreg <= shreg << SAMPLE_W;
          if (ch == CHB'(NCH - 1)) state <= S_IDLE;
          else                     ch    <= ch + 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
