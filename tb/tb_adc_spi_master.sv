// tb_adc_spi_master: the ADC interface against the ADC model. Checks every
// received sample value and channel order, the SPI frame length (NB SCLK
// rising edges per frame) and the time from data-ready to the first sample.
module tb_adc_spi_master;
  localparam int NCH = 2, SW = 16, DIV = 2;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, run = 0;
  logic adc_drdy_n, adc_cs_n, adc_sclk, adc_miso, smp_valid;
  logic [SW-1:0] smp_data;
  int frames;
  always #5 clk = !clk;

  adc_spi_master #(.NCH(NCH), .SAMPLE_W(SW), .DIV(DIV)) dut (.*);
  adc_model #(.PERIOD(200), .NCH(NCH), .SAMPLE_W(SW)) adc (
    .clk, .run, .drdy_n(adc_drdy_n), .cs_n(adc_cs_n), .sclk(adc_sclk), .miso(adc_miso), .frames);

  int nsmp = 0, nedges = 0;
  longint t_drdy, t_first;
  logic sclk_d = 0, drdy_d = 1;
  always @(posedge clk) begin
    sclk_d <= adc_sclk;
    drdy_d <= adc_drdy_n;
    if (drdy_d && !adc_drdy_n) begin t_drdy = $time; nedges = 0; end
    if (adc_sclk && !sclk_d) nedges++;
    if (smp_valid) begin
      checks++;
      if (smp_data != adc.sample(nsmp / NCH, nsmp % NCH)) begin
        failures++; $display("sample %0d: %h exp %h", nsmp, smp_data, adc.sample(nsmp / NCH, nsmp % NCH));
      end
      if (nsmp % NCH == 0) begin
        checks++;
        if (nedges != NCH * SW) begin failures++; $display("frame had %0d sclk edges", nedges); end
        checks++;
        // synchroniser and start (4 cycles), 2*DIV per bit, end of frame (1)
        if (($time - t_drdy) / 10 != 2 * DIV * NCH * SW + 5) begin
          failures++; $display("drdy->sample %0d cycles", ($time - t_drdy) / 10);
        end
      end
      nsmp++;
    end
  end

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1; run = 1;
    wait (nsmp == 100 * NCH);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
