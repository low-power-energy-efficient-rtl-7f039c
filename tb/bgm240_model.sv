// bgm240_model: behavioural SPI master standing in for the Bluetooth SoC in
// the testbenches. xfer() runs one chip-select frame in SPI mode 0: MOSI set
// while SCLK is low, MISO sampled at the rising edge, MSB first, HALF system
// clock cycles per SCLK half period.
module bgm240_model #(
  parameter int HALF = 6
) (
  input  logic clk,
  output logic sclk,
  output logic cs_n,
  output logic mosi,
  input  logic miso
);
  initial begin sclk = 0; cs_n = 1; mosi = 0; end

  task automatic wait_half();
    repeat (HALF) @(posedge clk);
  endtask

  task automatic xfer(input logic [7:0] tx[$], output logic [7:0] rx[$]);
    logic [7:0] b;
    rx = {};
    cs_n = 1'b0;
    wait_half();
    foreach (tx[i]) begin
      for (int k = 7; k >= 0; k--) begin
        mosi = tx[i][k];
        wait_half();
        sclk = 1'b1;
        b[k] = miso;
        wait_half();
        sclk = 1'b0;
      end
      rx.push_back(b);
    end
    wait_half();
    cs_n = 1'b1;
    wait_half(); wait_half();
  endtask
endmodule
