// adc_model: behavioural model of a free-running two-channel ECG ADC for the
// testbenches. Every PERIOD clock cycles it pulls drdy_n low for a few
// cycles; while cs_n is low it shifts out the current frame MSB first,
// changing MISO after each falling SCLK edge (SPI mode 0). The samples of
// frame n are sample(n, ch), a deterministic pattern the testbench can
// recompute: a slow triangle plus a channel offset and a small pseudo-random
// part. frames counts the data-ready pulses issued.
module adc_model #(
  parameter int PERIOD   = 200,
  parameter int NCH      = 2,
  parameter int SAMPLE_W = 16
) (
  input  logic clk,
  input  logic run,
  output logic drdy_n,
  input  logic cs_n,
  input  logic sclk,
  output logic miso,
  output int   frames
);
  localparam int NB = NCH * SAMPLE_W;

  function automatic logic [SAMPLE_W-1:0] sample(int n, int ch);
    int tri_v, noise;
    tri_v = ((n % 64) < 32) ? (n % 64) * 64 : (64 - (n % 64)) * 64;
    noise = ((n * 1103 + ch * 12345) % 257) - 128;
    return SAMPLE_W'(tri_v - 1024 + noise + ch * 300);
  endfunction

  int cnt = 0;
  logic [NB-1:0] sh;
  logic sclk_q = 0, cs_q = 1;
  initial begin drdy_n = 1; miso = 0; frames = 0; end

  always @(posedge clk) begin
    sclk_q <= sclk;
    cs_q   <= cs_n;
    if (run) begin
      cnt <= (cnt == PERIOD - 1) ? 0 : cnt + 1;
      if (cnt == 0) begin
        drdy_n <= 1'b0;
        for (int c = 0; c < NCH; c++) sh[NB-1-c*SAMPLE_W -: SAMPLE_W] <= sample(frames, c);
        frames <= frames + 1;
      end
      if (cnt == 4) drdy_n <= 1'b1;
    end
    if (cs_q && !cs_n) miso <= sh[NB-1];
    if (!cs_n && sclk_q && !sclk) begin   // falling edge: next bit
      sh   <= sh << 1;
      miso <= sh[NB-2];
    end
  end
endmodule
