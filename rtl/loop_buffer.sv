// loop_buffer: loop-recording memory for one ECG window.
//
// Single-port RAM, DEPTH x 16 bits, synchronous write and synchronous read
// (rdata is the word at the address presented in the previous enabled cycle).
// The default 65536 x 16 is the four 16K x 16 single-port RAM blocks of the
// target FPGA taken together, all of which the paper gives to loop recording;
// one 120 s window of two channels at 256 Hz (61440 words) fits. Written as
// an array so that any synthesis tool can map it; a vendor build would
// instantiate the four RAM primitives behind the same ports.
module loop_buffer #(
  parameter int DEPTH = 65536,
  parameter int AW    = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          en,
  input  logic          we,
  input  logic [AW-1:0] addr,
  input  logic [15:0]   wdata,
  output logic [15:0]   rdata
);
  logic [15:0] mem [DEPTH];
  always_ff @(posedge clk) begin
    if (en) begin
      if (we) mem[addr] <= wdata;
      else    rdata     <= mem[addr];
    end
  end
endmodule
