// stream_fifo: synchronous FIFO between ECG acquisition and the network.
//
// The ADC side pushes one element per cycle whenever it has one and cannot
// wait, so the write side is push-only: a push into a full FIFO is dropped
// and counted in overflow_cnt (sticky until clr). The read side is a
// valid/ready stream; m_data is the head entry, read combinationally from the
// register-file storage. Latency: an element pushed in cycle t is valid at
// the output in cycle t+1. clr empties the FIFO and zeroes the counter.
// The paper links layers by on-chip streams; this buffer, its depth and its
// overflow policy are this design's own.
module stream_fifo #(
  parameter int W     = 16,
  parameter int DEPTH = 256
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         clr,
  input  logic         push,
  input  logic [W-1:0] din,
  output logic         full,
  output logic [15:0]  overflow_cnt,
  output logic         m_valid,
  input  logic         m_ready,
  output logic [W-1:0] m_data
);
  localparam int AB = $clog2(DEPTH);

  logic [W-1:0] mem [DEPTH];
  logic [AB-1:0] wp, rp;
  logic [AB:0]   cnt;

  logic do_push, do_pop;
  assign full    = (cnt == (AB+1)'(DEPTH));
  assign m_valid = (cnt != '0);
  assign m_data  = mem[rp];
  assign do_pop  = m_valid && m_ready;
  assign do_push = push && !full;

  always_ff @(posedge clk) begin
    if (do_push) mem[wp] <= din;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; cnt <= '0; overflow_cnt <= '0;
    end else if (clr) begin
      wp <= '0; rp <= '0; cnt <= '0; overflow_cnt <= '0;
    end else begin
      if (do_push) wp <= wp + 1'b1;
      if (do_pop)  rp <= rp + 1'b1;
      cnt <= cnt + (AB+1)'(do_push) - (AB+1)'(do_pop);
      if (push && full && overflow_cnt != '1) overflow_cnt <= overflow_cnt + 1'b1;
    end
  end

  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) do_pop |-> cnt != '0);
endmodule
