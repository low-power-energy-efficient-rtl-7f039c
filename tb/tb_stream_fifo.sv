// tb_stream_fifo: order, full/empty behaviour and overflow counting of the
// sample FIFO, with random pushes and random read back-pressure against a
// queue model; then a burst into a stalled reader to force overflows.
module tb_stream_fifo;
  localparam int DEPTH = 8;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, clr = 0;
  logic push = 0, full, m_valid, m_ready = 0;
  logic [15:0] din = 0, m_data, overflow_cnt;
  always #5 clk = !clk;
  stream_fifo #(.W(16), .DEPTH(DEPTH)) dut (.*);

  logic [15:0] q[$];
  int drops = 0;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      push    = ($urandom_range(2) != 0);
      din     = 16'($urandom);
      m_ready = (i > 1500) ? 1'b0 : ($urandom_range(1) != 0);
      // model, evaluated on the values the DUT sees at the next edge
      checks++;
      if (m_valid != (q.size() != 0) || full != (q.size() == DEPTH)) begin
        failures++; $display("flags at %0d: valid %0b full %0b size %0d", i, m_valid, full, q.size());
      end
      if (m_valid && m_ready) begin
        checks++;
        if (m_data != q[0]) begin failures++; $display("data %h exp %h", m_data, q[0]); end
      end
      @(posedge clk);
      begin
        // a push into a full FIFO is dropped even if the same edge pops
        automatic bit was_full = (q.size() == DEPTH);
        if (q.size() != 0 && m_ready) void'(q.pop_front());
        if (push) begin
          if (!was_full) q.push_back(din); else drops++;
        end
      end
    end
    @(negedge clk); push = 0;
    checks++;
    if (drops == 0 || overflow_cnt != 16'(drops)) begin failures++; $display("overflow %0d exp %0d", overflow_cnt, drops); end
    clr = 1; @(negedge clk); clr = 0;
    checks++;
    if (m_valid || overflow_cnt != 0) begin failures++; $display("clr failed"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
