// tb_dw_conv1d: depthwise convolution against the golden model.
// Two windows (clr between them) of random data with random input gaps and
// random output back-pressure; checks every output value, the output count
// and the compute time of one output step (C*(2K+1) cycles without stalls).
module tb_dw_conv1d;
  import afd_pkg::*;
  import tb_ref_pkg::*;
  localparam int C = 4, K = 8, S = 4, H = 40;
  localparam int NOUT = ((H - K) / S + 1) * C;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, clr = 0;
  logic wt_we = 0; logic [15:0] wt_addr = 0; wgt_t wt_data = 0;
  logic s_valid = 0, s_ready, m_valid, m_ready = 0;
  act_t s_data = 0, m_data;
  always #5 clk = !clk;

  dw_conv1d #(.C(C), .K(K), .S(S)) dut (.*);

  arr_t x, w, y;
  int got;
  bit bp;   // random back-pressure enabled

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    m_ready <= bp ? ($urandom_range(3) != 0) : 1'b1;
    if (m_valid && m_ready) begin
      checks++;
      if (got >= y.size() || longint'(m_data) != y[got]) begin
        failures++;
        $display("out %0d: got %0d exp %0d", got, m_data, (got < y.size()) ? y[got] : -1);
      end
      got++;
    end
  end

  // Present one element; s_ready is looked at on the falling edge, where it
  // is stable, and the element is taken at the following rising edge.
  task automatic send(act_t v);
    @(negedge clk);
    s_valid = 1'b1; s_data = v;
    while (!s_ready) @(negedge clk);
    @(posedge clk);
    #1 s_valid = 1'b0;
  endtask

  task automatic run_window(bit gaps);
    x = rand_arr(H * C, -3000, 3000);
    y = dw_ref(x, H, C, K, S, w);
    got = 0;
    for (int i = 0; i < H * C; i++) begin
      while (gaps && $urandom_range(2) == 0) @(posedge clk);
      send(act_t'(x[i]));
    end
    repeat (C * (2 * K + 1) * 4 + 20) @(posedge clk);
    checks++;
    if (got != NOUT) begin failures++; $display("count %0d exp %0d", got, NOUT); end
  endtask

  initial begin
    int t0, t1;
    w = rand_arr(K * C, -300, 300);
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int i = 0; i < K * C; i++) begin
      wt_we <= 1; wt_addr <= 16'(i); wt_data <= wgt_t'(w[i]);
      @(posedge clk);
    end
    wt_we <= 0;
    bp = 1;
    run_window(1);
    clr <= 1; @(posedge clk); clr <= 0;
    run_window(0);
    // latency of one output step with free-flowing output
    bp = 0;
    clr <= 1; @(posedge clk); clr <= 0;
    x = rand_arr(H * C, -3000, 3000);
    y = dw_ref(x, H, C, K, S, w);
    got = 0;
    for (int i = 0; i < K * C; i++) send(act_t'(x[i]));
    t0 = $time / 10;
    wait (s_ready == 1);
    t1 = $time / 10;
    checks++;
    if (t1 - t0 != C * (2 * K + 1)) begin
      failures++; $display("step time %0d exp %0d", t1 - t0, C * (2 * K + 1));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
