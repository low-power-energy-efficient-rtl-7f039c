// tb_gap_fc: fused global average pooling + FC against the golden model.
// Several windows with random data (one made strongly positive, one strongly
// negative to exercise both decisions), back-pressure on the result, clr in
// the middle of a window; checks logit, AF flag and the result latency.
module tb_gap_fc;
  import afd_pkg::*;
  import tb_ref_pkg::*;
  localparam int C = 4, H = 7;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, clr = 0;
  logic wt_we = 0; logic [15:0] wt_addr = 0; wgt_t wt_data = 0;
  logic s_valid = 0, s_ready, m_valid, m_ready = 0, m_af;
  act_t s_data = 0;
  mac_t m_logit;
  always #5 clk = !clk;

  gap_fc #(.C(C), .H(H)) dut (.*);

  arr_t x, w;
  int n_af = 0, n_noaf = 0;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic send(act_t v);
    @(negedge clk);
    s_valid = 1'b1; s_data = v;
    while (!s_ready) @(negedge clk);
    @(posedge clk);
    #1 s_valid = 1'b0;
  endtask

  task automatic window(int lo, int hi);
    longint e;
    int t0;
    x = rand_arr(H * C, lo, hi);
    e = gap_ref(x, H, C, w);
    foreach (x[i]) send(act_t'(x[i]));
    t0 = $time / 10;
    // result valid three cycles after the last element is taken (weight
    // read, MAC, logit); t0 is just after that edge, checks run on falling
    // edges, so the difference in whole cycles reads 4
    @(negedge clk);
    while (!m_valid) @(negedge clk);
    checks++;
    if ($time / 10 - t0 != 4) begin failures++; $display("latency %0d", $time / 10 - t0); end
    repeat (3) @(negedge clk);          // hold under back-pressure
    checks++;
    if (!m_valid || longint'(m_logit) != e || m_af != (e > 0)) begin
      failures++; $display("logit %0d af %0b exp %0d", m_logit, m_af, e);
    end
    if (m_af) n_af++; else n_noaf++;
    m_ready = 1'b1; @(posedge clk); #1 m_ready = 1'b0;
  endtask

  initial begin
    w = rand_arr(C, 0, 300);
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int i = 0; i < C; i++) begin
      wt_we <= 1; wt_addr <= 16'(i); wt_data <= wgt_t'(w[i]); @(posedge clk);
    end
    wt_we <= 0;
    window(0, 5000);
    window(-5000, 0);
    for (int i = 0; i < 5; i++) window(-3000, 3000);
    // abort half a window; the next window must start from zero
    for (int i = 0; i < 5; i++) send(16'sd30000);
    @(negedge clk); clr = 1; @(negedge clk); clr = 0;
    window(-3000, 3000);
    checks++;
    if (n_af == 0 || n_noaf == 0) begin failures++; $display("decisions af=%0d noaf=%0d", n_af, n_noaf); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
