// tb_pw_conv1d: pointwise convolution + bias + ReLU against the golden model.
// Random data, weights and biases, random input gaps and output
// back-pressure, two windows with clr between them; checks every output, the
// output count and the cost of one input element (2*COUT cycles, the last one
// of a time step 2*COUT + COUT with the outputs).
module tb_pw_conv1d;
  import afd_pkg::*;
  import tb_ref_pkg::*;
  localparam int CIN = 4, COUT = 8, H = 12;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, clr = 0;
  logic wt_we = 0; logic [15:0] wt_addr = 0; wgt_t wt_data = 0;
  logic s_valid = 0, s_ready, m_valid, m_ready = 0;
  act_t s_data = 0, m_data;
  always #5 clk = !clk;

  pw_conv1d #(.CIN(CIN), .COUT(COUT)) dut (.*);

  arr_t x, w, b, y;
  int got;
  bit bp;

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

  task automatic send(act_t v);
    @(negedge clk);
    s_valid = 1'b1; s_data = v;
    while (!s_ready) @(negedge clk);
    @(posedge clk);
    #1 s_valid = 1'b0;
  endtask

  task automatic run_window(bit gaps);
    x = rand_arr(H * CIN, -3000, 3000);
    y = pw_ref(x, H, CIN, COUT, w, b);
    got = 0;
    for (int i = 0; i < H * CIN; i++) begin
      while (gaps && $urandom_range(2) == 0) @(posedge clk);
      send(act_t'(x[i]));
    end
    repeat (COUT * 8 + 20) @(posedge clk);
    checks++;
    if (got != H * COUT) begin failures++; $display("count %0d exp %0d", got, H * COUT); end
  endtask

  initial begin
    int t0, t1;
    w = rand_arr(CIN * COUT, -300, 300);
    b = rand_arr(COUT, -2000, 2000);
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int i = 0; i < CIN * COUT; i++) begin
      wt_we <= 1; wt_addr <= 16'(i); wt_data <= wgt_t'(w[i]); @(posedge clk);
    end
    for (int i = 0; i < COUT; i++) begin
      wt_we <= 1; wt_addr <= 16'(CIN * COUT + i); wt_data <= wgt_t'(b[i]); @(posedge clk);
    end
    wt_we <= 0;
    bp = 1;
    run_window(1);
    clr <= 1; @(posedge clk); clr <= 0;
    bp = 0;
    run_window(0);
    // cost of one (non-final) input element
    clr <= 1; @(posedge clk); clr <= 0;
    send(16'sd100);
    t0 = $time / 10;
    wait (s_ready == 1);
    t1 = $time / 10;
    checks++;
    if (t1 - t0 != 2 * COUT) begin failures++; $display("elem time %0d exp %0d", t1 - t0, 2 * COUT); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
