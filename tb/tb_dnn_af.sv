// tb_dnn_af: the whole network at reduced size against the golden model
// chained layer by layer. Loads random weights through the load port, runs
// several windows of random ECG-like input (with a clr and restart between
// windows, and one window aborted half way), checks every logit and decision.
module tb_dnn_af;
  import afd_pkg::*;
  import tb_ref_pkg::*;
  localparam int CIN = 2, H0 = 64, K1 = 8, S1 = 4, C1 = 8, K2 = 4, S2 = 2, C2 = 4;
  localparam int H1 = (H0 - K1) / S1 + 1, H2 = (H1 - K2) / S2 + 1;
  localparam int NWIN = 6;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, clr = 0;
  logic wt_we = 0; wsel_e wt_sel = SEL_DW1; logic [15:0] wt_addr = 0; wgt_t wt_data = 0;
  logic s_valid = 0, s_ready, res_valid, res_af;
  act_t s_data = 0;
  mac_t res_logit;
  always #5 clk = !clk;

  dnn_af #(.CIN(CIN), .H0(H0), .K1(K1), .S1(S1), .C1(C1), .K2(K2), .S2(S2), .C2(C2)) dut (.*);

  arr_t wd1, wp1, bp1, wd2, wp2, bp2, wfc;
  int nres = 0, n_af = 0;
  longint exp_q[$];

  always @(posedge clk) if (rst_n && res_valid) begin
    nres++;
    checks++;
    if (exp_q.size() == 0 || longint'(res_logit) != exp_q[0] || res_af != (exp_q[0] > 0)) begin
      failures++;
      $display("window result %0d: logit %0d exp %0d", nres, res_logit, (exp_q.size() != 0) ? exp_q[0] : 0);
    end
    if (res_af) n_af++;
    if (exp_q.size() != 0) void'(exp_q.pop_front());
  end

  task automatic load(wsel_e sel, arr_t v, int base);
    foreach (v[i]) begin
      @(negedge clk); wt_we = 1; wt_sel = sel; wt_addr = 16'(base + i); wt_data = wgt_t'(v[i]);
    end
    @(negedge clk); wt_we = 0;
  endtask

  task automatic send(act_t v);
    @(negedge clk);
    s_valid = 1'b1; s_data = v;
    while (!s_ready) @(negedge clk);
    @(posedge clk);
    #1 s_valid = 1'b0;
  endtask

  function automatic longint model(arr_t x);
    arr_t a1, a2, a3, a4;
    a1 = dw_ref(x, H0, CIN, K1, S1, wd1);
    a2 = pw_ref(a1, H1, CIN, C1, wp1, bp1);
    a3 = dw_ref(a2, H1, C1, K2, S2, wd2);
    a4 = pw_ref(a3, H2, C1, C2, wp2, bp2);
    return gap_ref(a4, H2, C2, wfc);
  endfunction

  initial begin
    #20000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    arr_t x;
    wd1 = rand_arr(K1 * CIN, -120, 120);
    wp1 = rand_arr(CIN * C1, -120, 120);  bp1 = rand_arr(C1, -300, 600);
    wd2 = rand_arr(K2 * C1, -120, 120);
    wp2 = rand_arr(C1 * C2, -120, 120);  bp2 = rand_arr(C2, -300, 600);
    wfc = rand_arr(C2, -200, 200);
    repeat (3) @(negedge clk);
    rst_n = 1;
    load(SEL_DW1, wd1, 0);
    load(SEL_PW1, wp1, 0); load(SEL_PW1, bp1, CIN * C1);
    load(SEL_DW2, wd2, 0);
    load(SEL_PW2, wp2, 0); load(SEL_PW2, bp2, C1 * C2);
    load(SEL_FC, wfc, 0);
    for (int w = 0; w < NWIN; w++) begin
      if (w == NWIN / 2) begin
        // reload the FC weights negated: the decision must flip side
        foreach (wfc[i]) wfc[i] = -wfc[i];
        load(SEL_FC, wfc, 0);
      end
      x = rand_arr(H0 * CIN, -3000, 3000);
      exp_q.push_back(model(x));
      foreach (x[i]) send(act_t'(x[i]));
      while (nres < w + 1) @(negedge clk);
      @(negedge clk); clr = 1; @(negedge clk); clr = 0;
      if (w == 2) begin
        // aborted window: half the input, then clr
        for (int i = 0; i < H0; i++) send(16'sd2500);
        repeat (200) @(negedge clk);
        clr = 1; @(negedge clk); clr = 0;
      end
    end
    checks++;
    if (n_af == 0 || n_af == NWIN) begin failures++; $display("only one decision seen"); end
    checks++;
    if (nres != NWIN) begin failures++; $display("results %0d exp %0d", nres, NWIN); end
    $display("AF decisions: %0d of %0d windows", n_af, NWIN);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
