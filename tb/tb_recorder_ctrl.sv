// tb_recorder_ctrl: loop-recorder sequencing with a memory model and a
// scripted network result. Covers: clearing every word, recording a window
// at consecutive addresses with samples forwarded to the network, a window
// without AF (back to clearing), a window with AF (irq, LED toggling every
// LED_HALF cycles, host owns the memory port, DONE ends it), a button press
// during recording (manual event) and dropping of samples while not recording.
module tb_recorder_ctrl;
  import afd_pkg::*;
  localparam int DEPTH = 64, AW = 6, WINDOW = 32, LED_HALF = 4;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic smp_valid = 0; act_t smp_data = 0;
  logic nn_push, nn_clr; act_t nn_data;
  logic res_valid = 0, res_af = 0; mac_t res_logit = 0;
  logic mem_en, mem_we; logic [AW-1:0] mem_addr; logic [15:0] mem_wdata;
  logic host_rd_en = 0; logic [AW-1:0] host_rd_addr = 0; logic xfer_done = 0;
  logic button = 0, irq, led;
  logic [1:0] state_o; logic af_flag, manual_flag; mac_t logit_q; logic [15:0] dropped_cnt;
  always #5 clk = !clk;

  recorder_ctrl #(.DEPTH(DEPTH), .WINDOW(WINDOW), .LED_HALF(LED_HALF)) dut (.*);

  logic [15:0] mem [DEPTH];
  int pushes = 0, led_toggles = 0, clears = 0;
  logic led_q = 0;
  always @(posedge clk) begin
    if (mem_en && mem_we) mem[mem_addr] <= mem_wdata;
    if (rst_n && nn_push) pushes++;
    led_q <= led;
    if (rst_n && led != led_q) led_toggles++;
  end

  task automatic expect_eq(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin failures++; $display("%s: got %0d exp %0d", what, got, exp); end
  endtask

  task automatic wait_state(logic [1:0] s, int limit);
    int n = 0;
    while (state_o != s && n < limit) begin @(negedge clk); n++; end
    expect_eq($sformatf("reached state %0d", s), state_o, s);
  endtask

  task automatic samples(int n, int base);
    for (int i = 0; i < n; i++) begin
      @(negedge clk); smp_valid = 1; smp_data = act_t'(base + i);
      @(negedge clk); smp_valid = 0;
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (mem[i]) mem[i] = 16'hffff;
    repeat (3) @(negedge clk);
    rst_n = 1;
    expect_eq("nn held in clear", nn_clr, 1);
    wait_state(2'd1, DEPTH + 5);                   // ACQ after clearing
    begin
      int nz = 0;
      foreach (mem[i]) if (mem[i] != 0) nz++;
      expect_eq("words not cleared", nz, 0);
    end
    // window 1: no AF
    samples(WINDOW, 100);
    expect_eq("pushes", pushes, WINDOW);
    for (int i = 0; i < WINDOW; i++) expect_eq($sformatf("mem[%0d]", i), mem[i], 100 + i);
    expect_eq("wait for result", state_o, 2);
    samples(2, 0);                                  // dropped
    @(negedge clk); res_valid = 1; res_af = 0; res_logit = -5;
    @(negedge clk); res_valid = 0;
    expect_eq("no AF -> clear", state_o, 0);
    expect_eq("irq low", irq, 0);
    wait_state(2'd1, DEPTH + 5);
    // window 2: AF
    samples(WINDOW, 500);
    @(negedge clk); res_valid = 1; res_af = 1; res_logit = 77;
    @(negedge clk); res_valid = 0;
    expect_eq("AF -> event", state_o, 3);
    expect_eq("irq", irq, 1);
    expect_eq("af flag", af_flag, 1);
    expect_eq("logit", logit_q, 77);
    repeat (4 * LED_HALF + 1) @(negedge clk);
    expect_eq("led toggles", led_toggles, 4);
    samples(3, 0);                                  // dropped
    // host reads address 5 through the controller's port
    host_rd_en = 1; host_rd_addr = 6'd5;
    #1;
    expect_eq("host owns port", {mem_en, mem_we, mem_addr}, {1'b1, 1'b0, 6'd5});
    @(negedge clk); host_rd_en = 0;
    expect_eq("data kept", mem[5], 505);
    xfer_done = 1; @(negedge clk); xfer_done = 0;
    expect_eq("done -> clear", state_o, 0);
    expect_eq("dropped", dropped_cnt, 5);
    wait_state(2'd1, DEPTH + 5);
    // window 3: button press during recording
    samples(5, 900);
    @(negedge clk); button = 1;
    repeat (4) @(negedge clk); button = 0;
    expect_eq("manual event", state_o, 3);
    expect_eq("manual flag", manual_flag, 1);
    expect_eq("irq manual", irq, 1);
    xfer_done = 1; @(negedge clk); xfer_done = 0;
    wait_state(2'd1, DEPTH + 5);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
