// tb_afd_core: end-to-end test bench body for afd_top, shared by the
// reduced-size test (tb_afd_top) and the default-size test (tb_afd_top_full).
//
// The ADC model supplies a deterministic ECG-like pattern; the Bluetooth SoC
// model loads the network weights over SPI (WEIGHT command), waits for the
// interrupt, reads STATUS and the recorded window (READ) and ends the event
// (DONE). The weights are chosen so that the decision is known: positive
// pointwise-2 biases keep the ReLU outputs positive, so positive FC weights
// give AF and negated FC weights give no AF. Independently of the design the
// bench recomputes every window's logit with the golden model from the
// samples forwarded to the network and checks those samples against the ADC
// model. Sequence: window with AF -> event, read-out, FC weights negated ->
// window without AF -> cleared -> button press part-way through a window ->
// manual event, read-out (recorded part = samples, rest = zero) -> done.
// FULL=1 runs only the first event (one full window, read-out, done, clear).
// Mechanisms counted and required: AF event, no-AF window, manual event,
// transfer, memory clear, LED toggle, network back-pressure on the FIFO,
// eMMC block write.
module tb_afd_core #(
  parameter bit FULL = 1'b0
);
  import afd_pkg::*;
  import tb_ref_pkg::*;
  localparam int H0  = FULL ? 30720 : 128;
  localparam int K1  = FULL ? 128 : 64;
  localparam int S1  = FULL ? 8 : 4;
  localparam int C1  = FULL ? 128 : 16;
  localparam int K2  = FULL ? 16 : 4;
  localparam int S2  = FULL ? 8 : 2;
  localparam int C2  = FULL ? 32 : 16;
  localparam int DEPTH = FULL ? 65536 : 256;
  localparam int CIN = 2;
  localparam int H1 = (H0 - K1) / S1 + 1, H2 = (H1 - K2) / S2 + 1;
  localparam int WINDOW = H0 * CIN;
  localparam int PERIOD = FULL ? 500 : 150;
  localparam longint LIMIT = FULL ? 64'd80_000_000 : 64'd3_000_000;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, run = 0, button = 0;
  logic adc_drdy_n, adc_cs_n, adc_sclk, adc_miso;
  logic spi_sclk, spi_cs_n, spi_mosi, spi_miso, irq, led;
  int frames;
  always #5 clk = !clk;

  // second SPI and eMMC bus (open lines with pull-up)
  logic spi2_sclk = 0, spi2_cs_n = 1, spi2_mosi = 0, emmc_busy;
  logic emmc_clk, emmc_cmd_o, emmc_cmd_oe, emmc_dat_o, emmc_dat_oe;
  logic m_cmd_oe, m_cmd_o, m_dat_oe, m_dat_o;
  wire emmc_cmd_i = emmc_cmd_oe ? emmc_cmd_o : (m_cmd_oe ? m_cmd_o : 1'b1);
  wire emmc_dat_i = emmc_dat_oe ? emmc_dat_o : (m_dat_oe ? m_dat_o : 1'b1);
  emmc_model card (.clk_e(emmc_clk), .cmd_host(emmc_cmd_i), .dat_host(emmc_dat_i),
                   .cmd_oe(m_cmd_oe), .cmd_o(m_cmd_o), .dat_oe(m_dat_oe), .dat_o(m_dat_o));

  if (FULL) begin : g_dut
    afd_top dut (.*);
  end else begin : g_dut
    afd_top #(.H0(H0), .K1(K1), .S1(S1), .C1(C1), .K2(K2), .S2(S2), .C2(C2),
              .DEPTH(DEPTH), .LED_HALF(50)) dut (.*);
  end

  adc_model #(.PERIOD(PERIOD)) adc (.clk, .run, .drdy_n(adc_drdy_n), .cs_n(adc_cs_n),
                                    .sclk(adc_sclk), .miso(adc_miso), .frames);
  bgm240_model #(.HALF(6)) host (.clk, .sclk(spi_sclk), .cs_n(spi_cs_n), .mosi(spi_mosi), .miso(spi_miso));

  // ---------------- golden model ----------------
  arr_t wd1, wp1, bp1, wd2, wp2, bp2, wfc;
  function automatic longint model(arr_t x);
    arr_t a1, a2, a3, a4;
    a1 = dw_ref(x, H0, CIN, K1, S1, wd1);
    a2 = pw_ref(a1, H1, CIN, C1, wp1, bp1);
    a3 = dw_ref(a2, H1, C1, K2, S2, wd2);
    a4 = pw_ref(a3, H2, C1, C2, wp2, bp2);
    return gap_ref(a4, H2, C2, wfc);
  endfunction

  // ---------------- monitors ----------------
  int n_pop = 0, n_af = 0, n_noaf = 0, n_manual = 0, n_xfer = 0, n_clear = 0, n_led = 0, n_stall = 0, n_wt = 0;
  arr_t   cur_win, last_win;
  longint exp_q[$];
  longint last_logit;
  logic clr_q = 0, led_q = 0;
  always @(negedge clk) if (rst_n) begin
    clr_q <= g_dut.dut.nn_clr;
    led_q <= led;
    if (led != led_q) n_led++;
    if (g_dut.dut.nn_clr && !clr_q) begin n_clear++; cur_win = {}; end
    if (g_dut.dut.fifo_valid && !g_dut.dut.fifo_ready) n_stall++;
    if (g_dut.dut.wt_we) n_wt++;
    if (g_dut.dut.fifo_valid && g_dut.dut.fifo_ready) n_pop++;
    if (g_dut.dut.nn_push) begin
      automatic int ch = cur_win.size() % CIN;
      checks++;
      if (16'(g_dut.dut.nn_data) != adc.sample(frames - 1, ch)) begin
        failures++; $display("sample frame %0d ch %0d: %h", frames - 1, ch, g_dut.dut.nn_data);
      end
      cur_win.push_back(longint'(g_dut.dut.nn_data));
      last_win = cur_win;
    end
    if (g_dut.dut.res_valid) begin
      // The network may finish before the window ends (the last time steps
      // reach no strided output); zero-padding stands for the unused tail.
      automatic arr_t xw = cur_win;
      while (xw.size() < WINDOW) xw.push_back(0);
      exp_q.push_back(model(xw));
      checks++;
      if (exp_q.size() == 0 || longint'(g_dut.dut.res_logit) != exp_q[0]) begin
        failures++; $display("logit %0d exp %0d", g_dut.dut.res_logit, (exp_q.size() != 0) ? exp_q[0] : 0);
      end
      last_logit = longint'(g_dut.dut.res_logit);
      if (exp_q.size() != 0) void'(exp_q.pop_front());
      if (g_dut.dut.res_af) n_af++; else n_noaf++;
    end
  end

  // ---------------- host tasks ----------------
  task automatic expect_eq(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin failures++; $display("%s: got %0d exp %0d", what, got, exp); end
  endtask

  task automatic load_weights(wsel_e sel, arr_t v, int base);
    logic [7:0] tx[$], rx[$];
    tx = {8'h04};
    foreach (v[i]) begin
      logic [15:0] a = 16'(base + i), d = 16'(v[i]);
      tx.push_back(8'(sel)); tx.push_back(a[15:8]); tx.push_back(a[7:0]);
      tx.push_back(d[15:8]); tx.push_back(d[7:0]);
    end
    host.xfer(tx, rx);
  endtask

  task automatic status(output logic [7:0] flags, output longint logit);
    logic [7:0] tx[$], rx[$];
    tx = {8'h01, 8'h0, 8'h0, 8'h0, 8'h0, 8'h0, 8'h0, 8'h0};
    host.xfer(tx, rx);
    flags = rx[1];
    logit = longint'(signed'({rx[2], rx[3], rx[4], rx[5]}));
  endtask

  // read the whole window; the first n words must equal the recorded samples
  task automatic read_check(arr_t rec);
    logic [7:0] tx[$], rx[$];
    int bad = 0;
    tx = {8'h02};
    for (int i = 0; i < 2 * WINDOW; i++) tx.push_back(8'h00);
    host.xfer(tx, rx);
    for (int i = 0; i < WINDOW; i++) begin
      logic [15:0] e = (i < rec.size()) ? 16'(rec[i]) : 16'h0000;
      if ({rx[1 + 2 * i], rx[2 + 2 * i]} != e) begin
        bad++;
        if (bad < 5) $display("word %0d: %h exp %h", i, {rx[1 + 2 * i], rx[2 + 2 * i]}, e);
      end
    end
    expect_eq("read-out mismatches", bad, 0);
  endtask

  task automatic done();
    logic [7:0] tx[$], rx[$];
    tx = {8'h03};
    host.xfer(tx, rx);
    n_xfer++;
  endtask

  // the SoC stores the first 512 bytes of a read-out window in eMMC block `blk`
  task automatic store_emmc(arr_t rec, int blk);
    logic [7:0] by[$];
    for (int i = 0; i < 256; i++) begin
      by.push_back(8'(rec[i] >> 8));
      by.push_back(8'(rec[i]));
    end
    while (emmc_busy) @(negedge clk);
    spi2_cs_n = 0;
    repeat (6) @(negedge clk);
    for (int i = 3; i >= 0; i--) by.push_front(8'(blk >> (8 * (3 - i))));
    // by now starts with the 4-byte block address, most significant byte first
    foreach (by[i])
      for (int k = 7; k >= 0; k--) begin
        spi2_mosi = by[i][k];
        repeat (6) @(negedge clk);
        spi2_sclk = 1;
        repeat (6) @(negedge clk);
        spi2_sclk = 0;
      end
    repeat (6) @(negedge clk);
    spi2_cs_n = 1;
    wait (card.n_blocks > 0 && card.blk.exists(blk));
    for (int i = 0; i < 512; i++) begin
      checks++;
      if (card.blk[blk][i] !== by[4 + i]) begin
        failures++;
        if (failures < 20) $display("eMMC block %0d byte %0d: %h expected %h", blk, i, card.blk[blk][i], by[4 + i]);
      end
    end
  endtask

  initial begin
    #(LIMIT * 10);
    failures++;
    $display("watchdog: af %0d noaf %0d manual %0d", n_af, n_noaf, n_manual);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [7:0] flags;
    longint logit;
    arr_t rec;
    wd1 = rand_arr(K1 * CIN, -60, 60);
    wp1 = rand_arr(CIN * C1, -60, 60);  bp1 = rand_arr(C1, -200, 400);
    wd2 = rand_arr(K2 * C1, -60, 60);
    wp2 = rand_arr(C1 * C2, -40, 40);   bp2 = rand_arr(C2, 2000, 4000);
    wfc = rand_arr(C2, 20, 200);
    repeat (3) @(negedge clk);
    rst_n = 1;
    load_weights(SEL_DW1, wd1, 0);
    load_weights(SEL_PW1, wp1, 0); load_weights(SEL_PW1, bp1, CIN * C1);
    load_weights(SEL_DW2, wd2, 0);
    load_weights(SEL_PW2, wp2, 0); load_weights(SEL_PW2, bp2, C1 * C2);
    load_weights(SEL_FC, wfc, 0);
    expect_eq("weight words written", n_wt, wd1.size() + wp1.size() + bp1.size() + wd2.size()
              + wp2.size() + bp2.size() + wfc.size());
    run = 1;
    // ---- window with AF ----
    wait (irq);
    status(flags, logit);
    expect_eq("event/af/manual flags", flags[3:0], 4'b0011);
    expect_eq("status logit", logit, last_logit);
    expect_eq("ctrl state EVENT", flags[7:6], 3);
    rec = last_win;
    expect_eq("window length", rec.size(), WINDOW);
    read_check(rec);
    store_emmc(rec, 7);
    if (!FULL) begin
      foreach (wfc[i]) wfc[i] = -wfc[i];
      load_weights(SEL_FC, wfc, 0);
    end
    done();
    wait (!irq);
    if (FULL) begin
      wait (g_dut.dut.ctrl_state == 2'd1);     // cleared, recording again
    end else begin
      // ---- window without AF ----
      wait (n_noaf == 1);
      expect_eq("no interrupt", irq, 0);
      // ---- manual trigger part-way through the next window ----
      wait (g_dut.dut.ctrl_state == 2'd1);
      wait (cur_win.size() >= WINDOW / 2);
      button = 1;
      wait (irq);
      button = 0;
      n_manual++;
      status(flags, logit);
      expect_eq("manual flags", flags[3:0], 4'b0101);
      rec = last_win;
      read_check(rec);
      done();
      wait (!irq);
    end
    status(flags, logit);
    expect_eq("no FIFO overflow", flags[3], 0);
    $display("mechanisms: af %0d noaf %0d manual %0d transfers %0d clears %0d led %0d stall_cycles %0d emmc_blocks %0d",
             n_af, n_noaf, n_manual, n_xfer, n_clear, n_led, n_stall, card.n_blocks);
    checks++; if (card.n_blocks == 0 || card.errors != 0) begin failures++; $display("no eMMC block stored cleanly"); end
    checks++; if (n_af    == 0) begin failures++; $display("no AF event"); end
    checks++; if (n_xfer  == 0) begin failures++; $display("no transfer"); end
    checks++; if (n_clear < 2)  begin failures++; $display("no clear after an event"); end
    checks++; if (n_led   == 0) begin failures++; $display("LED never flashed"); end
    checks++; if (n_stall == 0) begin failures++; $display("network never stalled the FIFO"); end
    if (!FULL) begin
      checks++; if (n_noaf   == 0) begin failures++; $display("no no-AF window"); end
      checks++; if (n_manual == 0) begin failures++; $display("no manual event"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
