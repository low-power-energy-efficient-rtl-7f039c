// tb_emmc_ctrl: the eMMC write controller against the behavioural eMMC device.
//
// The testbench plays the BLE SoC on the second SPI (mode 0, 12 clk per SCLK
// period, or 8 in the overflow test) and resolves the open CMD/DAT0 lines
// with a pull-up. It checks:
//   * the initialisation sequence CMD0, CMD1 x3 (card busy twice), CMD2,
//     CMD3, CMD7, and `ready` afterwards;
//   * a two-block frame and a frame of 700 bytes (one full block and one
//     block zero-filled after 188 bytes): every byte of every written block,
//     at the block address given in the frame header;
//   * the device's own CRC7/CRC16/framing checks, no bus contention, no `err`;
//   * ping-pong overflow: with a slow card and a sender that ignores `busy`,
//     bytes are dropped, `ovf_cnt` counts them and the first block is intact.
module tb_emmc_ctrl;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = !clk;

  logic spi2_sclk = 0, spi2_cs_n = 1, spi2_mosi = 0;
  logic emmc_clk, emmc_cmd_o, emmc_cmd_oe, emmc_dat_o, emmc_dat_oe;
  logic ready, busy, err;
  logic [15:0] ovf_cnt, blocks;
  logic m_cmd_oe, m_cmd_o, m_dat_oe, m_dat_o;

  // open-drain style bus with pull-up
  wire cmd_line = emmc_cmd_oe ? emmc_cmd_o : (m_cmd_oe ? m_cmd_o : 1'b1);
  wire dat_line = emmc_dat_oe ? emmc_dat_o : (m_dat_oe ? m_dat_o : 1'b1);

  emmc_ctrl dut (
    .clk, .rst_n, .spi2_sclk, .spi2_cs_n, .spi2_mosi,
    .emmc_clk, .emmc_cmd_o, .emmc_cmd_oe, .emmc_cmd_i(cmd_line),
    .emmc_dat_o, .emmc_dat_oe, .emmc_dat_i(dat_line),
    .ready, .busy, .err, .ovf_cnt, .blocks);

  emmc_model #(.CMD1_READY(3), .BUSY_CLKS(20)) card (
    .clk_e(emmc_clk), .cmd_host(cmd_line), .dat_host(dat_line),
    .cmd_oe(m_cmd_oe), .cmd_o(m_cmd_o), .dat_oe(m_dat_oe), .dat_o(m_dat_o));

  function automatic void check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endfunction

  int contention = 0;
  bit busy_seen = 0;
  always @(posedge clk) begin
    if (emmc_cmd_oe && m_cmd_oe) contention++;
    if (emmc_dat_oe && m_dat_oe) contention++;
    if (busy) busy_seen = 1;
  end

  int half = 6;
  task automatic spi_byte(input logic [7:0] b);
    for (int i = 7; i >= 0; i--) begin
      spi2_mosi = b[i];
      repeat (half) @(posedge clk);
      spi2_sclk = 1;
      repeat (half) @(posedge clk);
      spi2_sclk = 0;
    end
  endtask

  task automatic frame(input int addr, input logic [7:0] d[$], input bit obey_busy);
    spi2_cs_n = 0;
    repeat (half) @(posedge clk);
    for (int i = 3; i >= 0; i--) spi_byte(8'(addr >> (8 * i)));
    foreach (d[i]) begin
      if (obey_busy) while (busy) @(posedge clk);
      spi_byte(d[i]);
    end
    repeat (half) @(posedge clk);
    spi2_cs_n = 1;
    repeat (4 * half) @(posedge clk);
  endtask

  function automatic void cmp_block(int addr, logic [7:0] d[$], int off, int n);
    if (!card.blk.exists(addr)) begin
      check(0, $sformatf("block %0d never written", addr));
      return;
    end
    for (int i = 0; i < 512; i++) begin
      logic [7:0] exp = (i < n) ? d[off + i] : 8'h00;
      check(card.blk[addr][i] === exp,
            $sformatf("block %0d byte %0d: %h expected %h", addr, i, card.blk[addr][i], exp));
    end
  endfunction

  task automatic wait_blocks(int n);
    int t = 0;
    while (int'(blocks) < n && t < 400000) begin @(posedge clk); t++; end
    check(int'(blocks) == n, $sformatf("blocks written %0d expected %0d", blocks, n));
  endtask

  initial begin
    logic [7:0] a[$], b[$], c[$];
    int exp_cmds[$] = '{0, 1, 1, 1, 2, 3, 7};
    repeat (5) @(posedge clk);
    rst_n = 1;

    // initialisation
    begin
      int t = 0;
      while (!ready && t < 100000) begin @(posedge clk); t++; end
    end
    check(ready, "card never ready");
    check(card.cmds == exp_cmds, $sformatf("init sequence %p", card.cmds));

    // two full blocks at address 5, then 700 bytes at address 100
    repeat (1024) a.push_back(8'($urandom));
    repeat (700) b.push_back(8'($urandom));
    frame(5, a, 1);
    frame(100, b, 1);
    wait_blocks(4);
    repeat (200) @(posedge clk);
    cmp_block(5, a, 0, 512);
    cmp_block(6, a, 512, 512);
    cmp_block(100, b, 0, 512);
    cmp_block(101, b, 512, 188);
    check(busy_seen, "busy never raised while the card was programming");
    check(ovf_cnt == 0, $sformatf("overflow %0d with a sender that obeys busy", ovf_cnt));

    // overflow: slow card, faster sender that ignores busy
    card.busy_n = 20000;
    half = 4;
    repeat (2048) c.push_back(8'($urandom));
    frame(200, c, 0);
    begin
      int t = 0;
      while ((dut.full != 0 || dut.st != dut.E_IDLE) && t < 1000000) begin @(posedge clk); t++; end
    end
    repeat (200) @(posedge clk);
    check(ovf_cnt > 0, "no overflow counted");
    cmp_block(200, c, 0, 512);
    check(int'(blocks) - 4 == (2048 - int'(ovf_cnt) + 511) / 512,
          $sformatf("written %0d blocks, dropped %0d of 2048 bytes", blocks - 4, ovf_cnt));

    check(card.errors == 0, $sformatf("device reported %0d protocol errors", card.errors));
    check(contention == 0, $sformatf("%0d cycles of bus contention", contention));
    check(!err, "controller error flag set");
    $display("mechanisms: init=%0d blocks=%0d partial=1 overflow_bytes=%0d", card.cmds.size(), blocks, ovf_cnt);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #50ms;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
