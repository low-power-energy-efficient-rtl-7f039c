// tb_spi_slave: the host SPI command set against a memory model and fixed
// status inputs: STATUS reply bytes, READ of consecutive words from address
// 0, the DONE pulse and WEIGHT writes (values, selector, address).
module tb_spi_slave;
  import afd_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic spi_sclk, spi_cs_n, spi_mosi, spi_miso;
  logic [1:0] st_state = 2'd3;
  logic st_event = 1, st_af = 1, st_manual = 0, st_fifo_ovf = 1;
  mac_t st_logit = 32'h12345678;
  logic [15:0] st_dropped = 16'habcd;
  logic rd_en; logic [15:0] rd_addr; logic [15:0] rd_data = 0;
  logic xfer_done, wt_we; wsel_e wt_sel; logic [15:0] wt_addr; wgt_t wt_data;
  always #5 clk = !clk;

  spi_slave #(.AW(16)) dut (.*);
  bgm240_model #(.HALF(6)) host (.clk, .sclk(spi_sclk), .cs_n(spi_cs_n), .mosi(spi_mosi), .miso(spi_miso));

  function automatic logic [15:0] memval(logic [15:0] a);
    return a * 16'd7919 + 16'h1234;
  endfunction
  always @(posedge clk) if (rd_en) rd_data <= memval(rd_addr);

  int n_done = 0;
  logic [39:0] wlog[$];
  always @(posedge clk) begin
    if (rst_n && xfer_done) n_done++;
    if (rst_n && wt_we) wlog.push_back({5'b0, wt_sel, wt_addr, wt_data});
  end

  task automatic expect_eq(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin failures++; $display("%s: got %h exp %h", what, got, exp); end
  endtask

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [7:0] tx[$], rx[$];
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (5) @(posedge clk);
    // STATUS
    tx = {8'h01, 8'h00, 8'h00, 8'h00, 8'h00, 8'h00, 8'h00, 8'h00};
    host.xfer(tx, rx);
    expect_eq("flags", rx[1], 8'hcb);
    expect_eq("logit", {rx[2], rx[3], rx[4], rx[5]}, 32'h12345678);
    expect_eq("dropped", {rx[6], rx[7]}, 16'habcd);
    // READ 20 words
    tx = {8'h02};
    for (int i = 0; i < 40; i++) tx.push_back(8'h00);
    host.xfer(tx, rx);
    for (int i = 0; i < 20; i++) expect_eq($sformatf("word %0d", i), {rx[1 + 2 * i], rx[2 + 2 * i]}, memval(16'(i)));
    // DONE
    tx = {8'h03};
    host.xfer(tx, rx);
    expect_eq("done pulses", n_done, 1);
    // WEIGHT x2
    tx = {8'h04, 8'h03, 8'h01, 8'h23, 8'hfe, 8'hdc, 8'h04, 8'h10, 8'h00, 8'h01, 8'h7f};
    host.xfer(tx, rx);
    expect_eq("weights", wlog.size(), 2);
    if (wlog.size() == 2) begin
      expect_eq("w0", wlog[0], {5'b0, 3'd3, 16'h0123, 16'hfedc});
      expect_eq("w1", wlog[1], {5'b0, 3'd4, 16'h1000, 16'h017f});
    end
    expect_eq("no extra done", n_done, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
