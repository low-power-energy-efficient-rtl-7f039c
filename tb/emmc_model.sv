// emmc_model: behavioural eMMC device (1-bit bus) for the testbenches.
//
// It samples CMD and DAT0 on the rising edge of clk_e and drives them after
// the falling edge. It answers CMD0 (no response), CMD1 (R3; reports
// "powered up" from the CMD1_READY-th CMD1 on), CMD2 (R2), CMD3 (R1, takes
// the RCA from the argument), CMD7 (R1 and BUSY_CLKS of busy) and CMD24 (R1,
// then receives a 512-byte block on DAT0, returns the CRC status token and
// holds DAT0 low for busy_n (default BUSY_CLKS) clocks while "programming"). Written blocks are kept
// in `blk` by block address.
//
// Self-checks: every command's CRC7, every data packet's CRC16 and end bits,
// and that CMD7/CMD24 arrive only in the right state. They add to `errors`.
// cmds logs the command indices in order, for the testbench to compare.
module emmc_model #(
  parameter int CMD1_READY = 3,
  parameter int BUSY_CLKS  = 20
) (
  input  logic clk_e,
  input  logic cmd_host,      // CMD as driven by the host (1 when released)
  input  logic dat_host,      // DAT0 as driven by the host
  output logic cmd_oe, cmd_o,
  output logic dat_oe, dat_o
);
  int errors = 0;
  int n_cmd1 = 0;
  int n_blocks = 0;
  int busy_n = BUSY_CLKS;   // programming busy time, may be changed by the testbench
  logic [15:0] rca = 0;
  bit selected = 0;
  int cmds[$];
  logic [7:0] blk[int][512];

  initial begin cmd_oe = 0; cmd_o = 1; dat_oe = 0; dat_o = 1; end

  function automatic logic [6:0] crc7(logic [39:0] d);
    logic [6:0] c = 0;
    for (int i = 39; i >= 0; i--) begin
      automatic logic fb = d[i] ^ c[6];
      c = {c[5:0], 1'b0};
      if (fb) c ^= 7'h09;
    end
    return c;
  endfunction

  task automatic send_cmd_bits(input logic b[$]);
    repeat (2) @(negedge clk_e);              // NCR: two clocks before a response
    foreach (b[i]) begin
      @(negedge clk_e); cmd_oe = 1; cmd_o = b[i];
    end
    @(negedge clk_e); cmd_oe = 0; cmd_o = 1;
  endtask

  task automatic r1(input logic [5:0] idx);
    logic [39:0] h = {2'b00, idx, 32'h0000_0900};
    logic [47:0] f = {h, crc7(h), 1'b1};
    logic b[$];
    for (int i = 47; i >= 0; i--) b.push_back(f[i]);
    send_cmd_bits(b);
  endtask

  task automatic busy(input int n);
    @(negedge clk_e); dat_oe = 1; dat_o = 0;
    repeat (n) @(negedge clk_e);
    dat_o = 1;
    @(negedge clk_e); dat_oe = 0;
  endtask

  task automatic recv_block(input int addr);
    logic [15:0] crc = 0, rcrc;
    logic [7:0] data [512];
    // start bit
    do @(posedge clk_e); while (dat_host !== 1'b0);
    for (int i = 0; i < 512; i++) begin
      logic [7:0] by;
      for (int k = 7; k >= 0; k--) begin
        @(posedge clk_e);
        by[k] = dat_host;
        crc = {crc[14:0], 1'b0} ^ ((dat_host ^ crc[15]) ? 16'h1021 : 16'h0);
      end
      data[i] = by;
    end
    for (int k = 15; k >= 0; k--) begin @(posedge clk_e); rcrc[k] = dat_host; end
    @(posedge clk_e);
    if (dat_host !== 1'b1) begin errors++; $display("emmc_model: data end bit missing"); end
    if (rcrc !== crc) begin errors++; $display("emmc_model: CRC16 %h expected %h", rcrc, crc); end
    blk[addr] = data;
    n_blocks++;
    // CRC status token 0 010 1, then programming busy
    repeat (2) @(negedge clk_e);
    begin
      logic [4:0] t = {1'b0, (rcrc === crc) ? 3'b010 : 3'b101, 1'b1};
      for (int k = 4; k >= 0; k--) begin @(negedge clk_e); dat_oe = 1; dat_o = t[k]; end
    end
    busy(busy_n);
  endtask

  initial begin
    forever begin
      logic [47:0] f;
      @(posedge clk_e);
      if (cmd_host === 1'b0) begin
        f[47] = 1'b0;
        for (int i = 46; i >= 0; i--) begin @(posedge clk_e); f[i] = cmd_host; end
        if (f[46] !== 1'b1 || f[0] !== 1'b1 || crc7(f[47:8]) !== f[7:1]) begin
          errors++; $display("emmc_model: bad command frame %h", f);
        end
        cmds.push_back(int'(f[45:40]));
        case (f[45:40])
          6'd0: begin n_cmd1 = 0; selected = 0; end
          6'd1: begin
            automatic logic b[$];
            automatic logic [47:0] r;
            n_cmd1++;
            r = {2'b00, 6'h3f, (n_cmd1 >= CMD1_READY) ? 1'b1 : 1'b0, 31'h40FF8080, 7'h7f, 1'b1};
            for (int i = 47; i >= 0; i--) b.push_back(r[i]);
            send_cmd_bits(b);
          end
          6'd2: begin
            automatic logic b[$];
            b.push_back(1'b0); b.push_back(1'b0);
            repeat (6) b.push_back(1'b1);
            for (int i = 0; i < 127; i++) b.push_back(1'(i % 3));
            b.push_back(1'b1);
            send_cmd_bits(b);
          end
          6'd3: begin rca = f[39:24]; r1(6'd3); end
          6'd7: begin
            if (f[39:24] !== rca || rca == 0) begin errors++; $display("emmc_model: CMD7 RCA %h", f[39:24]); end
            selected = 1;
            r1(6'd7);
            busy(BUSY_CLKS);
          end
          6'd24: begin
            if (!selected) begin errors++; $display("emmc_model: CMD24 before CMD7"); end
            r1(6'd24);
            recv_block(int'(f[39:8]));
          end
          default: begin errors++; $display("emmc_model: unexpected CMD%0d", f[45:40]); end
        endcase
      end
    end
  end
endmodule
