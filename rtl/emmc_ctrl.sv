// emmc_ctrl - eMMC write controller behind a second SPI link from the BLE SoC.
//
// What it does
//   The BLE SoC has no eMMC host, so when the phone is out of reach it sends a
//   recorded window back to the FPGA over a second SPI and this block writes it
//   into eMMC flash, 512-byte block by block.
//
// How it works
//   * SPI side (SoC is master, mode 0, MSB first): each frame (cs_n low) starts
//     with a 4-byte start block address, MSB first, followed by data bytes.
//     Every 512 data bytes form one block at the next block address. A frame
//     that ends in the middle of a block is written with the rest of the block
//     zero-filled. The FPGA clock must be at least 8x the SPI clock.
//   * Two 512-byte buffers (ping-pong). While one is written to eMMC the other
//     fills. `busy` is high while the buffer being filled is still owned by the
//     eMMC side; bytes that arrive then are dropped and counted in `ovf_cnt`.
//   * eMMC side, 1-bit bus, one clock emmc_clk = clk/(2*CLK_DIV) for the whole
//     session. Outputs change on the falling edge of emmc_clk, inputs are
//     sampled on its rising edge. After reset: INIT_CLKS clocks with CMD high,
//     CMD0 (go idle), CMD1 with OCR_ARG repeated until the OCR busy bit reports
//     ready, CMD2 (R2, CID ignored), CMD3 (set RCA), CMD7 (select, R1b). Then
//     each full buffer is written with CMD24 (single block write, R1), a data
//     packet on DAT0 (start bit, 4096 bits, CRC16, end bit), the card's CRC
//     status token and the busy wait on DAT0.
//   * A response that does not start within RESP_TIMEOUT clocks sets `err` and
//     the command is sent again. Response CRCs are not checked; a CRC status
//     token other than "010" sets `err` (the block is not retried).
//
// Interface
//   spi2_*       second SPI from the SoC (inputs are asynchronous).
//   emmc_clk     eMMC clock output.
//   emmc_cmd_*   CMD line, split into out/enable/in for the I/O pad.
//   emmc_dat_*   DAT0 line, same split. The bus pull-ups are on the board.
//   ready        card initialised; busy, ovf_cnt, err, blocks: status.
//
// Paper versus own choices
//   The paper states only that an eMMC controller is implemented on the FPGA
//   and fed from the BLE SoC over a second SPI. The frame format, the ping-pong
//   buffering, the 1-bit bus mode, the single clock rate for identification and
//   data transfer, and the reduced command sequence are this design's choices
//   (the simplest sequence that brings a card from reset to block writes).
module emmc_ctrl #(
  parameter int unsigned CLK_DIV      = 2,
  parameter int unsigned INIT_CLKS    = 80,
  parameter int unsigned RESP_TIMEOUT = 64,
  parameter logic [15:0] RCA          = 16'h0001,
  parameter logic [31:0] OCR_ARG      = 32'h40FF8080
) (
  input  logic        clk,
  input  logic        rst_n,
  // second SPI from the SoC
  input  logic        spi2_sclk,
  input  logic        spi2_cs_n,
  input  logic        spi2_mosi,
  // eMMC bus
  output logic        emmc_clk,
  output logic        emmc_cmd_o,
  output logic        emmc_cmd_oe,
  input  logic        emmc_cmd_i,
  output logic        emmc_dat_o,
  output logic        emmc_dat_oe,
  input  logic        emmc_dat_i,
  // status
  output logic        ready,
  output logic        busy,
  output logic        err,
  output logic [15:0] ovf_cnt,
  output logic [15:0] blocks
);

  localparam int unsigned BLK = 512;

  // ------------------------------------------------------------------ SPI in
  logic [2:0] sclk_s, cs_s;
  logic [1:0] mosi_s;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sclk_s <= '0; cs_s <= '1; mosi_s <= '0;
    end else begin
      sclk_s <= {sclk_s[1:0], spi2_sclk};
      cs_s   <= {cs_s[1:0], spi2_cs_n};
      mosi_s <= {mosi_s[0], spi2_mosi};
    end
  end
  wire sclk_rise = sclk_s[1] & ~sclk_s[2];
  wire cs_low    = ~cs_s[1];
  wire cs_rise   = cs_s[1] & ~cs_s[2];

  logic [2:0] rx_bit;
  logic [6:0] rx_sr;
  logic       rx_valid;
  logic [7:0] rx_byte;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rx_bit <= '0; rx_sr <= '0; rx_valid <= 1'b0; rx_byte <= '0;
    end else begin
      rx_valid <= 1'b0;
      if (!cs_low) rx_bit <= '0;
      else if (sclk_rise) begin
        rx_sr  <= {rx_sr[5:0], mosi_s[1]};
        rx_bit <= rx_bit + 3'd1;
        if (rx_bit == 3'd7) begin
          rx_valid <= 1'b1;
          rx_byte  <= {rx_sr[6:0], mosi_s[1]};
        end
      end
    end
  end

  // ------------------------------------------------------- ping-pong buffers
  logic [7:0]  buf_mem [2*BLK];
  logic [1:0]  full;             // buffer h holds a block for the eMMC side
  logic [9:0]  len   [2];        // valid bytes in buffer h (rest reads as 0)
  logic [31:0] baddr [2];        // target block address of buffer h
  logic        wr_h;             // buffer being filled
  logic [9:0]  wr_idx;           // bytes in it so far
  logic [2:0]  hdr_cnt;          // address bytes still expected (4 at frame start)
  logic [31:0] frame_addr;       // block address for the next block of the frame
  logic        rel;              // eMMC side releases buffer rd_h
  logic        rd_h;             // buffer the eMMC side writes next

  assign busy = full[wr_h];

  wire buf_we = rx_valid && !cs_rise && hdr_cnt == 3'd0 && !full[wr_h];
  always_ff @(posedge clk)
    if (buf_we) buf_mem[{wr_h, wr_idx[8:0]}] <= rx_byte;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      full <= '0; wr_h <= 1'b0; wr_idx <= '0; hdr_cnt <= 3'd4; frame_addr <= '0;
      ovf_cnt <= '0;
      len[0] <= '0; len[1] <= '0; baddr[0] <= '0; baddr[1] <= '0;
    end else begin
      if (rel) full[rd_h] <= 1'b0;
      if (cs_rise) begin
        hdr_cnt <= 3'd4;
        if (wr_idx != '0 && !full[wr_h]) begin   // flush a partial block
          full[wr_h]  <= 1'b1;
          len[wr_h]   <= wr_idx;
          baddr[wr_h] <= frame_addr;
          wr_h        <= ~wr_h;
          wr_idx      <= '0;
        end
      end else if (rx_valid) begin
        if (hdr_cnt != 3'd0) begin
          frame_addr <= {frame_addr[23:0], rx_byte};
          hdr_cnt    <= hdr_cnt - 3'd1;
        end else if (full[wr_h]) begin
          if (ovf_cnt != '1) ovf_cnt <= ovf_cnt + 16'd1;
        end else begin
          if (wr_idx == 10'(BLK - 1)) begin
            full[wr_h]  <= 1'b1;
            len[wr_h]   <= 10'(BLK);
            baddr[wr_h] <= frame_addr;
            frame_addr  <= frame_addr + 32'd1;
            wr_h        <= ~wr_h;
            wr_idx      <= '0;
          end else begin
            wr_idx <= wr_idx + 10'd1;
          end
        end
      end
    end
  end

  // ------------------------------------------------------------- eMMC clock
  localparam int unsigned DW = (CLK_DIV > 1) ? $clog2(CLK_DIV) : 1;
  logic [DW-1:0] div_cnt;
  logic          eclk;
  wire           tick = (div_cnt == DW'(CLK_DIV - 1));
  wire           rise = tick & ~eclk;  // emmc_clk goes high: sample inputs
  wire           fall = tick &  eclk;  // emmc_clk goes low: change outputs
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      div_cnt <= '0; eclk <= 1'b0;
    end else begin
      div_cnt <= tick ? '0 : div_cnt + DW'(1);
      if (tick) eclk <= ~eclk;
    end
  end
  assign emmc_clk = eclk;

  // input samples at the rising edge
  logic cmd_in, dat_in;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cmd_in <= 1'b1; dat_in <= 1'b1;
    end else if (rise) begin
      cmd_in <= emmc_cmd_i; dat_in <= emmc_dat_i;
    end
  end
  // `smp` is true one clk cycle after a rising edge, when cmd_in/dat_in are new
  logic smp;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) smp <= 1'b0;
    else        smp <= rise;
  end

  // ---------------------------------------------------------- CRC functions
  function automatic logic [6:0] crc7(input logic [39:0] d);
    logic [6:0] c = '0;
    for (int i = 39; i >= 0; i--) begin
      logic fb = d[i] ^ c[6];
      c = {c[5:0], 1'b0};
      if (fb) c = c ^ 7'h09;
    end
    return c;
  endfunction

  // ---------------------------------------------------------- sequencer
  typedef enum logic [3:0] {
    E_INIT, E_CMD, E_RWAIT, E_RESP, E_BUSY, E_GAP, E_IDLE,
    E_DWAIT, E_DATA, E_CRCS, E_WBUSY
  } est_e;
  typedef enum logic [2:0] {
    P_CMD0, P_CMD1, P_CMD2, P_CMD3, P_CMD7, P_RUN, P_WRITE
  } step_e;

  est_e        st;
  step_e       step;
  logic [47:0] cmd_sr;
  logic [5:0]  cmd_bits;     // bits left to send
  logic [7:0]  cnt;          // general clock counter (timeouts, gaps)
  logic [7:0]  resp_len;     // response length in bits, 0 = none
  logic [7:0]  resp_bits;
  logic [47:0] resp_sr;      // last 48 response bits
  logic        resp_busy;    // response is R1b
  logic [12:0] dcnt;         // data packet bit counter
  logic [7:0]  cur_byte;
  logic [8:0]  load_idx;
  logic [7:0]  rd_byte;
  logic [15:0] crc16;
  logic [3:0]  tok;
  logic [2:0]  tok_bits;

  always_ff @(posedge clk) rd_byte <= buf_mem[{rd_h, load_idx}];
  wire [7:0] next_byte = ({1'b0, load_idx} < len[rd_h]) ? rd_byte : 8'h00;

  function automatic logic [47:0] mk_cmd(input logic [5:0] idx, input logic [31:0] arg);
    logic [39:0] h = {2'b01, idx, arg};
    return {h, crc7(h), 1'b1};
  endfunction

  // command, response length and R1b flag of each step
  task automatic issue(input logic [5:0] idx, input logic [31:0] arg,
                       input logic [7:0] rlen, input logic rb);
    cmd_sr    <= mk_cmd(idx, arg);
    cmd_bits  <= 6'd48;
    resp_len  <= rlen;
    resp_busy <= rb;
    st        <= E_CMD;
  endtask

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= E_INIT; step <= P_CMD0; cnt <= '0;
      cmd_sr <= '1; cmd_bits <= '0; resp_len <= '0; resp_bits <= '0; resp_sr <= '0;
      resp_busy <= 1'b0; dcnt <= '0; cur_byte <= '0; load_idx <= '0; crc16 <= '0;
      tok <= '0; tok_bits <= '0; rd_h <= 1'b0; rel <= 1'b0;
      emmc_cmd_o <= 1'b1; emmc_cmd_oe <= 1'b0; emmc_dat_o <= 1'b1; emmc_dat_oe <= 1'b0;
      ready <= 1'b0; err <= 1'b0; blocks <= '0;
    end else begin
      rel <= 1'b0;
      unique case (st)
        E_INIT: if (fall) begin
          emmc_cmd_oe <= 1'b1; emmc_cmd_o <= 1'b1;
          cnt <= cnt + 8'd1;
          if (cnt == 8'(INIT_CLKS - 1)) begin
            cnt <= '0;
            issue(6'd0, 32'h0, 8'd0, 1'b0);
          end
        end
        E_CMD: if (fall) begin
          if (cmd_bits != '0) begin
            emmc_cmd_oe <= 1'b1;
            emmc_cmd_o  <= cmd_sr[47];
            cmd_sr      <= {cmd_sr[46:0], 1'b1};
            cmd_bits    <= cmd_bits - 6'd1;
          end else begin
            emmc_cmd_oe <= 1'b0;
            emmc_cmd_o  <= 1'b1;
            cnt         <= '0;
            st          <= (resp_len == '0) ? E_GAP : E_RWAIT;
          end
        end
        E_RWAIT: if (smp) begin
          if (!cmd_in) begin
            resp_bits <= 8'd1;
            resp_sr   <= 48'h0;
            st        <= E_RESP;
          end else if (cnt == 8'(RESP_TIMEOUT)) begin
            err <= 1'b1;
            cnt <= '0;
            st  <= E_GAP;                 // step unchanged: command is resent
          end else cnt <= cnt + 8'd1;
        end
        E_RESP: if (smp) begin
          resp_sr   <= {resp_sr[46:0], cmd_in};
          resp_bits <= resp_bits + 8'd1;
          if (resp_bits == resp_len - 8'd1) begin
            cnt <= '0;
            st  <= resp_busy ? E_BUSY : E_GAP;
            // advance the sequence (resp_sr here lacks the final end bit)
            unique case (step)
              P_CMD1:  if (resp_sr[38]) step <= P_CMD2;  // OCR bit 31: power-up done
              P_CMD2:  step <= P_CMD3;
              P_CMD3:  step <= P_CMD7;
              P_CMD7:  step <= P_RUN;
              P_WRITE: begin
                st       <= E_DWAIT;
                load_idx <= '0;
              end
              default: ;
            endcase
          end
        end
        E_BUSY: if (smp) begin             // R1b: wait for DAT0 to return high
          cnt <= cnt + 8'd1;
          if (cnt >= 8'd2 && dat_in) begin
            cnt <= '0;
            st  <= E_GAP;
          end
        end
        E_GAP: if (fall) begin             // 8 clocks between commands
          cnt <= cnt + 8'd1;
          if (cnt == 8'd7) begin
            cnt <= '0;
            unique case (step)
              P_CMD0: begin step <= P_CMD1; issue(6'd1, OCR_ARG, 8'd48, 1'b0); end
              P_CMD1: issue(6'd1, OCR_ARG, 8'd48, 1'b0);
              P_CMD2: issue(6'd2, 32'h0, 8'd136, 1'b0);
              P_CMD3: issue(6'd3, {RCA, 16'h0}, 8'd48, 1'b0);
              P_CMD7: issue(6'd7, {RCA, 16'h0}, 8'd48, 1'b1);
              P_WRITE: issue(6'd24, baddr[rd_h], 8'd48, 1'b0);  // resend after timeout
              default: st <= E_IDLE;
            endcase
          end
        end
        E_IDLE: begin
          ready <= 1'b1;
          if (full[rd_h]) begin
            step <= P_WRITE;
            issue(6'd24, baddr[rd_h], 8'd48, 1'b0);
          end
        end
        E_DWAIT: if (fall) begin           // at least two clocks before the data
          cnt <= cnt + 8'd1;
          if (cnt == 8'd2) begin
            cnt   <= '0;
            dcnt  <= '0;
            crc16 <= '0;
            st    <= E_DATA;
          end
        end
        E_DATA: if (fall) begin
          dcnt <= dcnt + 13'd1;
          if (dcnt == 13'd0) begin
            emmc_dat_oe <= 1'b1; emmc_dat_o <= 1'b0;      // start bit
            cur_byte    <= next_byte;
            load_idx    <= load_idx + 9'd1;
          end else if (dcnt <= 13'(8 * BLK)) begin
            emmc_dat_o <= cur_byte[7];
            crc16      <= {crc16[14:0], 1'b0} ^ ((cur_byte[7] ^ crc16[15]) ? 16'h1021 : 16'h0);
            if (dcnt[2:0] == 3'd0) begin                  // last bit of this byte
              cur_byte <= next_byte;
              load_idx <= load_idx + 9'd1;
            end else begin
              cur_byte <= {cur_byte[6:0], 1'b0};
            end
          end else if (dcnt <= 13'(8 * BLK + 16)) begin
            emmc_dat_o <= crc16[15];
            crc16      <= {crc16[14:0], 1'b0};
          end else if (dcnt == 13'(8 * BLK + 17)) begin
            emmc_dat_o <= 1'b1;                           // end bit
          end else begin
            emmc_dat_oe <= 1'b0;
            cnt         <= '0;
            st          <= E_CRCS;
          end
        end
        E_CRCS: if (smp) begin            // CRC status token: 0 s2 s1 s0 1
          if (tok_bits == '0) begin
            if (!dat_in) tok_bits <= 3'd1;
            else if (cnt == 8'(RESP_TIMEOUT)) begin
              err <= 1'b1; cnt <= '0; st <= E_WBUSY;
            end else cnt <= cnt + 8'd1;
          end else begin
            tok      <= {tok[2:0], dat_in};
            tok_bits <= tok_bits + 3'd1;
            if (tok_bits == 3'd4) begin                   // end bit sampled
              if (tok[2:0] != 3'b010) err <= 1'b1;
              tok_bits <= '0;
              cnt      <= '0;
              st       <= E_WBUSY;
            end
          end
        end
        E_WBUSY: if (smp) begin           // programming busy on DAT0
          cnt <= cnt + 8'd1;
          if (cnt >= 8'd2 && dat_in) begin
            rel    <= 1'b1;
            rd_h   <= ~rd_h;
            blocks <= blocks + 16'd1;
            step   <= P_RUN;
            cnt    <= '0;
            st     <= E_GAP;
          end
        end
        default: st <= E_INIT;
      endcase
    end
  end

  // the two sides never own the same buffer
  a_own: assert property (@(posedge clk) disable iff (!rst_n)
                          (st == E_DATA) |-> full[rd_h]);

endmodule
