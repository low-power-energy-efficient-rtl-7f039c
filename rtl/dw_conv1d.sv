// dw_conv1d: 1D depthwise convolution with a circular line buffer.
//
// For every channel c and output step j it computes
//   y[j][c] = sum_{k=0}^{K-1} x[j*S + k][c] * Wd[k][c]
// (valid convolution, no padding) and emits y rounded to the activation
// format. The input is an element-serial AXI4-Stream-style stream (valid,
// ready, data), channel index fastest: x[0][0], x[0][1], ..., x[0][C-1],
// x[1][0], ... The line buffer keeps the last K time steps of all C
// channels (K*C words, addressed {slot, channel}); since S <= K the buffer
// never has to hold more than one kernel window, which is the paper's
// stride <= kernel-size constraint.
//
// Timing: one input element per cycle is accepted while no output is being
// computed. After the last channel of a time step h with h >= K-1 and
// (h-K+1) mod S == 0, s_ready drops and the single MAC computes the C outputs,
// 2 cycles per tap (address, multiply-accumulate; both memories read
// synchronously), then holds each output on m_valid until m_ready. A window
// therefore costs C*(2K+1) cycles per output step plus handshake waits.
// clr returns the module to time step 0 (new window); weights are kept.
// Weights are loaded through wt_we/wt_addr/wt_data at address k*C + c.
// The structure (line buffer feeding a MAC unit, powers of two, S <= K)
// follows the paper; the one-MAC schedule and the formats are this design's.
module dw_conv1d
  import afd_pkg::*;
#(
  parameter int C = 2,
  parameter int K = 128,
  parameter int S = 8
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        clr,
  // weight load
  input  logic        wt_we,
  input  logic [15:0] wt_addr,
  input  wgt_t        wt_data,
  // input stream
  input  logic        s_valid,
  output logic        s_ready,
  input  act_t        s_data,
  // output stream
  output logic        m_valid,
  input  logic        m_ready,
  output act_t        m_data
);
  localparam int CB = (C > 1) ? $clog2(C) : 1;
  localparam int KB = (K > 1) ? $clog2(K) : 1;
  localparam int SB = (S > 1) ? $clog2(S) : 1;
  localparam int NW = K * C;
  localparam int AB = $clog2(NW);

  // Line buffer and weights (EBR-style memories, synchronous read).
  act_t lbuf [NW];
  wgt_t wmem [NW];

  typedef enum logic [1:0] {S_IN, S_ADDR, S_MAC, S_OUT} state_e;
  state_e state;

  logic [CB-1:0] c_in;      // channel of the next input element
  logic [KB-1:0] slot;      // line-buffer slot of the current time step
  logic [KB-1:0] base;      // oldest slot of the window being computed
  logic [31:0]   h_cnt;     // time steps received in this window
  logic [SB-1:0] s_cnt;     // stride phase
  logic [CB-1:0] c_cmp;     // channel being computed
  logic [KB-1:0] k_cmp;     // tap being computed
  acc_t          acc;
  act_t          rd_x;
  wgt_t          rd_w;

  logic [KB-1:0] rd_slot;
  assign rd_slot = base + k_cmp;   // wraps modulo K (K is a power of two)

  function automatic logic [AB-1:0] lb_addr(input logic [KB-1:0] sl, input logic [CB-1:0] ch);
    return AB'(32'(sl) * C + 32'(ch));
  endfunction

  always_ff @(posedge clk) begin
    if (wt_we && wt_addr < 16'(NW)) wmem[wt_addr[AB-1:0]] <= wt_data;
    if (state == S_IN && s_valid) lbuf[lb_addr(slot, c_in)] <= s_data;
    if (state == S_ADDR) begin
      rd_x <= lbuf[lb_addr(rd_slot, c_cmp)];
      rd_w <= wmem[lb_addr(k_cmp, c_cmp)];
    end
  end

  assign s_ready = (state == S_IN);
  assign m_valid = (state == S_OUT);
  assign m_data  = mac_to_act(acc_to_mac(acc));

  logic last_ch;
  logic window_full;
  assign last_ch     = (c_in == CB'(C - 1));
  assign window_full = (h_cnt >= 32'(K - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IN;
      c_in  <= '0;
      slot  <= '0;
      base  <= '0;
      h_cnt <= '0;
      s_cnt <= '0;
      c_cmp <= '0;
      k_cmp <= '0;
      acc   <= '0;
    end else if (clr) begin
      state <= S_IN;
      c_in  <= '0;
      slot  <= '0;
      h_cnt <= '0;
      s_cnt <= '0;
    end else begin
      unique case (state)
        S_IN: if (s_valid) begin
          if (last_ch) begin
            c_in  <= '0;
            slot  <= slot + 1'b1;
            h_cnt <= h_cnt + 1;
            if (window_full) begin
              s_cnt <= (S > 1) ? SB'((32'(s_cnt) + 1) % S) : '0;
              if (s_cnt == '0) begin
                state <= S_ADDR;
                base  <= slot + 1'b1;   // oldest of the K slots just written
                c_cmp <= '0;
                k_cmp <= '0;
                acc   <= '0;
              end
            end
          end else begin
            c_in <= c_in + 1'b1;
          end
        end
        S_ADDR: state <= S_MAC;
        S_MAC: begin
          acc <= acc + acc_t'(rd_x) * acc_t'(rd_w);
          if (k_cmp == KB'(K - 1)) begin
            state <= S_OUT;
          end else begin
            k_cmp <= k_cmp + 1'b1;
            state <= S_ADDR;
          end
        end
        S_OUT: if (m_ready) begin
          acc   <= '0;
          k_cmp <= '0;
          if (c_cmp == CB'(C - 1)) begin
            state <= S_IN;
          end else begin
            c_cmp <= c_cmp + 1'b1;
            state <= S_ADDR;
          end
        end
        default: state <= S_IN;
      endcase
    end
  end

  // Stream rule: data held stable while valid waits for ready.
  a_hold: assert property (@(posedge clk) disable iff (!rst_n || clr)
                           m_valid && !m_ready |=> m_valid && $stable(m_data));
  initial begin
    assert (S <= K) else $error("dw_conv1d: stride must not exceed kernel size");
    assert ((K & (K - 1)) == 0) else $error("dw_conv1d: K must be a power of two");
  end
endmodule
