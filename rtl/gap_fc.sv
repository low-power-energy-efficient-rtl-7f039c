// gap_fc: global average pooling fused with the single-output FC layer.
//
// The network ends in GAP over H time steps followed by an FC layer with C
// inputs and one logit. Both are linear, so the fused unit computes
//   logit = (1/H) * sum_{j<H} sum_{c<C} y[j][c] * Wfc[c]
// with one MAC as the elements stream in (channel index fastest) and never
// stores the pooled vector. The division by H is a multiply by the constant
// RECIP = round(2^RSH / H) followed by a rounding right shift, so H need not
// be a power of two. The logit is given in the MAC format (12 fractional bits)
// and the AF decision is logit > 0 (probability above one half).
//
// Timing: 2 cycles per input element (weight read, multiply-accumulate);
// after the H*C-th element one cycle forms the logit, which is then held on
// m_valid until m_ready. clr restarts the window. Weights: addr c = Wfc[c].
// The fusion of GAP and FC follows the paper; how it is fused, the threshold
// and the absence of an FC bias are this design's choices.
module gap_fc
  import afd_pkg::*;
#(
  parameter int C = 32,
  parameter int H = 477
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        clr,
  input  logic        wt_we,
  input  logic [15:0] wt_addr,
  input  wgt_t        wt_data,
  input  logic        s_valid,
  output logic        s_ready,
  input  act_t        s_data,
  output logic        m_valid,
  input  logic        m_ready,
  output mac_t        m_logit,
  output logic        m_af
);
  localparam int CB  = (C > 1) ? $clog2(C) : 1;
  localparam int RSH = 24;
  localparam longint HL    = longint'(H);
  localparam longint RECIP = ((64'sd1 <<< RSH) + HL / 2) / HL;

  wgt_t wmem [C];

  typedef enum logic [2:0] {S_IN, S_ADDR, S_MAC, S_FIN, S_OUT} state_e;
  state_e state;

  logic [CB-1:0] c;
  logic [31:0]   j;
  act_t          x;
  wgt_t          rd_w;
  acc_t          acc;
  mac_t          logit_q;

  always_ff @(posedge clk) begin
    if (wt_we && wt_addr < 16'(C)) wmem[CB'(wt_addr)] <= wt_data;
    if (state == S_ADDR) rd_w <= wmem[c];
  end

  assign s_ready = (state == S_IN);
  assign m_valid = (state == S_OUT);
  assign m_logit = logit_q;
  assign m_af    = (logit_q > 0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IN;
      c       <= '0;
      j       <= '0;
      x       <= '0;
      acc     <= '0;
      logit_q <= '0;
    end else if (clr) begin
      state <= S_IN;
      c     <= '0;
      j     <= '0;
      acc   <= '0;
    end else begin
      unique case (state)
        S_IN: if (s_valid) begin
          x     <= s_data;
          state <= S_ADDR;
        end
        S_ADDR: state <= S_MAC;
        S_MAC: begin
          acc <= acc + acc_t'(x) * acc_t'(rd_w);
          if (c == CB'(C - 1)) begin
            c <= '0;
            if (j == 32'(H - 1)) begin
              j     <= '0;
              state <= S_FIN;
            end else begin
              j     <= j + 1;
              state <= S_IN;
            end
          end else begin
            c     <= c + 1'b1;
            state <= S_IN;
          end
        end
        S_FIN: begin
          logit_q <= mac_t'(sat(rshift_round(64'(acc) * RECIP, RSH + PROD_FRAC - MAC_FRAC), MAC_W));
          state   <= S_OUT;
        end
        S_OUT: if (m_ready) begin
          acc   <= '0;
          state <= S_IN;
        end
        default: state <= S_IN;
      endcase
    end
  end

  a_hold: assert property (@(posedge clk) disable iff (!rst_n || clr)
                           m_valid && !m_ready |=> m_valid && $stable(m_logit));
endmodule
