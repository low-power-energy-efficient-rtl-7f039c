// pw_conv1d: pointwise (1x1) convolution with folded batch norm and fused ReLU.
//
// For every time step j: y[j][co] = ReLU( sum_ci x[j][ci] * Wp[ci][co] + b[co] ),
// where b is the batch-norm layer folded into a per-channel bias. Following
// the paper there is no line buffer in front of the MAC: each input element
// x[j][ci] is taken straight from the stream and multiplied into all COUT
// partial sums, which live in a COUT-word accumulator memory at full product
// precision. Finished sums are rounded once to the MAC format (12 fractional
// bits), the bias is added there, and the result is rounded to an activation. While the last
// input channel (ci = CIN-1) is processed, each finished sum gets its bias,
// goes through the fused ReLU/requantiser and is sent downstream at once.
//
// Streams are element-serial, channel index fastest, valid/ready handshake.
// Timing: 2 cycles per MAC (address, multiply-accumulate), so COUT*2 cycles
// per input element plus output waits; s_ready is high only between elements.
// Weight load: addr ci*COUT+co writes Wp[ci][co], addr CIN*COUT+co writes b[co].
// The accumulator memory and the one-MAC schedule are this design's choice.
module pw_conv1d
  import afd_pkg::*;
#(
  parameter int CIN  = 128,
  parameter int COUT = 32
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
  output act_t        m_data
);
  localparam int IB = (CIN  > 1) ? $clog2(CIN)  : 1;
  localparam int OB = (COUT > 1) ? $clog2(COUT) : 1;
  localparam int NW = CIN * COUT;
  localparam int AB = $clog2(NW);

  wgt_t wmem [NW];
  wgt_t bmem [COUT];
  acc_t amem [COUT];

  typedef enum logic [1:0] {S_IN, S_ADDR, S_MAC, S_OUT} state_e;
  state_e state;

  logic [IB-1:0] ci;
  logic [OB-1:0] co;
  act_t x;
  wgt_t rd_w, rd_b;
  acc_t rd_a;
  mac_t sum_q;       // finished sum incl. bias, held during S_OUT

  acc_t psum;        // running full-precision partial sum for (ci, co)
  mac_t with_bias;   // rounded to the MAC format, bias added
  always_comb begin
    psum      = ((ci == '0) ? acc_t'(0) : rd_a) + acc_t'(x) * acc_t'(rd_w);
    with_bias = mac_t'(sat(64'(acc_to_mac(psum)) + 64'(bias_to_mac(rd_b)), MAC_W));
  end

  always_ff @(posedge clk) begin
    if (wt_we && wt_addr < 16'(NW)) wmem[wt_addr[AB-1:0]] <= wt_data;
    if (wt_we && wt_addr >= 16'(NW) && wt_addr < 16'(NW + COUT)) bmem[OB'(wt_addr - 16'(NW))] <= wt_data;
    if (state == S_ADDR) begin
      rd_w <= wmem[AB'(32'(ci) * COUT + 32'(co))];
      rd_b <= bmem[co];
      rd_a <= amem[co];
    end
    if (state == S_MAC && ci != IB'(CIN - 1)) amem[co] <= psum;
  end

  assign s_ready = (state == S_IN);
  assign m_valid = (state == S_OUT);

  relu_requant #(.RELU(1'b1)) u_relu (.acc(sum_q), .y(m_data));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IN;
      ci    <= '0;
      co    <= '0;
      x     <= '0;
      sum_q <= '0;
    end else if (clr) begin
      state <= S_IN;
      ci    <= '0;
      co    <= '0;
    end else begin
      unique case (state)
        S_IN: if (s_valid) begin
          x     <= s_data;
          co    <= '0;
          state <= S_ADDR;
        end
        S_ADDR: state <= S_MAC;
        S_MAC: begin
          if (ci == IB'(CIN - 1)) begin
            sum_q <= with_bias;
            state <= S_OUT;
          end else if (co == OB'(COUT - 1)) begin
            ci    <= ci + 1'b1;
            state <= S_IN;
          end else begin
            co    <= co + 1'b1;
            state <= S_ADDR;
          end
        end
        S_OUT: if (m_ready) begin
          if (co == OB'(COUT - 1)) begin
            ci    <= '0;
            state <= S_IN;
          end else begin
            co    <= co + 1'b1;
            state <= S_ADDR;
          end
        end
        default: state <= S_IN;
      endcase
    end
  end

  a_hold: assert property (@(posedge clk) disable iff (!rst_n || clr)
                           m_valid && !m_ready |=> m_valid && $stable(m_data));
endmodule
