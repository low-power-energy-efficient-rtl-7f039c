// recorder_ctrl: sequencing of the ECG loop recorder.
//
// States and what moves between them:
//   CLEAR   writes zero to every loop-buffer word (one per cycle) while the
//           network and the sample FIFO are held in clear; then ACQ.
//   ACQ     every incoming sample is written to the loop buffer at the next
//           address and pushed to the network's FIFO. After WINDOW samples
//           (one analysis window, both channels) it goes to WAIT_NN. A push
//           button press goes straight to EVENT with the manual flag set.
//   WAIT_NN waits for the network's result. AF -> EVENT; no AF -> CLEAR.
//           A button press here also goes to EVENT. The result can arrive
//           while still in ACQ: the last few time steps of a window may not
//           reach any output of the strided layers, so the network can finish
//           early. The result is latched (res_seen) whenever it arrives.
//   EVENT   irq is high and the LED toggles every LED_HALF cycles. The
//           recorded window stays in memory and the host SPI owns the memory
//           port (host_rd_*) until the host signals xfer_done; then CLEAR.
// Samples arriving outside ACQ are dropped and counted (dropped_cnt).
// The button input is synchronised with two flip-flops and acted on at its
// rising edge; debouncing is left to the external push-button controller.
// The sequence (record, analyse per window, interrupt and LED on AF, hold until
// transferred, clear and resume, manual trigger) is the paper's; the state
// encoding, the clear-by-writing and the dropping policy are this design's.
module recorder_ctrl
  import afd_pkg::*;
#(
  parameter int DEPTH    = 65536,
  parameter int AW       = $clog2(DEPTH),
  parameter int WINDOW   = 61440,
  parameter int LED_HALF = 6000000
) (
  input  logic          clk,
  input  logic          rst_n,
  // samples from the ADC interface
  input  logic          smp_valid,
  input  act_t          smp_data,
  // to the sample FIFO / network
  output logic          nn_push,
  output act_t          nn_data,
  output logic          nn_clr,
  input  logic          res_valid,
  input  logic          res_af,
  input  mac_t          res_logit,
  // loop buffer port
  output logic          mem_en,
  output logic          mem_we,
  output logic [AW-1:0] mem_addr,
  output logic [15:0]   mem_wdata,
  // host read access (honoured in EVENT only)
  input  logic          host_rd_en,
  input  logic [AW-1:0] host_rd_addr,
  input  logic          xfer_done,
  // board
  input  logic          button,
  output logic          irq,
  output logic          led,
  // status
  output logic [1:0]    state_o,
  output logic          af_flag,
  output logic          manual_flag,
  output mac_t          logit_q,
  output logic [15:0]   dropped_cnt
);
  typedef enum logic [1:0] {S_CLEAR, S_ACQ, S_WAIT_NN, S_EVENT} state_e;
  state_e state;

  logic [AW:0]   ptr;        // clear address / write address
  logic [2:0]    btn_sync;
  logic [31:0]   led_cnt;
  logic          res_seen;   // result of the current window latched
  logic          res_af_q;
  wire btn_rise = btn_sync[1] && !btn_sync[2];

  assign state_o = state;
  assign irq     = (state == S_EVENT);
  assign nn_clr  = (state == S_CLEAR);
  assign nn_push = (state == S_ACQ) && smp_valid;
  assign nn_data = smp_data;

  always_comb begin
    mem_en    = 1'b0;
    mem_we    = 1'b0;
    mem_addr  = ptr[AW-1:0];
    mem_wdata = '0;
    unique case (state)
      S_CLEAR: begin mem_en = 1'b1; mem_we = 1'b1; end
      S_ACQ:   begin mem_en = smp_valid; mem_we = smp_valid; mem_wdata = smp_data; end
      S_EVENT: begin mem_en = host_rd_en; mem_addr = host_rd_addr; end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_CLEAR;
      ptr         <= '0;
      btn_sync    <= '0;
      led_cnt     <= '0;
      led         <= 1'b0;
      af_flag     <= 1'b0;
      manual_flag <= 1'b0;
      logit_q     <= '0;
      dropped_cnt <= '0;
      res_seen    <= 1'b0;
      res_af_q    <= 1'b0;
    end else begin
      if (res_valid && (state == S_ACQ || state == S_WAIT_NN)) begin
        res_seen <= 1'b1;
        res_af_q <= res_af;
        logit_q  <= res_logit;
      end
      btn_sync <= {btn_sync[1:0], button};
      if (smp_valid && state != S_ACQ && dropped_cnt != '1) dropped_cnt <= dropped_cnt + 1'b1;
      unique case (state)
        S_CLEAR: begin
          res_seen <= 1'b0;
          if (ptr == (AW+1)'(DEPTH - 1)) begin
            ptr   <= '0;
            state <= S_ACQ;
          end else begin
            ptr <= ptr + 1'b1;
          end
        end
        S_ACQ: begin
          if (btn_rise) begin
            manual_flag <= 1'b1;
            af_flag     <= 1'b0;
            state       <= S_EVENT;
          end else if (smp_valid) begin
            if (ptr == (AW+1)'(WINDOW - 1)) begin
              ptr   <= '0;
              state <= S_WAIT_NN;
            end else begin
              ptr <= ptr + 1'b1;
            end
          end
        end
        S_WAIT_NN: begin
          if (btn_rise) begin
            manual_flag <= 1'b1;
            af_flag     <= 1'b0;
            state       <= S_EVENT;
          end else if (res_valid || res_seen) begin
            af_flag     <= res_valid ? res_af : res_af_q;
            manual_flag <= 1'b0;
            state       <= (res_valid ? res_af : res_af_q) ? S_EVENT : S_CLEAR;
          end
        end
        S_EVENT: begin
          if (led_cnt == 32'(LED_HALF - 1)) begin
            led_cnt <= '0;
            led     <= !led;
          end else begin
            led_cnt <= led_cnt + 1;
          end
          if (xfer_done) begin
            led     <= 1'b0;
            led_cnt <= '0;
            ptr     <= '0;
            state   <= S_CLEAR;
          end
        end
        default: state <= S_CLEAR;
      endcase
    end
  end

  initial assert (WINDOW <= DEPTH) else $error("recorder_ctrl: window larger than loop buffer");
endmodule
