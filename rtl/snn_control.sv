// snn_control: the TDM state machine of one Neuron Processing Unit (NPU).
// One input spike (AER address aer_in with a one-cycle req_in) is applied to
// every neuron of the layer, one neuron per clock cycle, in a two-stage pipe:
//   ST_IDLE  the cycle that sees req_in latches the source address and fetches
//            neuron 0's weight into the weight register (wreg_en).
//   ST_PROC  "neuron k process": the ALU adds the registered weight to neuron
//            k's voltage; the result, or 0 if it fired, is written back, and
//            the weight of neuron k+1 is fetched. N neurons take N+1 cycles.
//   ST_DELAY after a spike, when FIRE_DELAY > 0, the pass stalls for
//            FIRE_DELAY cycles (counted by the timer) so the next layer can
//            finish its own pass over that spike; the fetched weight is held.
// A spike leaves as aer_out with a one-cycle req_out in the cycle after the
// firing neuron's process cycle (the first delay cycle). ack pulses for one
// cycle when the pass is over and the unit is idle again; the sender must not
// raise req_in before that (an assertion checks it). State names, the pass
// order and the 9-cycle stall follow the paper's timing diagram; the
// two-stage pipe, the pulse lengths and the reset are this design's reading.
// The weight address is source * N + neuron. neuron_id repeats the counter
// value: it is the Neuron ID select that the register file is read and
// written with.
module snn_control
  import snn_pkg::npu_state_e, snn_pkg::ST_IDLE, snn_pkg::ST_PROC, snn_pkg::ST_DELAY;
#(
  parameter int unsigned N_PRE      = snn_pkg::N_IN,
  parameter int unsigned N          = snn_pkg::N_HID,
  parameter int unsigned FIRE_DELAY = snn_pkg::HID_FIRE_DELAY,
  parameter int unsigned VW         = snn_pkg::VW,
  localparam int unsigned PW = (N_PRE > 1) ? $clog2(N_PRE) : 1,
  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1,
  localparam int unsigned MW = $clog2(N_PRE * N)
) (
  input  logic                 clk,
  input  logic                 n_rst,
  // AER input from the previous layer
  input  logic [PW-1:0]        aer_in,
  input  logic                 req_in,
  // neuron ALU
  input  logic                 fire,
  input  logic signed [VW-1:0] integration_result,
  // TDM counter
  input  logic [IW-1:0]        cnt,
  input  logic                 cnt_last,
  output logic                 cnt_clr,
  output logic                 cnt_inc,
  // timer
  input  logic                 tmr_done,
  output logic                 tmr_start,
  // weight memory and weight register
  output logic [MW-1:0]        mem_addr,
  output logic                 wreg_en,
  // register file
  output logic [IW-1:0]        neuron_id,
  output logic signed [VW-1:0] result,
  output logic                 rf_we,
  // AER output to the next layer, acknowledge to the sender
  output logic [IW-1:0]        aer_out,
  output logic                 req_out,
  output logic                 ack,
  output npu_state_e           state
);
  npu_state_e   state_d;
  logic [PW-1:0] src_q;
  logic          pend_last_q, pend_last_d;
  logic          ack_d;

  always_comb begin
    state_d     = state;
    pend_last_d = pend_last_q;
    cnt_clr     = 1'b0;
    cnt_inc     = 1'b0;
    tmr_start   = 1'b0;
    wreg_en     = 1'b0;
    rf_we       = 1'b0;
    ack_d       = 1'b0;
    neuron_id   = cnt;
    result      = fire ? '0 : integration_result;
    mem_addr    = MW'(src_q) * MW'(N) + MW'(cnt) + 1'b1;
    unique case (state)
      ST_IDLE: begin
        cnt_clr  = 1'b1;
        mem_addr = MW'(aer_in) * MW'(N);
        if (req_in) begin
          wreg_en = 1'b1;
          state_d = ST_PROC;
        end
      end
      ST_PROC: begin
        rf_we   = 1'b1;
        wreg_en = !cnt_last;
        if (fire && FIRE_DELAY > 0) begin
          tmr_start   = 1'b1;
          cnt_inc     = !cnt_last;
          pend_last_d = cnt_last;
          state_d     = ST_DELAY;
        end else if (cnt_last) begin
          ack_d   = 1'b1;
          state_d = ST_IDLE;
        end else begin
          cnt_inc = 1'b1;
        end
      end
      ST_DELAY: begin
        if (tmr_done) begin
          if (pend_last_q) begin
            ack_d   = 1'b1;
            state_d = ST_IDLE;
          end else begin
            state_d = ST_PROC;
          end
        end
      end
      default: state_d = ST_IDLE;
    endcase
  end

  always_ff @(posedge clk or negedge n_rst) begin
    if (!n_rst) begin
      state       <= ST_IDLE;
      src_q       <= '0;
      pend_last_q <= 1'b0;
      aer_out     <= '0;
      req_out     <= 1'b0;
      ack         <= 1'b0;
    end else begin
      state       <= state_d;
      pend_last_q <= pend_last_d;
      ack         <= ack_d;
      req_out     <= (state == ST_PROC) && fire;
      if (state == ST_IDLE && req_in) src_q <= aer_in;
      if (state == ST_PROC && fire) aer_out <= cnt;
    end
  end

  // AER handshake rule: a new request may only arrive while the unit is idle.
  a_req_only_idle: assert property (@(posedge clk) disable iff (!n_rst)
    req_in |-> state == ST_IDLE)
    else $error("snn_control: REQ_in while the layer is busy");
endmodule
