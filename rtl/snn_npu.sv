// snn_npu: Neuron Processing Unit, the hardware of one fully connected layer
// of integrate-and-fire neurons. Its parts are the ones of the paper's
// microarchitecture: a weight memory shared by all neurons of the layer, a
// register on the memory's data output, a TDM counter, a timer, the control
// state machine, a register file of membrane voltages selected by the Neuron
// ID, and a neuron ALU (adder and comparator). For each input spike the
// control logic walks the N neurons one per cycle (N+1 cycles in all) and
// adds weight[source][neuron] to each voltage; a neuron whose voltage reaches
// V_THR is reset to 0 and emits an AER spike. After a spike the unit stalls
// FIRE_DELAY cycles (9 in the hidden layer, 0 in the output layer) so that
// the next layer can finish. Interface: AER_in/REQ_in in, AER_out/REQ_out
// out, ACK one cycle when the pass is over (see snn_control for timing).
// The weight write port, V_THR, the voltage width and the output layer's
// zero delay are this design's choices; the structure follows the paper.
module snn_npu
  import snn_pkg::npu_state_e, snn_pkg::ST_DELAY;
#(
  parameter int unsigned N_PRE       = snn_pkg::N_IN,
  parameter int unsigned N           = snn_pkg::N_HID,
  parameter int unsigned FIRE_DELAY  = snn_pkg::HID_FIRE_DELAY,
  parameter int unsigned VW          = snn_pkg::VW,
  parameter int unsigned WW          = snn_pkg::WW,
  parameter logic signed [VW-1:0] V_THR = VW'(snn_pkg::V_THR_DEFAULT),
  localparam int unsigned PW = (N_PRE > 1) ? $clog2(N_PRE) : 1,
  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1,
  localparam int unsigned MW = $clog2(N_PRE * N)
) (
  input  logic                 clk,
  input  logic                 n_rst,
  input  logic [PW-1:0]        aer_in,
  input  logic                 req_in,
  output logic [IW-1:0]        aer_out,
  output logic                 req_out,
  output logic                 ack,
  // weight programming
  input  logic                 w_we,
  input  logic [MW-1:0]        w_addr,
  input  logic signed [WW-1:0] w_data,
  // membrane voltages, for monitors
  output logic [N*VW-1:0]      v_all
);
  logic [MW-1:0]        mem_addr;
  logic signed [WW-1:0] mem_data, wreg;
  logic                 wreg_en;
  logic [IW-1:0]        cnt, neuron_id;
  logic                 cnt_last, cnt_clr, cnt_inc;
  logic                 tmr_start, tmr_busy, tmr_done;
  logic signed [VW-1:0] v_sel, integ, result;
  logic                 fire, rf_we;
  npu_state_e           state;

  snn_weight_mem #(.DEPTH(N_PRE * N), .WW(WW)) u_mem (
    .clk, .rd_addr(mem_addr), .rd_data(mem_data),
    .wr_en(w_we), .wr_addr(w_addr), .wr_data(w_data)
  );

  // "Reg" on the memory's Data output: the weight used in the next cycle.
  always_ff @(posedge clk or negedge n_rst) begin
    if (!n_rst)       wreg <= '0;
    else if (wreg_en) wreg <= mem_data;
  end

  snn_tdm_counter #(.N(N)) u_cnt (
    .clk, .n_rst, .clr(cnt_clr), .inc(cnt_inc), .cnt, .last(cnt_last)
  );

  if (FIRE_DELAY > 0) begin : g_timer
    snn_timer #(.CYCLES(FIRE_DELAY)) u_tmr (
      .clk, .n_rst, .start(tmr_start), .busy(tmr_busy), .done(tmr_done)
    );
  end else begin : g_no_timer
    assign tmr_busy = 1'b0;
    assign tmr_done = 1'b0;
  end

  snn_control #(.N_PRE(N_PRE), .N(N), .FIRE_DELAY(FIRE_DELAY), .VW(VW)) u_ctl (
    .clk, .n_rst, .aer_in, .req_in, .fire, .integration_result(integ),
    .cnt, .cnt_last, .cnt_clr, .cnt_inc, .tmr_done, .tmr_start,
    .mem_addr, .wreg_en, .neuron_id, .result, .rf_we,
    .aer_out, .req_out, .ack, .state
  );

  snn_reg_file #(.N(N), .VW(VW)) u_rf (
    .clk, .n_rst, .id(neuron_id), .we(rf_we), .wdata(result),
    .rdata(v_sel), .v_all
  );

  snn_neuron_alu #(.VW(VW), .WW(WW)) u_alu (
    .v_in(v_sel), .w_in(wreg), .v_thr(V_THR),
    .integration_result(integ), .fire
  );

  // The timer only runs inside a post-spike stall.
  a_timer_in_delay: assert property (@(posedge clk) disable iff (!n_rst)
    tmr_busy |-> state == ST_DELAY);
endmodule
