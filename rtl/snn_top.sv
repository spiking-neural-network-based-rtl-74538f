// snn_top: event-based radioisotope identification processor.
// Raw energy-channel events from the analogue-to-event converter are
// re-binned into 100 input neurons, then pass through two Neuron Processing
// Units linked by AER: a 100->40 hidden layer and a 40->8 output layer of
// integrate-and-fire neurons. Each output neuron stands for one isotope; its
// spikes (out_aer with out_req) are the inference result, counted over the
// integration time outside this block. Processing happens only when an event
// arrives; between events the logic is idle.
// Handshakes: the event source raises raw_req for one cycle and waits for
// ev_ack before the next event. The hidden layer sends each spike to the
// output layer without waiting for its ACK: the hidden layer's 9-cycle stall
// after every spike is what guarantees the output layer is idle again.
// Weights are loaded through w_we/w_layer/w_addr/w_data (address
// source * layer_size + neuron), a port of this design's own.
module snn_top #(
  parameter int unsigned RAW_BINS       = snn_pkg::RAW_BINS,
  parameter int unsigned N_IN           = snn_pkg::N_IN,
  parameter int unsigned N_HID          = snn_pkg::N_HID,
  parameter int unsigned N_OUT          = snn_pkg::N_OUT,
  parameter int unsigned HID_FIRE_DELAY = snn_pkg::HID_FIRE_DELAY,
  parameter logic signed [snn_pkg::VW-1:0] HID_V_THR = snn_pkg::VW'(snn_pkg::V_THR_DEFAULT),
  parameter logic signed [snn_pkg::VW-1:0] OUT_V_THR = snn_pkg::VW'(snn_pkg::V_THR_DEFAULT),
  localparam int unsigned VW  = snn_pkg::VW,
  localparam int unsigned WW  = snn_pkg::WW,
  localparam int unsigned RW  = $clog2(RAW_BINS),
  localparam int unsigned HW  = $clog2(N_HID),
  localparam int unsigned OW  = (N_OUT > 1) ? $clog2(N_OUT) : 1,
  localparam int unsigned MW  = $clog2(N_IN * N_HID),
  localparam int unsigned MWO = $clog2(N_HID * N_OUT)
) (
  input  logic                 clk,
  input  logic                 n_rst,
  // events from the analogue-to-event converter
  input  logic [RW-1:0]        raw_ch,
  input  logic                 raw_req,
  output logic                 ev_ack,
  // weight programming
  input  logic                 w_we,
  input  logic                 w_layer,   // 0 hidden, 1 output
  input  logic [MW-1:0]        w_addr,
  input  logic signed [WW-1:0] w_data,
  // hidden-layer spikes (observation)
  output logic [HW-1:0]        hid_aer,
  output logic                 hid_req,
  // output-layer spikes: the isotope class
  output logic [OW-1:0]        out_aer,
  output logic                 out_req,
  output logic                 out_ack,
  // membrane voltages (observation)
  output logic [N_HID*VW-1:0]  hid_v,
  output logic [N_OUT*VW-1:0]  out_v
);
  logic [$clog2(N_IN)-1:0] in_aer;
  logic                    in_req;

  snn_rebin #(.RAW_BINS(RAW_BINS), .N_IN(N_IN)) u_rebin (
    .clk, .n_rst, .raw_ch, .raw_req, .aer_out(in_aer), .req_out(in_req)
  );

  snn_npu #(.N_PRE(N_IN), .N(N_HID), .FIRE_DELAY(HID_FIRE_DELAY),
            .VW(VW), .WW(WW), .V_THR(HID_V_THR)) u_hidden (
    .clk, .n_rst, .aer_in(in_aer), .req_in(in_req),
    .aer_out(hid_aer), .req_out(hid_req), .ack(ev_ack),
    .w_we(w_we && !w_layer), .w_addr, .w_data, .v_all(hid_v)
  );

  snn_npu #(.N_PRE(N_HID), .N(N_OUT), .FIRE_DELAY(0),
            .VW(VW), .WW(WW), .V_THR(OUT_V_THR)) u_output (
    .clk, .n_rst, .aer_in(hid_aer), .req_in(hid_req),
    .aer_out(out_aer), .req_out(out_req), .ack(out_ack),
    .w_we(w_we && w_layer), .w_addr(MWO'(w_addr)), .w_data, .v_all(out_v)
  );
endmodule
