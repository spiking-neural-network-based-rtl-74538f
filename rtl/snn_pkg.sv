// snn_pkg: sizes and types shared by the radioisotope-identification SNN.
// The network is fully connected, 100 inputs -> 40 hidden -> 8 output
// integrate-and-fire neurons with 8-bit signed weights; those numbers follow
// the paper. The 16-bit membrane voltage, the thresholds and the raw channel
// count of the event converter are this design's choices.
package snn_pkg;
  localparam int unsigned N_IN     = 100;  // input neurons (re-binned channels)
  localparam int unsigned N_HID    = 40;   // hidden-layer neurons
  localparam int unsigned N_OUT    = 8;    // output neurons, one per isotope
  localparam int unsigned WW       = 8;    // weight width, signed
  localparam int unsigned VW       = 16;   // membrane voltage width, signed (assumed)
  localparam int unsigned RAW_BINS = 1000; // converter channels (assumed)
  localparam int unsigned HID_FIRE_DELAY = 9; // stall after a hidden spike
  localparam int signed   V_THR_DEFAULT  = 128; // firing threshold (assumed)

  // States of one layer's TDM sequencer (names as in the timing diagram).
  typedef enum logic [1:0] {
    ST_IDLE  = 2'd0,  // waiting for REQ_in; the accepting cycle fetches neuron 0
    ST_PROC  = 2'd1,  // "neuron k process": integrate k, fetch k+1
    ST_DELAY = 2'd2   // "delay cycle": stall after a spike
  } npu_state_e;
endpackage
