// snn_rebin: dimensionality reduction by re-binning.
// Each event from the analogue-to-event converter carries a raw energy channel
// 0..RAW_BINS-1. Adjacent channels are merged uniformly into N_IN input bins,
// bin = raw_ch * N_IN / RAW_BINS, and the bin index goes out as the AER
// address of an input spike. Channels at or above RAW_BINS fall into the
// last bin. Merging adjacent channels follows the paper; the raw channel
// count, the clamping and the single register stage are this design's own.
// Timing: raw_req is a one-cycle strobe; aer_out/req_out appear one cycle
// later, req_out a one-cycle pulse. The event source must wait for the hidden
// layer's ACK before sending the next event.
module snn_rebin #(
  parameter int unsigned RAW_BINS = snn_pkg::RAW_BINS,
  parameter int unsigned N_IN     = snn_pkg::N_IN,
  localparam int unsigned RW = $clog2(RAW_BINS),
  localparam int unsigned AW = $clog2(N_IN)
) (
  input  logic          clk,
  input  logic          n_rst,
  input  logic [RW-1:0] raw_ch,
  input  logic          raw_req,
  output logic [AW-1:0] aer_out,
  output logic          req_out
);
  localparam int unsigned PW = RW + $clog2(N_IN + 1);

  logic [PW-1:0] prod;
  logic [AW-1:0] bin;

  always_comb begin
    prod = PW'(raw_ch) * PW'(N_IN);
    if (raw_ch >= RW'(RAW_BINS - 1)) bin = AW'(N_IN - 1);
    else                             bin = AW'(prod / PW'(RAW_BINS));
  end

  always_ff @(posedge clk or negedge n_rst) begin
    if (!n_rst) begin
      aer_out <= '0;
      req_out <= 1'b0;
    end else begin
      req_out <= raw_req;
      if (raw_req) aer_out <= bin;
    end
  end
endmodule
