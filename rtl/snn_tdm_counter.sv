// snn_tdm_counter: the neuron index of the time-division-multiplexed layer.
// A register with a +1 feedback, as drawn in the NPU microarchitecture; clr
// restarts it at 0 and has priority over inc. last is high when the index is
// N-1. Counting wraps from N-1 to 0. Updates on the rising clock edge.
module snn_tdm_counter #(
  parameter int unsigned N = snn_pkg::N_HID,
  localparam int unsigned CW = (N > 1) ? $clog2(N) : 1
) (
  input  logic          clk,
  input  logic          n_rst,
  input  logic          clr,
  input  logic          inc,
  output logic [CW-1:0] cnt,
  output logic          last
);
  always_ff @(posedge clk or negedge n_rst) begin
    if (!n_rst)   cnt <= '0;
    else if (clr) cnt <= '0;
    else if (inc) cnt <= last ? '0 : cnt + 1'b1;
  end

  assign last = (cnt == CW'(N - 1));
endmodule
