// snn_timer: delay timer of the NPU control logic.
// A start pulse begins a delay of CYCLES clock cycles: busy is high for the
// CYCLES cycles that follow the start edge and done marks the last of them.
// The NPU uses it for the stall after a hidden-layer spike, which gives the
// output layer time for its own TDM pass. CYCLES must be at least 1.
module snn_timer #(
  parameter int unsigned CYCLES = snn_pkg::HID_FIRE_DELAY,
  localparam int unsigned TW = $clog2(CYCLES + 1)
) (
  input  logic clk,
  input  logic n_rst,
  input  logic start,
  output logic busy,
  output logic done
);
  logic [TW-1:0] remaining;

  always_ff @(posedge clk or negedge n_rst) begin
    if (!n_rst)              remaining <= '0;
    else if (start)          remaining <= TW'(CYCLES);
    else if (remaining != 0) remaining <= remaining - 1'b1;
  end

  assign busy = (remaining != 0);
  assign done = (remaining == TW'(1));
endmodule
