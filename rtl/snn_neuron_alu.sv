// snn_neuron_alu: integrate-and-fire arithmetic, one adder and one comparator.
// integration_result = v_in + w_in (Eq. 2 of the IF model with zero leak) and
// fire = integration_result >= v_thr (Eq. 3). The reset to 0 on a spike is
// applied by the control logic when it writes the result back. The adder
// saturates at the limits of the signed VW-bit voltage instead of wrapping;
// that and the width are this design's choices. Purely combinational.
module snn_neuron_alu #(
  parameter int unsigned VW = snn_pkg::VW,
  parameter int unsigned WW = snn_pkg::WW
) (
  input  logic signed [VW-1:0] v_in,
  input  logic signed [WW-1:0] w_in,
  input  logic signed [VW-1:0] v_thr,
  output logic signed [VW-1:0] integration_result,
  output logic                 fire
);
  localparam logic signed [VW:0] VMAX = {2'b00, {(VW-1){1'b1}}};
  localparam logic signed [VW:0] VMIN = {2'b11, {(VW-1){1'b0}}};

  logic signed [VW:0] sum;

  always_comb begin
    sum = (VW+1)'(v_in) + (VW+1)'(w_in);
    if (sum > VMAX)      integration_result = VW'(VMAX);
    else if (sum < VMIN) integration_result = VW'(VMIN);
    else                 integration_result = VW'(sum);
    fire = (integration_result >= v_thr);
  end
endmodule
