// snn_reg_file: membrane voltages of all neurons of one layer.
// N signed VW-bit registers. The Neuron ID selects the register that is read
// (rdata, combinational) and, when we is high, written with wdata at the
// rising clock edge. All voltages reset to 0. v_all exposes every voltage so
// that a per-neuron monitor can watch the layer; it is this design's addition.
module snn_reg_file #(
  parameter int unsigned N  = snn_pkg::N_HID,
  parameter int unsigned VW = snn_pkg::VW,
  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1
) (
  input  logic                 clk,
  input  logic                 n_rst,
  input  logic [IW-1:0]        id,
  input  logic                 we,
  input  logic signed [VW-1:0] wdata,
  output logic signed [VW-1:0] rdata,
  output logic [N*VW-1:0]      v_all
);
  logic signed [VW-1:0] v [N];

  always_ff @(posedge clk or negedge n_rst) begin
    if (!n_rst) begin
      for (int i = 0; i < N; i++) v[i] <= '0;
    end else if (we) begin
      v[id] <= wdata;
    end
  end

  assign rdata = v[id];

  always_comb begin
    for (int i = 0; i < N; i++) v_all[i*VW +: VW] = v[i];
  end
endmodule
