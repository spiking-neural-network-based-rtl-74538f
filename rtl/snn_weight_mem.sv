// snn_weight_mem: synaptic weight store of one layer.
// One signed WW-bit word per (pre-synaptic source, neuron) pair at address
// source * N_NEURONS + neuron; all neurons of the layer share it. The read is
// combinational (distributed RAM), and the NPU registers the word it reads.
// The write port loads trained weights; how weights are loaded is not given by
// the paper and is this design's choice. Contents are not reset.
module snn_weight_mem #(
  parameter int unsigned DEPTH = snn_pkg::N_IN * snn_pkg::N_HID,
  parameter int unsigned WW    = snn_pkg::WW,
  localparam int unsigned AW = $clog2(DEPTH)
) (
  input  logic                 clk,
  input  logic [AW-1:0]        rd_addr,
  output logic signed [WW-1:0] rd_data,
  input  logic                 wr_en,
  input  logic [AW-1:0]        wr_addr,
  input  logic signed [WW-1:0] wr_data
);
  logic signed [WW-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
  end

  assign rd_data = mem[rd_addr];
endmodule
