// tb_snn_npu: checks the Neuron Processing Unit in both of its uses: the
// hidden layer (100 sources, 40 neurons, 9-cycle stall after a spike) with
// 400 input spikes, enough to drive one neuron into negative saturation, and
// the output layer (40 sources, 8 neurons, no stall) with 300 input spikes.
// See tb_npu_harness for what is checked.
module tb_snn_npu;
  logic clk = 0;
  logic done_h, done_o;
  int checks_h, failures_h, checks_o, failures_o;
  int checks, failures;

  always #5 clk = ~clk;

  tb_npu_harness #(.N_PRE(100), .N(40), .FIRE_DELAY(9), .EVENTS(400)) u_hidden (
    .clk, .done(done_h), .checks(checks_h), .failures(failures_h));
  tb_npu_harness #(.N_PRE(40), .N(8), .FIRE_DELAY(0), .EVENTS(300)) u_output (
    .clk, .done(done_o), .checks(checks_o), .failures(failures_o));

  initial begin
    fork
      begin wait (done_h && done_o); end
      begin repeat (1000000) @(posedge clk); $display("watchdog expired"); end
    join_any
    checks = checks_h + checks_o;
    failures = failures_h + failures_o + ((done_h && done_o) ? 0 : 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
