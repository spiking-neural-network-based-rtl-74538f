// tb_snn_tdm_counter: drives random clr/inc on the 40-neuron TDM counter and
// compares count and last flag with a software counter every cycle.
module tb_snn_tdm_counter;
  logic clk = 0, n_rst = 0, clr, inc;
  logic [5:0] cnt;
  logic last;
  int model = 0;
  int checks = 0, failures = 0;

  snn_tdm_counter dut (.clk, .n_rst, .clr, .inc, .cnt, .last);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    clr = 0; inc = 0;
    repeat (2) @(posedge clk);
    n_rst = 1;
    for (int i = 0; i < 5000; i++) begin
      @(negedge clk);
      checks++;
      if (cnt != 6'(model) || last != (model == 39)) begin
        failures++; $display("FAIL cycle %0d cnt %0d last %0b model %0d", i, cnt, last, model);
      end
      clr = ($urandom_range(0, 99) == 0);
      inc = ($urandom_range(0, 3) != 0);
      if (clr) model = 0;
      else if (inc) model = (model == 39) ? 0 : model + 1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
