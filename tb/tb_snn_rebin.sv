// tb_snn_rebin: checks the re-binning stage against bin = floor(raw / 10)
// (1000 raw channels onto 100 bins) with clamping to bin 99, and checks that
// the request appears exactly one cycle after raw_req and lasts one cycle.
module tb_snn_rebin;
  logic clk = 0, n_rst = 0;
  logic [9:0] raw_ch;
  logic raw_req;
  logic [6:0] aer_out;
  logic req_out;
  int checks = 0, failures = 0;

  snn_rebin dut (.clk, .n_rst, .raw_ch, .raw_req, .aer_out, .req_out);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int unsigned r, exp_bin;
    raw_ch = '0; raw_req = 0;
    repeat (3) @(posedge clk);
    n_rst = 1;
    @(posedge clk);
    for (int i = 0; i < 2000; i++) begin
      if (i < 1024) r = i; else r = $urandom_range(0, 1023);
      exp_bin = (r >= 1000) ? 99 : r / 10;
      @(negedge clk); raw_ch = 10'(r); raw_req = 1;
      @(negedge clk); raw_req = 0;
      check(req_out == 1 && aer_out == 7'(exp_bin),
            $sformatf("raw %0d -> bin %0d req %0b, expected %0d", r, aer_out, req_out, exp_bin));
      @(negedge clk);
      check(req_out == 0, "req_out longer than one cycle");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
