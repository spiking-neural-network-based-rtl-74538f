// tb_snn_timer: starts the 9-cycle delay timer repeatedly and checks that
// busy is high for exactly 9 cycles after the start edge and that done marks
// only the 9th of them.
module tb_snn_timer;
  logic clk = 0, n_rst = 0, start, busy, done;
  int checks = 0, failures = 0;

  snn_timer dut (.clk, .n_rst, .start, .busy, .done);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int nbusy, done_at;
    start = 0;
    repeat (2) @(posedge clk);
    n_rst = 1;
    for (int t = 0; t < 100; t++) begin
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      nbusy = 0; done_at = -1;
      for (int c = 1; c <= 12; c++) begin
        if (busy) nbusy++;
        if (done) begin
          checks++;
          if (done_at != -1) begin failures++; $display("FAIL done twice"); end
          done_at = c;
        end
        @(negedge clk);
      end
      checks += 2;
      if (nbusy != 9) begin failures++; $display("FAIL busy for %0d cycles", nbusy); end
      if (done_at != 9) begin failures++; $display("FAIL done at cycle %0d", done_at); end
      repeat ($urandom_range(0, 3)) @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
