// tb_snn_reg_file: random reads and writes to the 40-entry membrane-voltage
// register file, compared with an array model, including the reset to zero
// and the all-voltages monitor output.
module tb_snn_reg_file;
  logic clk = 0, n_rst = 0, we;
  logic [5:0] id;
  logic signed [15:0] wdata, rdata;
  logic [40*16-1:0] v_all;
  logic signed [15:0] model [40];
  int checks = 0, failures = 0;

  snn_reg_file dut (.clk, .n_rst, .id, .we, .wdata, .rdata, .v_all);

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_all(input string when);
    for (int i = 0; i < 40; i++) begin
      checks++;
      if (v_all[i*16 +: 16] != model[i]) begin
        failures++; $display("FAIL %s: v[%0d]=%0d expected %0d", when, i, v_all[i*16 +: 16], model[i]);
      end
    end
  endtask

  initial begin
    we = 0; id = '0; wdata = '0;
    repeat (2) @(posedge clk);
    n_rst = 1;
    for (int i = 0; i < 40; i++) model[i] = 0;
    @(negedge clk);
    check_all("after reset");
    for (int k = 0; k < 10000; k++) begin
      @(negedge clk);
      id = 6'($urandom_range(0, 39));
      we = $urandom_range(0, 1);
      wdata = 16'($urandom);
      #1;
      checks++;
      if (rdata != model[id]) begin
        failures++; $display("FAIL read v[%0d]=%0d expected %0d", id, rdata, model[id]);
      end
      @(posedge clk);
      if (we) model[id] = wdata;
      if (k % 500 == 0) begin @(negedge clk); we = 0; #1; check_all("during run"); end
    end
    @(negedge clk); we = 0; #1;
    check_all("end");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
