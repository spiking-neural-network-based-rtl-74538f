// tb_snn_weight_mem: fills the 4000-word weight memory with a pseudo-random
// pattern, reads every word back in a shuffled order through the
// combinational read port, then rewrites a few words and reads them again.
module tb_snn_weight_mem;
  localparam int DEPTH = 4000;
  logic clk = 0;
  logic [11:0] rd_addr, wr_addr;
  logic signed [7:0] rd_data, wr_data;
  logic wr_en;
  logic signed [7:0] model [DEPTH];
  int checks = 0, failures = 0;

  snn_weight_mem dut (.clk, .rd_addr, .rd_data, .wr_en, .wr_addr, .wr_data);

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int a;
    wr_en = 0; rd_addr = '0; wr_addr = '0; wr_data = '0;
    for (int i = 0; i < DEPTH; i++) begin
      model[i] = 8'($urandom);
      @(negedge clk); wr_en = 1; wr_addr = 12'(i); wr_data = model[i];
    end
    @(negedge clk); wr_en = 0;
    for (int i = 0; i < DEPTH; i++) begin
      a = (i * 7 + 13) % DEPTH;  // 7 is coprime with 4000: visits every word
      rd_addr = 12'(a); #1;
      checks++;
      if (rd_data !== model[a]) begin
        failures++; $display("FAIL addr %0d read %0d expected %0d", a, rd_data, model[a]);
      end
    end
    for (int k = 0; k < 200; k++) begin
      a = $urandom_range(0, DEPTH - 1);
      model[a] = 8'($urandom);
      @(negedge clk); wr_en = 1; wr_addr = 12'(a); wr_data = model[a];
      @(negedge clk); wr_en = 0; rd_addr = 12'(a); #1;
      checks++;
      if (rd_data !== model[a]) begin
        failures++; $display("FAIL rewrite addr %0d read %0d expected %0d", a, rd_data, model[a]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
