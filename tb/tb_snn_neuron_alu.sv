// tb_snn_neuron_alu: compares the ALU with integer arithmetic: the sum
// v + w clipped to [-32768, 32767] and fire = sum >= threshold, over random
// and corner-case operands.
module tb_snn_neuron_alu;
  logic signed [15:0] v_in, v_thr, integration_result;
  logic signed [7:0] w_in;
  logic fire;
  int checks = 0, failures = 0;

  snn_neuron_alu dut (.v_in, .w_in, .v_thr, .integration_result, .fire);

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic apply(input int v, input int w, input int thr);
    int s;
    bit f;
    v_in = 16'(v); w_in = 8'(w); v_thr = 16'(thr);
    #1;
    s = v + w;
    if (s > 32767) s = 32767;
    if (s < -32768) s = -32768;
    f = (s >= thr);
    checks++;
    if (integration_result != 16'(s) || fire != f) begin
      failures++;
      $display("FAIL v=%0d w=%0d thr=%0d -> %0d fire %0b, expected %0d %0b",
               v, w, thr, integration_result, fire, s, f);
    end
  endtask

  initial begin
    apply(32767, 127, 128);
    apply(-32768, -128, 128);
    apply(127, 1, 128);
    apply(126, 1, 128);
    apply(0, -1, 0);
    apply(32700, 100, 32767);
    for (int i = 0; i < 20000; i++)
      apply($urandom_range(0, 65535) - 32768, $urandom_range(0, 255) - 128,
            (i % 2) ? 128 : $urandom_range(0, 65535) - 32768);
    for (int i = 0; i < 5000; i++)
      apply($urandom_range(0, 300) - 150, $urandom_range(0, 255) - 128, 128);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
