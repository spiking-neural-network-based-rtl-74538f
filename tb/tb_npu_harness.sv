// tb_npu_harness: drives one Neuron Processing Unit through EVENTS input
// spikes and checks it against a software model of the layer, in the manner
// of a per-neuron monitor and scoreboard: after every ACK all N membrane
// voltages are compared with the model, the emitted spike addresses are
// compared in order, and the ACK must come N + 1 + FIRE_DELAY * spikes cycles
// after the request. Weights are random in [WLO, WHI], except that neuron N-2
// only has weight -128 (its voltage saturates at the negative limit) and
// neuron N-1 only has +127 (it fires often, as the last neuron of a pass).
// It also counts back-to-back spikes (two neighbouring neurons firing in the
// same pass) and fires at the last neuron; each must happen at least once.
module tb_npu_harness #(
  parameter int N_PRE      = 100,
  parameter int N          = 40,
  parameter int FIRE_DELAY = 9,
  parameter int EVENTS     = 400,
  parameter int WLO        = -30,
  parameter int WHI        = 70,
  parameter int THR        = 128
) (
  input  logic clk,
  output logic done,
  output int   checks,
  output int   failures
);
  localparam int PW = $clog2(N_PRE), IW = $clog2(N), MW = $clog2(N_PRE * N);
  logic n_rst;
  logic [PW-1:0] aer_in;
  logic req_in, req_out, ack, w_we;
  logic [IW-1:0] aer_out;
  logic [MW-1:0] w_addr;
  logic signed [7:0] w_data;
  logic [N*16-1:0] v_all;

  snn_npu #(.N_PRE(N_PRE), .N(N), .FIRE_DELAY(FIRE_DELAY), .V_THR(16'(THR))) dut (
    .clk, .n_rst, .aer_in, .req_in, .aer_out, .req_out, .ack,
    .w_we, .w_addr, .w_data, .v_all
  );

  int w_model [N_PRE * N];
  int v_model [N];
  int spikes_seen [$];

  always @(posedge clk) if (n_rst && req_out) spikes_seen.push_back(int'(aer_out));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %m: %s", what); end
  endtask

  initial begin
    int src, cyc, nf, n_b2b, n_last, n_sat, n_spk, s;
    int expected [$];
    bit prev_fired;
    done = 0; checks = 0; failures = 0;
    n_rst = 0; req_in = 0; aer_in = '0; w_we = 0; w_addr = '0; w_data = '0;
    n_b2b = 0; n_last = 0; n_sat = 0; n_spk = 0;
    repeat (3) @(negedge clk);
    n_rst = 1;
    for (int p = 0; p < N_PRE; p++)
      for (int n = 0; n < N; n++) begin
        if (n == N - 2)      w_model[p * N + n] = -128;
        else if (n == N - 1) w_model[p * N + n] = 127;
        else                 w_model[p * N + n] = $urandom_range(0, WHI - WLO) + WLO;
        @(negedge clk);
        w_we = 1; w_addr = MW'(p * N + n); w_data = 8'(w_model[p * N + n]);
      end
    @(negedge clk); w_we = 0;
    for (int n = 0; n < N; n++) v_model[n] = 0;
    for (int e = 0; e < EVENTS; e++) begin
      src = $urandom_range(0, N_PRE - 1);
      expected.delete();
      prev_fired = 0;
      for (int n = 0; n < N; n++) begin
        s = v_model[n] + w_model[src * N + n];
        if (s < -32768) begin s = -32768; n_sat++; end
        if (s > 32767) s = 32767;
        if (s >= THR) begin
          expected.push_back(n);
          v_model[n] = 0;
          if (prev_fired) n_b2b++;
          if (n == N - 1) n_last++;
          prev_fired = 1;
        end else begin
          v_model[n] = s;
          prev_fired = 0;
        end
      end
      nf = expected.size();
      n_spk += nf;
      spikes_seen.delete();
      @(negedge clk);
      aer_in = PW'(src); req_in = 1;
      @(negedge clk);
      req_in = 0; aer_in = PW'($urandom);
      cyc = 1;
      while (!ack && cyc < 20 * N * (FIRE_DELAY + 2)) begin @(negedge clk); cyc++; end
      check(cyc == N + 1 + FIRE_DELAY * nf,
            $sformatf("event %0d: ack after %0d cycles, expected %0d", e, cyc, N + 1 + FIRE_DELAY * nf));
      @(negedge clk);  // a spike of the last neuron leaves together with ack
      check(spikes_seen.size() == nf, $sformatf("event %0d: %0d spikes, expected %0d", e, spikes_seen.size(), nf));
      for (int k = 0; k < nf && k < spikes_seen.size(); k++)
        check(spikes_seen[k] == expected[k], $sformatf("event %0d: spike %0d is neuron %0d, expected %0d",
                                                       e, k, spikes_seen[k], expected[k]));
      for (int n = 0; n < N; n++)
        check(int'($signed(v_all[n*16 +: 16])) == v_model[n],
              $sformatf("event %0d: neuron %0d voltage %0d, expected %0d", e, n,
                        $signed(v_all[n*16 +: 16]), v_model[n]));
      repeat ($urandom_range(0, 3)) @(negedge clk);
    end
    $display("%m: %0d spikes, %0d back-to-back, %0d at last neuron, %0d saturating adds",
             n_spk, n_b2b, n_last, n_sat);
    check(n_spk > 0 && n_b2b > 0 && n_last > 0, "a mechanism never happened");
    done = 1;
  end
endmodule
