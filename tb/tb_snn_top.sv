// tb_snn_top: end-to-end test of the whole processor at its default size
// (1000 raw channels -> 100 inputs -> 40 hidden -> 8 output neurons, 9-cycle
// hidden stall). It loads random weights into both layers, then sends
// EVENTS raw-channel events, each after the previous ACK, as one inference
// of about 1500 events (3 s of data at a 500 Hz input rate, with the idle
// time between events left out). A software model of the re-binning and of
// both integrate-and-fire layers predicts every hidden and output spike and
// every membrane voltage; after each ACK all 48 voltages are compared, and
// the hidden-to-output spike streams must match in order. The ACK must come
// 1 + 41 + 9 * hidden_spikes cycles after the event. At the end the output
// spikes per class are compared and the winning class is printed. Counted,
// and each required at least once: hidden spikes (each a 9-cycle stall),
// back-to-back hidden spikes, a spike of the last hidden neuron, output
// spikes, channels clamped into the last bin, and saturating adds.
module tb_snn_top;
  localparam int RAW = 1000, NI = 100, NH = 40, NO = 8, THR = 128, D = 9;
  localparam int EVENTS = 1500;
  logic clk = 0, n_rst = 0;
  logic [9:0] raw_ch;
  logic raw_req, ev_ack, w_we, w_layer;
  logic [11:0] w_addr;
  logic signed [7:0] w_data;
  logic [5:0] hid_aer;
  logic hid_req, out_req, out_ack;
  logic [2:0] out_aer;
  logic [NH*16-1:0] hid_v;
  logic [NO*16-1:0] out_v;
  int checks = 0, failures = 0;

  snn_top dut (.clk, .n_rst, .raw_ch, .raw_req, .ev_ack, .w_we, .w_layer, .w_addr, .w_data,
               .hid_aer, .hid_req, .out_aer, .out_req, .out_ack, .hid_v, .out_v);

  always #5 clk = ~clk;

  int w1 [NI * NH];
  int w2 [NH * NO];
  int vh [NH];
  int vo [NO];
  int hid_seen [$];
  int out_seen [$];
  int class_hw [NO];
  int class_model [NO];

  always @(posedge clk) if (n_rst) begin
    if (hid_req) hid_seen.push_back(int'(hid_aer));
    if (out_req) begin out_seen.push_back(int'(out_aer)); class_hw[out_aer]++; end
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 30) $display("FAIL %s", what); end
  endtask

  function automatic int sat(input int s);
    if (s > 32767) return 32767;
    if (s < -32768) return -32768;
    return s;
  endfunction

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int r, bin, cyc, s, best_hw, best_m;
    int n_hspk, n_b2b, n_last, n_ospk, n_clamp, n_sat;
    int exp_h [$];
    int exp_o [$];
    bit prev;
    raw_ch = '0; raw_req = 0; w_we = 0; w_layer = 0; w_addr = '0; w_data = '0;
    n_hspk = 0; n_b2b = 0; n_last = 0; n_ospk = 0; n_clamp = 0; n_sat = 0;
    for (int k = 0; k < NO; k++) begin class_hw[k] = 0; class_model[k] = 0; end
    repeat (3) @(negedge clk);
    n_rst = 1;
    // weights: hidden neuron 38 inhibitory only (saturates), 39 strongly excitatory
    for (int p = 0; p < NI; p++)
      for (int n = 0; n < NH; n++) begin
        w1[p * NH + n] = (n == 38) ? -128 : (n == 39) ? 127 : $urandom_range(0, 100) - 30;
        @(negedge clk); w_we = 1; w_layer = 0; w_addr = 12'(p * NH + n); w_data = 8'(w1[p * NH + n]);
      end
    for (int p = 0; p < NH; p++)
      for (int n = 0; n < NO; n++) begin
        w2[p * NO + n] = $urandom_range(0, 110) - 60 + 6 * n;
        @(negedge clk); w_we = 1; w_layer = 1; w_addr = 12'(p * NO + n); w_data = 8'(w2[p * NO + n]);
      end
    @(negedge clk); w_we = 0;
    for (int n = 0; n < NH; n++) vh[n] = 0;
    for (int n = 0; n < NO; n++) vo[n] = 0;

    for (int e = 0; e < EVENTS; e++) begin
      // spectrum: mostly low channels, a few beyond the last channel
      case ($urandom_range(0, 19))
        0:       r = $urandom_range(RAW, 1023);
        1, 2, 3: r = $urandom_range(0, RAW - 1);
        default: r = $urandom_range(0, 299);
      endcase
      bin = (r >= RAW) ? NI - 1 : r * NI / RAW;
      if (r >= RAW) n_clamp++;
      exp_h.delete(); exp_o.delete();
      prev = 0;
      for (int n = 0; n < NH; n++) begin
        s = v_add(vh[n], w1[bin * NH + n], n_sat);
        if (s >= THR) begin
          vh[n] = 0; exp_h.push_back(n);
          if (prev) n_b2b++;
          if (n == NH - 1) n_last++;
          prev = 1;
          for (int j = 0; j < NO; j++) begin
            s = v_add(vo[j], w2[n * NO + j], n_sat);
            if (s >= THR) begin vo[j] = 0; exp_o.push_back(j); class_model[j]++; end
            else vo[j] = s;
          end
        end else begin
          vh[n] = s; prev = 0;
        end
      end
      n_hspk += exp_h.size();
      n_ospk += exp_o.size();
      hid_seen.delete(); out_seen.delete();
      @(negedge clk); raw_ch = 10'(r); raw_req = 1;
      @(negedge clk); raw_req = 0; raw_ch = 10'($urandom);
      cyc = 1;
      while (!ev_ack && cyc < 5000) begin @(negedge clk); cyc++; end
      check(cyc == 1 + NH + 1 + D * exp_h.size(),
            $sformatf("event %0d: ack after %0d cycles, expected %0d", e, cyc, 1 + NH + 1 + D * exp_h.size()));
      @(negedge clk);
      check(hid_seen == exp_h, $sformatf("event %0d: hidden spikes differ (%0d vs %0d)", e, hid_seen.size(), exp_h.size()));
      check(out_seen == exp_o, $sformatf("event %0d: output spikes differ (%0d vs %0d)", e, out_seen.size(), exp_o.size()));
      for (int n = 0; n < NH; n++)
        check(int'($signed(hid_v[n*16 +: 16])) == vh[n], $sformatf("event %0d: hidden %0d voltage", e, n));
      for (int n = 0; n < NO; n++)
        check(int'($signed(out_v[n*16 +: 16])) == vo[n], $sformatf("event %0d: output %0d voltage", e, n));
      repeat ($urandom_range(0, 5)) @(negedge clk);
    end

    best_hw = 0; best_m = 0;
    for (int k = 0; k < NO; k++) begin
      check(class_hw[k] == class_model[k], $sformatf("class %0d: %0d spikes, model %0d", k, class_hw[k], class_model[k]));
      if (class_hw[k] > class_hw[best_hw]) best_hw = k;
      if (class_model[k] > class_model[best_m]) best_m = k;
    end
    check(best_hw == best_m, "winning class differs from the model");
    $display("inference: class %0d wins with %0d of %0d output spikes", best_hw, class_hw[best_hw], n_ospk);
    $display("mechanisms: hidden spikes/stalls %0d, back-to-back %0d, last-neuron %0d, output spikes %0d, clamped channels %0d, saturating adds %0d",
             n_hspk, n_b2b, n_last, n_ospk, n_clamp, n_sat);
    check(n_hspk > 0, "no hidden spike");
    check(n_b2b > 0, "no back-to-back hidden spikes");
    check(n_last > 0, "no spike of the last hidden neuron");
    check(n_ospk > 0, "no output spike");
    check(n_clamp > 0, "no clamped channel");
    check(n_sat > 0, "no saturating add");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int v_add(input int v, input int w, inout int nsat);
    int s = v + w;
    if (s != sat(s)) nsat++;
    return sat(s);
  endfunction
endmodule
