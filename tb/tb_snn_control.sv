// tb_snn_control: runs the TDM state machine with its counter and timer for
// many input spikes. The neuron ALU is replaced by a fire mask chosen per
// pass. Checked every cycle: neurons are written back in order 0..39 with 0
// for a fired neuron; weights are fetched at source*40 + 0..39 in order; each
// spike leaves on aer_out/req_out the cycle after its process cycle; every
// spike stalls the pass for exactly 9 cycles; ack arrives 41 + 9*spikes
// cycles after the request, as in the paper's timing diagram.
module tb_snn_control;
  import snn_pkg::*;
  localparam int N = 40, N_PRE = 100, D = 9;
  logic clk = 0, n_rst = 0;
  logic [6:0] aer_in;
  logic req_in, fire;
  logic signed [15:0] integ, result;
  logic [5:0] cnt, neuron_id, aer_out;
  logic cnt_last, cnt_clr, cnt_inc, tmr_done, tmr_start, tmr_busy;
  logic [11:0] mem_addr;
  logic wreg_en, rf_we, req_out, ack;
  npu_state_e state;
  logic [N-1:0] mask;
  int checks = 0, failures = 0;

  snn_control dut (.clk, .n_rst, .aer_in, .req_in, .fire, .integration_result(integ),
    .cnt, .cnt_last, .cnt_clr, .cnt_inc, .tmr_done, .tmr_start,
    .mem_addr, .wreg_en, .neuron_id, .result, .rf_we, .aer_out, .req_out, .ack, .state);
  snn_tdm_counter #(.N(N)) u_cnt (.clk, .n_rst, .clr(cnt_clr), .inc(cnt_inc), .cnt, .last(cnt_last));
  snn_timer #(.CYCLES(D)) u_tmr (.clk, .n_rst, .start(tmr_start), .busy(tmr_busy), .done(tmr_done));

  assign fire  = mask[neuron_id] && rf_we;
  assign integ = 16'(1000 + int'(neuron_id));

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int src, nf, cyc, next_wr, next_fetch, last_wr_cyc, fired_prev, ack_cyc, fidx;
    int fired_ids[$];
    aer_in = '0; req_in = 0; mask = '0;
    repeat (2) @(posedge clk);
    n_rst = 1;
    for (int p = 0; p < 300; p++) begin
      src = $urandom_range(0, N_PRE - 1);
      case (p % 4)
        0: mask = '0;
        1: mask = {N{1'b1}};                       // every neuron fires back to back
        2: mask = (N)'(1) << (N - 1);              // only the last neuron fires
        default: mask = {$urandom, $urandom};
      endcase
      nf = $countones(mask);
      fired_ids.delete();
      @(negedge clk);
      check(state == ST_IDLE, "not idle before request");
      aer_in = 7'(src); req_in = 1; #1;
      check(wreg_en && mem_addr == 12'(src * N), $sformatf("first fetch addr %0d", mem_addr));
      next_wr = 0; next_fetch = 1; last_wr_cyc = -100; fired_prev = -1; ack_cyc = -1; fidx = 0;
      for (cyc = 1; cyc < 2 * N + D * N + 10 && ack_cyc < 0; cyc++) begin
        @(negedge clk); req_in = 0; aer_in = 7'($urandom); #1;
        if (ack) ack_cyc = cyc;
        if (req_out) begin
          check(fired_prev == cyc - 1 && fidx < fired_ids.size() && aer_out == 6'(fired_ids[fidx]),
                $sformatf("spike out at cycle %0d id %0d", cyc, aer_out));
          check(state == ST_DELAY, "first delay cycle not in delay state");
          fidx++;
        end
        if (rf_we) begin
          check(neuron_id == 6'(next_wr), $sformatf("wrote neuron %0d expected %0d", neuron_id, next_wr));
          check(result == (mask[next_wr] ? 16'sd0 : 16'(1000 + next_wr)), "written result");
          if (next_wr > 0)
            check(cyc - last_wr_cyc == (mask[next_wr - 1] ? D + 1 : 1),
                  $sformatf("gap before neuron %0d is %0d cycles", next_wr, cyc - last_wr_cyc));
          if (fire) begin fired_ids.push_back(next_wr); fired_prev = cyc; end
          last_wr_cyc = cyc;
          next_wr++;
        end
        if (wreg_en) begin
          check(mem_addr == 12'(src * N + next_fetch), $sformatf("fetch addr %0d", mem_addr));
          next_fetch++;
        end
      end
      check(next_wr == N && next_fetch == N, "not every neuron processed");
      check(fidx == nf, $sformatf("%0d spikes out, expected %0d", fidx, nf));
      check(ack_cyc == N + 1 + D * nf, $sformatf("ack after %0d cycles, expected %0d", ack_cyc, N + 1 + D * nf));
      @(negedge clk); #1;
      check(!ack, "ack longer than one cycle");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
