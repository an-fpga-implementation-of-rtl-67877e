// tb_fc_layer: random pool spikes into the output layer, compared with the
// reference model's output spikes. Checks the 18-cycle cost per pool spike,
// that spikes from the partial last window are discarded, and that ready
// falls while the FIFO cannot take another event's worth of spikes.
module tb_fc_layer;
  import csnn_pkg::*;
  import csnn_ref_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic       req_in, ready, req_out, discard, idle;
  logic [7:0] aer_in;
  logic [2:0] aer_out;
  csnn_ref    m;
  int         exp_q[$];
  int         n_out = 0, n_discard = 0, n_not_ready = 0, n_period = 0, cyc = 0, last_load = -1;
  bit         period_ok = 0;

  fc_layer dut (.clk, .rst_n, .req_in, .aer_in, .ready, .req_out, .aer_out, .discard, .idle);

  always @(posedge clk) begin
    cyc++;
    if (rst_n && req_out) begin
      checks++; n_out++;
      if (exp_q.size() == 0) begin failures++; $display("FAIL unexpected class %0d", aer_out); end
      else begin
        automatic int e = exp_q.pop_front();
        if (int'(aer_out) != e) begin failures++; $display("FAIL class %0d expected %0d", aer_out, e); end
      end
    end
    if (rst_n && discard) n_discard++;
    if (rst_n && !ready) n_not_ready++;
    if (rst_n && dut.state == ST_LOAD) begin
      if (last_load >= 0 && period_ok && !dut.discard) begin
        checks++; n_period++;
        if (cyc - last_load != 18) begin failures++; $display("FAIL spike period %0d", cyc - last_load); end
      end
      last_load = cyc;
      period_ok = (32'(dut.fifo_dout[5:0]) < 63);
    end
    if (dut.fifo_empty) period_ok = 0;
  end

  initial begin
    m = new();
    req_in = 0; aer_in = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 4000; i++) begin
      automatic int f = $urandom_range(3);
      automatic int q = ($urandom_range(9) == 0) ? 63 : int'($urandom_range(7)) + 8 * int'($urandom_range(1));
      @(negedge clk);
      // offer a spike only while ready, as the conv layer does per event
      if (ready && $urandom_range(2) != 0) begin
        req_in = 1; aer_in = 8'(f * 64 + q);
        m.out_spk.delete();
        m.pool_spike(f, q);
        foreach (m.out_spk[k]) exp_q.push_back(m.out_spk[k]);
      end
      @(posedge clk); #1 req_in = 0;
      if ($urandom_range(15) == 0) repeat (60) @(negedge clk);
    end
    wait (idle);
    repeat (3) @(negedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL %0d spikes missing", exp_q.size()); end
    checks++;
    if (n_discard != m.n_discard) begin failures++; $display("FAIL discards %0d expected %0d", n_discard, m.n_discard); end
    checks++;
    if (n_out < 50 || n_discard == 0 || n_not_ready == 0 || n_period < 10) begin
      failures++; $display("FAIL coverage out %0d discard %0d not-ready %0d periods %0d", n_out, n_discard, n_not_ready, n_period);
    end
    $display("output spikes %0d, discarded %0d, not-ready cycles %0d, periods %0d", n_out, n_discard, n_not_ready, n_period);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
