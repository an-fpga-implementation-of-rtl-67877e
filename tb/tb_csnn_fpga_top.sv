// tb_csnn_fpga_top: end-to-end test of the FPGA design through its serial
// port, the way the host drives it. For each of the 8 isotope classes the
// host sends a reset vector, a stream of photon events drawn from that
// class's synthetic spectrum, and a collect vector; the 16 bytes returned
// must equal the per-class output spike counts of the reference model, and
// the largest count must be the class sent.
// Reduced settings to keep the run short: 4 clocks per serial bit. To make
// the conv layer's wait for output room occur, the output FIFO is 11 deep
// and every conv weight is 63 (conv_w_flat63.hex), so that backed-up events
// on one spot make several pool windows fire together.
// At 4 clocks per bit a vector takes 80 cycles, faster than the 4096-cycle
// RAM clear after a reset can absorb, so the host sends only 25 vectors
// before the clear ends (the real 115200-baud link needs no such care).
// Every mechanism of the design is counted and must occur at least once.
module tb_csnn_fpga_top;
  import csnn_pkg::*;
  import csnn_ref_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  localparam int CPB = 4;
  localparam int N_EVENTS = 400;

  logic    uart_rxd, uart_txd;
  int      rx_bytes[$];
  csnn_ref m;
  int      m_counts[8];   // model's output spikes per class since the last reset
  // mechanism counters
  int n_clear = 0, n_conv = 0, n_pool = 0, n_out = 0, n_discard = 0, n_backpressure = 0,
      n_stall = 0, n_collect_wait = 0, n_reset = 0, n_floor_cycles = 0;

  csnn_fpga_top #(.CLKS_PER_BIT(CPB), .FC_FIFO_DEPTH(11),
                  .CONV_WEIGHT_FILE("tb/conv_w_flat63.hex")) dut (.clk, .rst_n, .uart_rxd, .uart_txd);

  always @(posedge clk) if (rst_n) begin
    if (dut.u_core.u_conv.u_ctrl.state == ST_CLEAR) n_clear++;
    if (dut.u_core.conv_req) n_conv++;
    if (dut.u_core.pool_req) n_pool++;
    if (dut.u_core.out_req) n_out++;
    if (dut.u_core.fc_discard) n_discard++;
    if (dut.u_core.req_in && !dut.u_core.ack) n_backpressure++;
    if (dut.u_core.u_conv.u_ctrl.state == ST_IDLE && !dut.u_core.u_conv.fifo_empty && !dut.u_core.fc_ready) n_stall++;
    if (dut.u_if.u_drv.state == 2'd2 && dut.u_if.u_drv.op == TV_COLLECT && !dut.core_idle) n_collect_wait++;
    if (!dut.core_rst_n) n_reset++;
  end

  // host receiver
  initial begin
    forever begin
      automatic int b = 0;
      @(negedge uart_txd);
      repeat (CPB / 2) @(posedge clk);
      for (int k = 0; k < 8; k++) begin repeat (CPB) @(posedge clk); b[k] = uart_txd; end
      repeat (CPB) @(posedge clk);
      rx_bytes.push_back(b);
    end
  end

  task automatic send_byte(int b);
    uart_rxd = 0; repeat (CPB) @(posedge clk);
    for (int k = 0; k < 8; k++) begin uart_rxd = b[k]; repeat (CPB) @(posedge clk); end
    uart_rxd = 1; repeat (CPB) @(posedge clk);
  endtask

  task automatic send_word(int w);
    send_byte(w >> 8);
    send_byte(w & 255);
  endtask

  task automatic send_event(int ch);
    send_word(ch);
    m.event_in(ch);
    foreach (m.out_spk[k]) m_counts[m.out_spk[k]]++;
  endtask

  task automatic collect_and_check(output int cnt[8]);
    rx_bytes.delete();
    send_word(16'h4000);
    wait (rx_bytes.size() == 16);
    for (int k = 0; k < 8; k++) begin
      cnt[k] = rx_bytes[2*k] << 8 | rx_bytes[2*k+1];
      checks++;
      if (cnt[k] != m_counts[k]) begin
        failures++; $display("FAIL count[%0d] = %0d, model %0d", k, cnt[k], m_counts[k]);
      end
    end
  endtask

  initial begin
    uart_rxd = 1;
    m = new();
    foreach (m.cw[f, n]) m.cw[f][n] = 63;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int c = 0; c < 8; c++) begin
      automatic int cnt[8];
      automatic int best = 0;
      send_word(16'h8000);                       // reset the design
      m.reset();
      foreach (m_counts[k]) m_counts[k] = 0;
      // 25 events on the peak while the network clears its RAM: they back
      // up in the input FIFO (ACK low) and then run back to back
      for (int b = 0; b < 25; b++) send_event(128 * c + 60);
      if (c == 0) collect_and_check(cnt);        // collect must wait for the backlog
      wait (dut.u_core.u_conv.u_ctrl.state != ST_CLEAR);
      for (int i = 0; i < N_EVENTS; i++) begin
        if (i % 100 == 50) for (int b = 0; b < 30; b++) send_event(128 * c + 60);
        else send_event(isotope_channel(c));
        if (c == 7 && i % 40 == 0) for (int b = 0; b < 10; b++) send_event(1012 + $urandom_range(11));
        if (c == 0 && i % 40 == 0) send_event($urandom_range(3));
      end
      collect_and_check(cnt);
      for (int k = 1; k < 8; k++) if (cnt[k] > cnt[best]) best = k;
      checks++;
      if (best != c) begin failures++; $display("FAIL class %0d identified as %0d", c, best); end
      $display("class %0d sample: counts %p -> class %0d", c, cnt, best);
    end
    checks++;
    if (n_clear == 0 || n_conv == 0 || n_pool == 0 || n_out == 0 || n_discard == 0 || n_backpressure == 0 ||
        n_stall == 0 || n_collect_wait == 0 || n_reset == 0 || m.n_edge_slots == 0) begin
      failures++; $display("FAIL a mechanism never occurred");
    end
    $display("RAM clear cycles %0d, conv spikes %0d, pool spikes %0d, output spikes %0d, discarded %0d, edge slots %0d",
             n_clear, n_conv, n_pool, n_out, n_discard, m.n_edge_slots);
    $display("ACK-low cycles %0d, conv stall cycles %0d, collect wait cycles %0d, reset cycles %0d",
             n_backpressure, n_stall, n_collect_wait, n_reset);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
