// tb_csnn_core: the whole network driven directly with AER events.
// For each of the 8 classes it resets the network, sends photons drawn from
// that class's synthetic spectrum (csnn_ref_pkg::isotope_channel), and checks
//  - every output spike, in order, against the event-level reference model,
//  - that the class with the most output spikes is the class sent (the
//    stand-in weights are built to separate the eight channel regions).
// It counts the mechanisms the network has and fails if one never occurs:
// conv, pool and output spikes, discarded partial-window spikes, edge slots,
// input back-pressure (ACK low) and conv stalls on a full output FIFO.
// With a 16-deep output FIFO the stall needs more pool spikes than real
// traffic produces, so a second instance with an 11-deep output FIFO (ready
// only when it is almost empty) and every conv weight 63
// (conv_w_flat63.hex), hit repeatedly on a window boundary, provokes it.
module tb_csnn_core;
  import csnn_pkg::*;
  import csnn_ref_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  localparam int N_EVENTS = 600;

  logic       req_in, ack, out_req, idle;
  logic [9:0] aer_in;
  logic [2:0] out_addr;
  csnn_ref    m;
  int         exp_q[$];
  int         counts [8];
  int         n_backpressure = 0, n_stall = 0, n_discard = 0, n_pool = 0, n_conv = 0;

  csnn_core dut (.clk, .rst_n, .req_in, .aer_in, .ack, .out_req, .out_addr, .idle);

  // stress instance
  logic       s_req, s_ack, s_out_req, s_idle;
  logic [9:0] s_aer;
  logic [2:0] s_out_addr;
  csnn_ref    ms;
  int         s_exp_q[$];
  int         s_n_stall = 0;
  csnn_core #(.CONV_WEIGHT_FILE("tb/conv_w_flat63.hex"), .FC_FIFO_DEPTH(11)) dut_s (
    .clk, .rst_n, .req_in (s_req), .aer_in (s_aer), .ack (s_ack),
    .out_req (s_out_req), .out_addr (s_out_addr), .idle (s_idle));

  always @(posedge clk) if (rst_n) begin
    if (s_out_req) begin
      checks++;
      if (s_exp_q.size() == 0) begin failures++; $display("FAIL stress: unexpected class %0d", s_out_addr); end
      else begin
        automatic int e = s_exp_q.pop_front();
        if (int'(s_out_addr) != e) begin failures++; $display("FAIL stress: class %0d expected %0d", s_out_addr, e); end
      end
    end
    if (dut_s.u_conv.u_ctrl.state == ST_IDLE && !dut_s.u_conv.fifo_empty && !dut_s.fc_ready) s_n_stall++;
  end

  task automatic send_s(int ch);
    @(negedge clk);
    s_req = 1; s_aer = 10'(ch);
    do @(posedge clk); while (!s_ack);
    ms.event_in(ch);
    foreach (ms.out_spk[i]) s_exp_q.push_back(ms.out_spk[i]);
    #1 s_req = 0;
  endtask

  always @(posedge clk) if (rst_n) begin
    if (out_req) begin
      counts[out_addr]++;
      checks++;
      if (exp_q.size() == 0) begin failures++; $display("FAIL unexpected class %0d", out_addr); end
      else begin
        automatic int e = exp_q.pop_front();
        if (int'(out_addr) != e) begin failures++; $display("FAIL class %0d expected %0d", out_addr, e); end
      end
    end
    if (req_in && !ack) n_backpressure++;
    if (dut.u_conv.u_ctrl.state == ST_IDLE && !dut.u_conv.fifo_empty && !dut.fc_ready) n_stall++;
    if (dut.fc_discard) n_discard++;
    if (dut.pool_req) n_pool++;
    if (dut.conv_req) n_conv++;
  end

  task automatic send(int ch);
    @(negedge clk);
    req_in = 1; aer_in = 10'(ch);
    do @(posedge clk); while (!ack);
    m.event_in(ch);
    foreach (m.out_spk[i]) exp_q.push_back(m.out_spk[i]);
    #1 req_in = 0;
  endtask

  initial begin
    m = new();
    ms = new();
    foreach (ms.cw[f, n]) ms.cw[f][n] = 63;
    req_in = 0; aer_in = 0; s_req = 0; s_aer = 0;
    for (int c = 0; c < 8; c++) begin
      automatic int best = 0;
      rst_n = 0;
      m.reset();
      foreach (counts[k]) counts[k] = 0;
      repeat (2) @(negedge clk);
      rst_n = 1;
      for (int i = 0; i < N_EVENTS; i++) begin
        // a dense burst on one spot now and then, to fill the output FIFO
        if (i % 200 == 100) for (int b = 0; b < 30; b++) send(128 * c + 60);
        else send(isotope_channel(c));
        // spectrum edges: partial last pool window and out-of-range conv slots
        if (c == 7 && i % 50 == 0) for (int b = 0; b < 10; b++) send(1012 + $urandom_range(11));
        if (c == 0 && i % 50 == 0) send($urandom_range(3));
      end
      wait (idle);
      repeat (3) @(negedge clk);
      checks++;
      if (exp_q.size() != 0) begin failures++; $display("FAIL %0d spikes missing", exp_q.size()); exp_q.delete(); end
      for (int k = 1; k < 8; k++) if (counts[k] > counts[best]) best = k;
      checks++;
      if (best != c) begin failures++; $display("FAIL class %0d identified as %0d", c, best); end
      $display("class %0d: counts %p", c, counts);
    end
    // stress: 400 events on channel 18 (positions 14..18 straddle windows 0 and 1)
    for (int i = 0; i < 400; i++) send_s(i % 3 == 0 ? 18 : 17 + $urandom_range(2));
    wait (s_idle);
    repeat (3) @(negedge clk);
    checks++;
    if (s_exp_q.size() != 0) begin failures++; $display("FAIL stress: %0d spikes missing", s_exp_q.size()); end
    n_stall += s_n_stall;
    checks++;
    if (n_backpressure == 0 || n_stall == 0 || n_discard == 0 || m.n_edge_slots == 0) begin
      failures++; $display("FAIL a mechanism never occurred");
    end
    $display("conv spikes %0d, pool spikes %0d, discarded %0d, edge slots %0d, ACK-low cycles %0d, stall cycles %0d",
             n_conv, n_pool, n_discard, m.n_edge_slots, n_backpressure, n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
