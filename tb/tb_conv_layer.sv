// tb_conv_layer: random input events through the convolutional layer,
// compared spike by spike with the reference model. Run with a mixed-sign
// weight set (from conv_w_mixed.hex) so neurons both fire and hit the V_min
// floor. Also checks the 42-cycle event period while events are queued, the
// ACK back-pressure when the input FIFO is full, and that ds_ready low holds
// the layer.
module tb_conv_layer;
  import csnn_pkg::*;
  import csnn_ref_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  localparam int W_MIXED [20] = '{40,-30,50,-60,20, -50,45,-20,60,-35, 30,30,-63,10,55, -10,-40,63,-25,15};

  logic        req_in, ack, req_out, ds_ready, idle;
  logic [9:0]  aer_in;
  logic [11:0] aer_out;
  int          exp_q[$];
  csnn_ref     m;
  int          n_spk = 0, n_backpressure = 0, n_stall = 0, n_period = 0;
  int          last_load = -1, cyc = 0;

  conv_layer #(.V_THR(64), .V_MIN(-64), .WEIGHT_FILE("tb/conv_w_mixed.hex")) dut (
    .clk, .rst_n, .req_in, .aer_in, .ack, .req_out, .aer_out, .ds_ready, .idle);

  always @(posedge clk) begin
    cyc++;
    if (rst_n && req_out) begin
      checks++; n_spk++;
      if (exp_q.size() == 0) begin
        failures++; $display("FAIL unexpected spike %0h", aer_out);
      end else begin
        automatic int e = exp_q.pop_front();
        if (int'(aer_out) != e) begin
          failures++; $display("FAIL spike %0h expected %0h", aer_out, e);
        end
      end
    end
    if (rst_n && req_in && !ack) n_backpressure++;
    if (rst_n && dut.u_ctrl.state == ST_IDLE && !dut.fifo_empty && !ds_ready) n_stall++;
    // event period: LOAD to LOAD while the FIFO never ran dry and ds_ready stayed high
    if (rst_n && dut.u_ctrl.state == ST_LOAD) begin
      if (last_load >= 0 && period_ok) begin
        checks++; n_period++;
        if (cyc - last_load != 42) begin
          failures++; $display("FAIL event period %0d", cyc - last_load);
        end
      end
      last_load = cyc;
      period_ok = 1;
    end
    if (dut.fifo_empty || !ds_ready) period_ok = 0;
  end
  bit period_ok = 0;

  task automatic send(int ch);
    @(negedge clk);
    req_in = 1; aer_in = 10'(ch);
    do @(posedge clk); while (!ack);
    m.event_in(ch);
    foreach (m.conv_spk[i]) exp_q.push_back(m.conv_spk[i]);
    #1 req_in = 0;
  endtask

  initial begin
    m = new(64, -64);
    foreach (W_MIXED[i]) m.cw[i / 5][i % 5] = W_MIXED[i];
    req_in = 0; aer_in = 0; ds_ready = 1;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // burst while the RAM is still being cleared: fills the FIFO
    for (int i = 0; i < 40; i++) send($urandom_range(1023));
    for (int i = 0; i < 3000; i++) begin
      if (i % 500 == 250) begin
        ds_ready = 0;
        repeat (100) @(negedge clk);
        ds_ready = 1;
      end
      if ($urandom_range(3) == 0) send($urandom_range(1023));
      else if ($urandom_range(1) == 0) send(int'($urandom_range(8)) + ($urandom_range(1) ? 1015 : 0));
      else send(500 + $urandom_range(40));
    end
    wait (idle);
    repeat (5) @(negedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL %0d spikes missing", exp_q.size()); end
    checks++;
    if (m.n_floor == 0 || n_backpressure == 0 || n_stall == 0 || n_period < 10 || n_spk < 100) begin
      failures++;
      $display("FAIL coverage: floor %0d backpressure %0d stall %0d periods %0d spikes %0d",
               m.n_floor, n_backpressure, n_stall, n_period, n_spk);
    end
    $display("conv spikes %0d, floors %0d, back-pressure cycles %0d, stall cycles %0d, periods checked %0d",
             n_spk, m.n_floor, n_backpressure, n_stall, n_period);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
