// tb_test_vector_driver: feeds byte pairs straight into the driver and
// checks what comes out: event vectors become AER requests held until a
// (randomly delayed) acknowledge, in order; collect vectors pulse collect
// only once the network is idle and the monitor free; reset vectors pulse
// soft_rst; NOP vectors do nothing.
module tb_test_vector_driver;
  import csnn_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic       rx_valid, aer_req, aer_ack, core_idle, mon_busy, collect, soft_rst;
  logic [7:0] rx_data;
  logic [9:0] aer_addr;
  int         exp_q[$];      // expected actions: channel, or -1 collect, -2 reset
  int         n_ev = 0, n_col = 0, n_rst = 0, n_col_wait = 0;

  test_vector_driver dut (.clk, .rst_n, .rx_valid, .rx_data, .aer_req, .aer_addr, .aer_ack,
                          .core_idle, .mon_busy, .collect, .soft_rst);

  // acknowledge after a random delay
  always @(posedge clk) begin
    aer_ack <= aer_req && !aer_ack && ($urandom_range(3) == 0);
    core_idle <= ($urandom_range(7) == 0);
    mon_busy <= ($urandom_range(1) == 0);
  end

  always @(posedge clk) if (rst_n) begin
    if (aer_req && aer_ack) begin
      checks++; n_ev++;
      if (exp_q.size() == 0 || exp_q[0] != int'(aer_addr)) begin
        failures++; $display("FAIL event %0d unexpected", aer_addr);
      end
      if (exp_q.size() != 0) void'(exp_q.pop_front());
    end
    if (collect) begin
      checks++; n_col++;
      if (exp_q.size() == 0 || exp_q[0] != -1) begin failures++; $display("FAIL unexpected collect"); end
      if (exp_q.size() != 0) void'(exp_q.pop_front());
    end
    if (soft_rst) begin
      checks++; n_rst++;
      if (exp_q.size() == 0 || exp_q[0] != -2) begin failures++; $display("FAIL unexpected reset"); end
      if (exp_q.size() != 0) void'(exp_q.pop_front());
    end
    if (dut.state == 2'd2 && dut.op == TV_COLLECT && !(core_idle && !mon_busy)) n_col_wait++;
    if (collect) begin
      checks++;
      if (!($past(core_idle) && !$past(mon_busy))) begin failures++; $display("FAIL collect while busy"); end
    end
  end

  task automatic send_word(int w);
    @(negedge clk); rx_valid = 1; rx_data = 8'(w >> 8);
    @(negedge clk); rx_valid = 0;
    repeat ($urandom_range(3)) @(negedge clk);
    @(negedge clk); rx_valid = 1; rx_data = 8'(w);
    @(negedge clk); rx_valid = 0;
  endtask

  initial begin
    rx_valid = 0; rx_data = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 600; i++) begin
      automatic int r = $urandom_range(19);
      automatic int ch = $urandom_range(1023);
      if (r < 16) begin send_word(ch); exp_q.push_back(ch); end
      else if (r < 18) begin send_word(16'h4000); exp_q.push_back(-1); end
      else if (r < 19) begin send_word(16'h8000); exp_q.push_back(-2); end
      else send_word(16'hC000 | ch);
      repeat ($urandom_range(20)) @(negedge clk);
    end
    repeat (400) @(negedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL %0d actions not done", exp_q.size()); end
    checks++;
    if (n_col == 0 || n_rst == 0 || n_col_wait == 0) begin failures++; $display("FAIL coverage"); end
    $display("events %0d, collects %0d (waited %0d cycles), resets %0d", n_ev, n_col, n_col_wait, n_rst);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
