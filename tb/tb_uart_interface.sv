// tb_uart_interface: the serial test interface with a testbench host on the
// serial lines and a testbench stand-in for the network on the AER side.
// Checks that event vectors arrive as AER requests in order, that a reset
// vector pulses core_rst_n low and zeroes the counts, and that a collect
// vector returns, over the serial line, the number of output spikes the
// stand-in produced per class. CLKS_PER_BIT is 8 to keep the run short.
module tb_uart_interface;
  import csnn_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  localparam int CPB = 8;

  logic       uart_rxd, uart_txd, aer_req, aer_ack, out_req, core_idle, core_rst_n;
  logic [9:0] aer_addr;
  logic [2:0] out_addr;
  int         ev_exp[$], rx_bytes[$];
  int         cnt[8];
  int         n_core_rst = 0;

  uart_interface #(.CLKS_PER_BIT(CPB)) dut (.clk, .rst_n, .uart_rxd, .uart_txd, .aer_req, .aer_addr,
    .aer_ack, .out_req, .out_addr, .core_idle, .core_rst_n);

  // network stand-in: accepts events after a delay, answers each with an
  // output spike of class (channel mod 8), busy for a while after each event
  int busy_left = 0;
  always @(posedge clk) begin
    aer_ack <= 0; out_req <= 0;
    if (rst_n && !core_rst_n) n_core_rst++;
    if (busy_left > 0) busy_left <= busy_left - 1;
    if (rst_n && aer_req && !aer_ack && $urandom_range(2) == 0) begin
      aer_ack <= 1;
      checks++;
      if (ev_exp.size() == 0 || ev_exp[0] != int'(aer_addr)) begin failures++; $display("FAIL event %0d", aer_addr); end
      if (ev_exp.size() != 0) void'(ev_exp.pop_front());
      out_req <= 1; out_addr <= aer_addr[2:0];
      busy_left <= 30;
    end
  end
  assign core_idle = (busy_left == 0);

  // host receiver: sample each frame mid-bit
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

  task automatic collect_and_check();
    rx_bytes.delete();
    send_word(16'h4000);
    wait (rx_bytes.size() == 16);
    for (int k = 0; k < 8; k++) begin
      checks++;
      if ((rx_bytes[2*k] << 8 | rx_bytes[2*k+1]) != cnt[k]) begin
        failures++; $display("FAIL class %0d: %0d reported, %0d produced", k, rx_bytes[2*k] << 8 | rx_bytes[2*k+1], cnt[k]);
      end
    end
  endtask

  initial begin
    uart_rxd = 1;
    foreach (cnt[k]) cnt[k] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (3) @(posedge clk);
    for (int round = 0; round < 3; round++) begin
      for (int i = 0; i < 60; i++) begin
        automatic int ch = $urandom_range(1023);
        ev_exp.push_back(ch);
        cnt[ch % 8]++;
        send_word(ch);
      end
      collect_and_check();
      send_word(16'h8000);                   // reset
      foreach (cnt[k]) cnt[k] = 0;
      repeat (20) @(posedge clk);
      collect_and_check();
    end
    checks++;
    if (n_core_rst != 3 || ev_exp.size() != 0) begin failures++; $display("FAIL resets %0d, events left %0d", n_core_rst, ev_exp.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (500000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
