// tb_result_monitor: random output spikes are counted by the testbench and
// by the monitor; on each collect the 16 bytes handed to a model serial
// transmitter (busy for 30 cycles per byte) must equal the counts at the
// moment of the collect, class 0 first, high byte first. Also checks clear
// and that a counter saturates at 65535 instead of wrapping.
module tb_result_monitor;
  import csnn_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic       out_req, collect, clear, tx_start, tx_busy, busy;
  logic [2:0] out_addr;
  logic [7:0] tx_data;
  int         cnt [8];
  int         bytes[$];
  int         txc = 0;

  result_monitor dut (.clk, .rst_n, .out_req, .out_addr, .collect, .clear, .tx_start, .tx_data, .tx_busy, .busy);

  // transmitter model
  always @(posedge clk) begin
    if (!rst_n) begin tx_busy <= 0; txc <= 0; end
    else if (!tx_busy && tx_start) begin
      tx_busy <= 1; txc <= 30; bytes.push_back(int'(tx_data));
    end else if (tx_busy) begin
      if (txc == 1) tx_busy <= 0;
      txc <= txc - 1;
    end
  end

  task automatic do_collect();
    int snap[8] = cnt;
    @(negedge clk); collect = 1;
    @(negedge clk); collect = 0;
    bytes.delete();
    wait (!busy);
    @(negedge clk);
    checks++;
    if (bytes.size() != 16) begin failures++; $display("FAIL %0d bytes", bytes.size()); end
    else for (int k = 0; k < 8; k++) begin
      checks++;
      if ((bytes[2*k] << 8 | bytes[2*k+1]) != snap[k]) begin
        failures++; $display("FAIL class %0d: sent %0d counted %0d", k, bytes[2*k] << 8 | bytes[2*k+1], snap[k]);
      end
    end
  endtask

  task automatic spikes(int n, int only = -1);
    for (int i = 0; i < n; i++) begin
      automatic int c = (only >= 0) ? only : int'($urandom_range(7));
      @(negedge clk);
      out_req = ($urandom_range(2) != 0); out_addr = 3'(c);
      if (out_req && cnt[c] < 65535) cnt[c]++;
    end
    @(negedge clk); out_req = 0;
  endtask

  initial begin
    out_req = 0; out_addr = 0; collect = 0; clear = 0;
    foreach (cnt[k]) cnt[k] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    do_collect();
    spikes(3000);
    do_collect();
    spikes(500);
    do_collect();
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    foreach (cnt[k]) cnt[k] = 0;
    spikes(100);
    do_collect();
    spikes(100000, 5);      // saturates class 5
    do_collect();
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
