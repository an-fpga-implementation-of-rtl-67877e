// tb_uart_tx: sends random bytes at CLKS_PER_BIT = 16 and decodes the line
// by sampling each bit in its middle; checks the start and stop bits, the
// data and the frame time of 10 bit periods (busy high for 160 cycles).
module tb_uart_tx;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  localparam int CPB = 16;

  logic       start, busy, txd;
  logic [7:0] data;

  uart_tx #(.CLKS_PER_BIT(CPB)) dut (.clk, .rst_n, .start, .data, .busy, .txd);

  initial begin
    start = 0; data = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    checks++;
    if (txd !== 1'b1) begin failures++; $display("FAIL idle line low"); end
    for (int i = 0; i < 200; i++) begin
      automatic int b = $urandom_range(255);
      automatic int rx = 0, busy_cycles = 0;
      @(negedge clk);
      start = 1; data = 8'(b);
      @(negedge clk);
      start = 0; data = 8'($urandom);       // data may change once loaded
      // the frame starts at the edge that took start; sample mid-bit
      repeat (CPB / 2 - 1) @(negedge clk);
      checks++;
      if (txd !== 1'b0) begin failures++; $display("FAIL start bit"); end
      for (int k = 0; k < 8; k++) begin
        repeat (CPB) @(negedge clk);
        rx[k] = txd;
      end
      repeat (CPB) @(negedge clk);
      checks++;
      if (txd !== 1'b1) begin failures++; $display("FAIL stop bit"); end
      checks++;
      if (rx != b) begin failures++; $display("FAIL sent %02x got %02x", b, rx); end
      // count the remaining busy cycles: total must be 10*CPB
      while (busy) begin @(negedge clk); busy_cycles++; end
      checks++;
      if (busy_cycles + CPB / 2 - 1 + 9 * CPB != 10 * CPB) begin
        failures++; $display("FAIL frame time %0d", busy_cycles + CPB / 2 - 1 + 9 * CPB);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
