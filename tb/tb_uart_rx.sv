// tb_uart_rx: serial frames built by the testbench (8N1, LSB first) at
// CLKS_PER_BIT = 16 must come out as the same bytes; a frame with a low stop
// bit and a short glitch on the idle line must produce nothing. Checks that
// valid comes within one bit time after the middle of the stop bit.
module tb_uart_rx;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  localparam int CPB = 16;

  logic       rxd, valid;
  logic [7:0] data;
  int         got[$];

  uart_rx #(.CLKS_PER_BIT(CPB)) dut (.clk, .rst_n, .rxd, .valid, .data);

  always @(posedge clk) if (rst_n && valid) got.push_back(int'(data));

  task automatic frame(int b, bit stop = 1);
    rxd = 0; repeat (CPB) @(posedge clk);
    for (int i = 0; i < 8; i++) begin rxd = b[i]; repeat (CPB) @(posedge clk); end
    rxd = stop; repeat (CPB) @(posedge clk);
    rxd = 1; repeat (2) @(posedge clk);
  endtask

  initial begin
    int sent[$];
    rxd = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (5) @(posedge clk);
    for (int i = 0; i < 300; i++) begin
      automatic int b = (i < 2) ? (i == 0 ? 0 : 255) : int'($urandom_range(255));
      frame(b);
      sent.push_back(b);
      if (i % 50 == 10) begin
        frame(8'h5a, 0);                     // framing error: dropped
        rxd = 0; repeat (3) @(posedge clk); rxd = 1;   // glitch: ignored
        repeat (2 * CPB) @(posedge clk);
      end
    end
    repeat (2 * CPB) @(posedge clk);
    checks++;
    if (got.size() != sent.size()) begin failures++; $display("FAIL %0d bytes for %0d sent", got.size(), sent.size()); end
    foreach (sent[i]) if (i < got.size()) begin
      checks++;
      if (got[i] != sent[i]) begin failures++; $display("FAIL byte %0d: %02x expected %02x", i, got[i], sent[i]); end
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
