// tb_csnn_fpga_top_full: the FPGA design with every parameter at its default
// (115200 baud at 100 MHz, 868 clocks per bit, default weights and FIFO
// depths), driven through its serial port. Two measurements are run: a
// reset vector, 300 photon events from one synthetic isotope spectrum, and
// a collect vector; the returned counts must match the reference model and
// identify the isotope. About 11 million clock cycles.
module tb_csnn_fpga_top_full;
  import csnn_pkg::*;
  import csnn_ref_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  localparam int CPB = 868;        // must match the design default
  localparam int N_EVENTS = 300;

  logic    uart_rxd, uart_txd;
  int      rx_bytes[$];
  csnn_ref m;
  int      m_counts[8];

  csnn_fpga_top dut (.clk, .rst_n, .uart_rxd, .uart_txd);

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

  initial begin
    uart_rxd = 1;
    m = new();
    repeat (3) @(posedge clk);
    rst_n = 1;
    foreach (m_counts[k]) m_counts[k] = 0;
    for (int s = 0; s < 2; s++) begin
      automatic int c = (s == 0) ? 2 : 6;
      automatic int cnt[8];
      automatic int best = 0;
      send_word(16'h8000);
      m.reset();
      foreach (m_counts[k]) m_counts[k] = 0;
      for (int i = 0; i < N_EVENTS; i++) begin
        automatic int ch = (i % 4 == 0) ? 128 * c + 60 : isotope_channel(c);
        send_word(ch);
        m.event_in(ch);
        foreach (m.out_spk[k]) m_counts[m.out_spk[k]]++;
      end
      rx_bytes.delete();
      send_word(16'h4000);
      wait (rx_bytes.size() == 16);
      for (int k = 0; k < 8; k++) begin
        cnt[k] = rx_bytes[2*k] << 8 | rx_bytes[2*k+1];
        checks++;
        if (cnt[k] != m_counts[k]) begin failures++; $display("FAIL count[%0d] = %0d, model %0d", k, cnt[k], m_counts[k]); end
      end
      for (int k = 1; k < 8; k++) if (cnt[k] > cnt[best]) best = k;
      checks++;
      if (best != c || cnt[c] == 0) begin failures++; $display("FAIL isotope %0d identified as %0d", c, best); end
      $display("isotope %0d: counts %p -> %0d", c, cnt, best);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
