// tb_aer_fifo: random pushes and pops against a queue model, including
// writes while full and reads while empty; read data is checked one cycle
// after rd_en, as the layers expect.
module tb_aer_fifo;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic       wr_en, rd_en, full, empty;
  logic [9:0] din, dout;
  logic [4:0] count;
  int         q[$];
  int         n_full = 0;

  aer_fifo #(.W(10), .DEPTH(16)) dut (.clk, .rst_n, .wr_en, .din, .full, .rd_en, .dout, .empty, .count);

  initial begin
    int exp_d;
    bit popped;
    wr_en = 0; rd_en = 0; din = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 5000; i++) begin
      automatic int phase = (i / 500) % 2;       // alternately fill and drain
      @(negedge clk);
      wr_en = ($urandom_range(3) < (phase ? 1 : 3));
      rd_en = ($urandom_range(3) < (phase ? 3 : 1));
      din   = 10'($urandom);
      checks++;
      if (int'(count) != q.size() || full != (q.size() == 16) || empty != (q.size() == 0)) begin
        failures++;
        $display("FAIL count %0d model %0d", count, q.size());
      end
      if (full) n_full++;
      popped = rd_en && q.size() > 0;
      if (popped) exp_d = q.pop_front();
      if (wr_en && !full) q.push_back(int'(din));
      @(negedge clk);
      wr_en = 0; rd_en = 0;
      if (popped) begin
        checks++;
        if (int'(dout) != exp_d) begin
          failures++;
          $display("FAIL dout %0d expected %0d", dout, exp_d);
        end
      end
    end
    checks++;
    if (n_full == 0) begin failures++; $display("FAIL never full"); end
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
