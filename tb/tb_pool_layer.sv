// tb_pool_layer: random conv spikes into the pooling layer; every 16th spike
// of a window must produce one pool spike {filter, window}, one cycle later.
// Spikes are sent back to back and with gaps, and concentrated on a few
// windows (including the partial last window) so many of them fire.
module tb_pool_layer;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        req_in, req_out;
  logic [11:0] aer_in;
  logic [7:0]  aer_out;
  int          cnt [4][64];
  int          exp_q[$];
  int          n_out = 0, n_last_window = 0;

  pool_layer dut (.clk, .rst_n, .req_in, .aer_in, .req_out, .aer_out);

  initial begin
    req_in = 0; aer_in = 0;
    foreach (cnt[f, q]) cnt[f][q] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 20000; i++) begin
      automatic int f = $urandom_range(3);
      automatic int p = ($urandom_range(1) == 0) ? int'($urandom_range(1019))
                                                  : 1000 + int'($urandom_range(19));
      automatic bit fire;
      @(negedge clk);
      req_in = ($urandom_range(4) != 0);
      aer_in = 12'(f * 1024 + p);
      fire = 0;
      if (req_in) begin
        cnt[f][p / 16]++;
        if (cnt[f][p / 16] == 16) begin
          cnt[f][p / 16] = 0;
          fire = 1;
          if (p / 16 == 63) n_last_window++;
        end
      end
      @(posedge clk); #1;
      checks++;
      if (req_out != fire || (fire && int'(aer_out) != f * 64 + p / 16)) begin
        failures++;
        $display("FAIL spike in f%0d p%0d: req_out %0d addr %0d expected %0d", f, p, req_out, aer_out, fire);
      end
      if (fire) n_out++;
    end
    checks++;
    if (n_out < 100 || n_last_window == 0) begin failures++; $display("FAIL coverage %0d %0d", n_out, n_last_window); end
    $display("pool spikes %0d (last window %0d)", n_out, n_last_window);
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
