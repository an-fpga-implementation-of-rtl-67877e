// tb_csnn_sample_batch: batch evaluation in the style of a test-set run.
// Many short and long measurements ("samples") of synthetic isotope spectra
// are streamed into the network, each after a reset, and classified by the
// largest output count. Per sample, all 8 counts must equal the reference
// model's; per sample length, the accuracy is reported, and the long
// samples must do at least as well as the short ones (more photons, more
// evidence). The weights are the stand-in set, so the accuracy describes
// this test, not a trained classifier.
module tb_csnn_sample_batch;
  import csnn_pkg::*;
  import csnn_ref_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  localparam int N_PER_CLASS = 8;
  localparam int LENGTHS [2] = '{25, 250};

  logic       req_in, ack, out_req, idle;
  logic [9:0] aer_in;
  logic [2:0] out_addr;
  csnn_ref    m;
  int         counts[8], m_counts[8];

  csnn_core dut (.clk, .rst_n, .req_in, .aer_in, .ack, .out_req, .out_addr, .idle);

  always @(posedge clk) if (rst_n && out_req) counts[out_addr]++;

  task automatic send(int ch);
    @(negedge clk);
    req_in = 1; aer_in = 10'(ch);
    do @(posedge clk); while (!ack);
    m.event_in(ch);
    foreach (m.out_spk[i]) m_counts[m.out_spk[i]]++;
    #1 req_in = 0;
  endtask

  initial begin
    int correct[2];
    m = new();
    req_in = 0; aer_in = 0;
    foreach (LENGTHS[l]) begin
      correct[l] = 0;
      for (int c = 0; c < 8; c++)
        for (int s = 0; s < N_PER_CLASS; s++) begin
          automatic int best = 0;
          @(negedge clk); rst_n = 0;
          m.reset();
          foreach (counts[k]) begin counts[k] = 0; m_counts[k] = 0; end
          @(negedge clk); rst_n = 1;
          for (int i = 0; i < LENGTHS[l]; i++) send(isotope_channel(c));
          wait (idle);
          @(negedge clk);
          for (int k = 0; k < 8; k++) begin
            checks++;
            if (counts[k] != m_counts[k]) begin
              failures++; $display("FAIL length %0d class %0d: count[%0d] %0d, model %0d", LENGTHS[l], c, k, counts[k], m_counts[k]);
            end
          end
          for (int k = 1; k < 8; k++) if (counts[k] > counts[best]) best = k;
          if (best == c && counts[c] > 0) correct[l]++;
        end
      $display("sample length %0d photons: %0d of %0d identified", LENGTHS[l], correct[l], 8 * N_PER_CLASS);
    end
    checks++;
    if (correct[1] < correct[0] || correct[1] < 8 * N_PER_CLASS * 9 / 10) begin
      failures++; $display("FAIL long samples identified worse than expected");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
