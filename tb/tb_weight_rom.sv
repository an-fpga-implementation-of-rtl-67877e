// tb_weight_rom: reads every word of a conv-weight ROM and an output-layer
// weight ROM and compares with the stand-in weight formulas; checks the
// one-cycle read latency.
module tb_weight_rom;
  import csnn_pkg::*;
  import csnn_ref_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  logic [4:0]  ca;
  logic [10:0] fa;
  weight_t     cw, fw;

  weight_rom #(.DEPTH(20),   .KIND(ROM_CONV)) u_c (.clk, .addr (ca), .data_out (cw));
  weight_rom #(.DEPTH(2016), .KIND(ROM_FC))   u_f (.clk, .addr (fa), .data_out (fw));

  initial begin
    for (int a = 0; a < 2016; a++) begin
      automatic int row = a / 8;
      @(negedge clk);
      ca = 5'(a % 20); fa = 11'(a);
      @(negedge clk);
      checks += 2;
      if (int'(cw) != ref_conv_w((a % 20) / 5, (a % 20) % 5)) begin
        failures++; $display("FAIL conv word %0d = %0d", a % 20, cw);
      end
      if (int'(fw) != ref_fc_w(row / 63, row % 63, a % 8)) begin
        failures++; $display("FAIL fc word %0d = %0d", a, fw);
      end
    end
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
