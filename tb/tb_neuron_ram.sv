// tb_neuron_ram: random reads and writes against an array model; checks the
// one-cycle read latency, read-first behaviour and that chip_en low freezes
// both the contents and data_out.
module tb_neuron_ram;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  logic [11:0]       address;
  logic              chip_en, read_write;
  logic signed [8:0] data_in, data_out;
  int                model [4096];
  bit                known [4096];

  neuron_ram #(.DEPTH(4096), .VW(9)) dut (.clk, .address, .chip_en, .read_write, .data_in, .data_out);

  initial begin
    int exp_out;
    automatic bit exp_valid = 0;
    chip_en = 0; read_write = 0; address = 0; data_in = 0;
    // fill a window of addresses
    for (int a = 0; a < 64; a++) begin
      @(negedge clk);
      address = 12'(a * 61); chip_en = 1; read_write = 1; data_in = 9'(a - 32);
      model[a * 61] = a - 32; known[a * 61] = 1;
    end
    @(negedge clk); chip_en = 0;
    for (int i = 0; i < 4000; i++) begin
      automatic int a = 61 * $urandom_range(63);
      automatic bit en = ($urandom_range(3) != 0);
      automatic bit we = en && ($urandom_range(1) == 1);
      automatic int d = int'($urandom_range(511)) - 256;
      @(negedge clk);
      address = 12'(a); chip_en = en; read_write = we; data_in = 9'(d);
      @(posedge clk);
      if (en) begin
        exp_out = model[a];          // read-first
        exp_valid = 1;
        if (we) model[a] = d;
      end
      @(negedge clk);
      if (exp_valid) begin
        checks++;
        if (int'(data_out) != exp_out) begin
          failures++;
          $display("FAIL addr %0d read %0d expected %0d", a, data_out, exp_out);
        end
      end
      chip_en = 0;
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
