// tb_conv_control: checks the control sequence of the convolutional layer:
// the RAM clear after reset, the read/process address and weight sequence
// for an event (channel 10 must address positions 6..10 with weights 0..4,
// as in the published timing diagram), suppressed slots at both spectrum
// edges, the 42-cycle event time and the hold while ds_ready is low.
module tb_conv_control;
  import csnn_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        fifo_empty, fifo_rd_en, ds_ready, ram_en, ram_we, clearing, processing, busy;
  logic [9:0]  fifo_dout;
  logic [4:0]  rom_addr;
  logic [11:0] ram_addr;
  tdm_state_e  state;

  conv_control dut (.clk, .rst_n, .fifo_empty, .fifo_dout, .ds_ready, .fifo_rd_en, .rom_addr,
                    .ram_addr, .ram_en, .ram_we, .clearing, .processing, .state, .busy);

  int prev_rom = -1;
  always @(posedge clk) prev_rom <= int'(rom_addr);

  task automatic expect_eq(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d (t=%0t)", what, got, exp, $time);
    end
  endtask

  // Offer one event and follow it cycle by cycle.
  task automatic run_event(int ch);
    int cycles = 0;
    @(negedge clk);
    fifo_empty = 0;
    #1;
    expect_eq("rd_en when event waiting", int'(fifo_rd_en), 1);
    @(posedge clk); #1;               // FIFO output valid the cycle after rd_en
    fifo_empty = 1; fifo_dout = 10'(ch);
    cycles = 1;
    expect_eq("LOAD state", int'(state), int'(ST_LOAD));
    @(posedge clk); #1; cycles++;
    for (int f = 0; f < 4; f++)
      for (int n = 0; n < 5; n++) begin
        automatic int p = ch - 4 + n;
        automatic bit v = (p >= 0 && p < 1020);
        expect_eq("READ state", int'(state), int'(ST_READ));
        expect_eq("rom addr", int'(rom_addr), f * 5 + n);
        // registered ROM: the address seen in the previous cycle (LOAD or the
        // previous PROCESS) must already be this slot's
        expect_eq("rom addr one cycle ahead", prev_rom, f * 5 + n);
        expect_eq("ram_en read", int'(ram_en), int'(v));
        expect_eq("ram_we read", int'(ram_we), 0);
        if (v) expect_eq("ram addr read", int'(ram_addr), f * 1024 + p);
        @(posedge clk); #1; cycles++;
        expect_eq("PROCESS state", int'(state), int'(ST_PROCESS));
        expect_eq("ram_we process", int'(ram_we), int'(v));
        expect_eq("processing", int'(processing), int'(v));
        if (v) expect_eq("ram addr process", int'(ram_addr), f * 1024 + p);
        @(posedge clk); #1; cycles++;
      end
    expect_eq("back to IDLE", int'(state), int'(ST_IDLE));
    expect_eq("event cycles (rd_en to IDLE)", cycles, 42);
  endtask

  initial begin
    fifo_empty = 1; fifo_dout = 0; ds_ready = 1;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int a = 0; a < 4096; a++) begin
      #1;
      expect_eq("clear write", int'(ram_en && ram_we && clearing), 1);
      expect_eq("clear address", int'(ram_addr), a);
      @(negedge clk);
    end
    expect_eq("idle after clear", int'(state), int'(ST_IDLE));
    // hold while the downstream has no room
    ds_ready = 0; fifo_empty = 0;
    repeat (5) begin
      @(negedge clk); #1;
      expect_eq("no rd_en without ds_ready", int'(fifo_rd_en), 0);
    end
    fifo_empty = 1; ds_ready = 1;
    run_event(10);
    run_event(1);
    run_event(1023);
    run_event(512);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
