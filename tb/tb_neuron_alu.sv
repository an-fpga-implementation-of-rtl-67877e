// tb_neuron_alu: random and corner-case check of the integrate-and-fire ALU
// against the update rule V+w, fire at V_thr with subtraction, floor at V_min.
module tb_neuron_alu;
  int checks = 0, failures = 0;
  logic signed [8:0] v_in, v_thr, v_min, integ, post;
  logic signed [7:0] w;
  logic              fire;

  neuron_alu #(.VW(9), .WW(8)) dut (
    .v_in, .weight (w), .v_thr, .v_min, .fire,
    .integration_result (integ), .post_fire_result (post)
  );

  task automatic check(int v, int wt, int thr, int mn);
    automatic int s = v + wt;
    automatic bit ef = (s >= thr);
    automatic int ei = (s < mn) ? mn : s;
    v_in = 9'(v); w = 8'(wt); v_thr = 9'(thr); v_min = 9'(mn);
    #1;
    checks++;
    if (fire !== ef || (!ef && int'(integ) != ei) || (ef && int'(post) != s - thr)) begin
      failures++;
      $display("FAIL v=%0d w=%0d thr=%0d min=%0d: fire=%0d integ=%0d post=%0d", v, wt, thr, mn, fire, integ, post);
    end
  endtask

  initial begin
    check(63, 1, 64, -64);     // exactly reaches threshold
    check(62, 1, 64, -64);     // one below
    check(-60, -10, 64, -64);  // below the floor
    check(-54, -10, 64, -64);  // exactly at the floor
    check(120, 127, 128, -128);// largest sum
    check(-128, -128, 128, -128);
    for (int i = 0; i < 5000; i++) begin
      automatic int thr = $urandom_range(128, 1);
      automatic int mn  = -int'($urandom_range(128));
      automatic int v   = mn + int'($urandom_range(thr - 1 - mn));
      automatic int wt  = int'($urandom_range(255)) - 128;
      if (wt >= thr) wt = thr - 1;
      check(v, wt, thr, mn);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
