// tb_lif_unit: self-checking test of the LIF neuron update.
// Drives directed corner cases (exactly at threshold, one above, negative
// input, IF mode with zero leak) and random values, and compares v_next and
// spike with an integer model of V = Vprev + X - Vleak, spike iff V > Vth,
// reset to 0 on a spike.
module tb_lif_unit;
  localparam int X_W = 16, V_W = 20;
  logic signed [V_W-1:0] v_prev, v_leak, v_th, v_next;
  logic signed [X_W-1:0] x;
  logic spike;
  int checks = 0, failures = 0;

  lif_unit #(.X_W(X_W), .V_W(V_W)) dut (.*);

  task automatic apply(int vp, int xx, int lk, int th);
    int v; bit s;
    v_prev = V_W'(vp); x = X_W'(xx); v_leak = V_W'(lk); v_th = V_W'(th);
    #1;
    v = vp + xx - lk;
    s = (v > th);
    if (s) v = 0;
    checks++;
    if (spike !== s || int'(v_next) != v) begin
      failures++;
      $display("FAIL vp=%0d x=%0d leak=%0d th=%0d -> v=%0d s=%0b (exp %0d %0b)",
               vp, xx, lk, th, v_next, spike, v, s);
    end
  endtask

  initial begin
    apply(10, 5, 0, 15);    // equal to threshold: no spike
    apply(10, 6, 0, 15);    // one above: spike, reset
    apply(10, -20, 0, 15);  // negative input
    apply(100, 0, 3, 50);   // leak only, spikes
    apply(0, 0, 0, 0);
    apply(-5, 2, 1, 0);
    for (int i = 0; i < 500; i++)
      apply($signed($urandom_range(0, 4000)) - 2000, $signed($urandom_range(0, 60000)) - 30000,
            $urandom_range(0, 20), $urandom_range(0, 3000));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
