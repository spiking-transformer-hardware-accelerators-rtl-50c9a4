// tb_attn_rpe: self-checking test of the reconfigurable PE.
// Mode 1: random Q/K spike streams; A must count the cycles with both
// registered spikes set. Mode 2: random V spikes and X inputs; X must become
// x_in + (V ? A : 0) one cycle later. Also checks pass-through and a_clr.
module tb_attn_rpe;
  import st3d_pkg::*;
  localparam int A_W = 5, X_W = 16;
  logic clk = 0, rst_n = 1, a_clr = 0, q_in = 0, kv_in = 0, q_out, kv_out;
  attn_mode_e mode = MODE_QK;
  logic [X_W-1:0] x_in = '0, x_out;
  logic [A_W-1:0] a_out;
  int checks = 0, failures = 0;
  int a_m, x_m;
  logic q_d, kv_d;

  attn_rpe #(.A_W(A_W), .X_W(X_W)) dut (.*);
  always #5 clk = ~clk;
  // a real reset edge before the first clock edge, so every flop starts reset
  initial #1 rst_n = 0;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int rep = 0; rep < 4; rep++) begin
      // mode 1
      mode = MODE_QK; a_clr = 1; q_in = 0; kv_in = 0;
      @(posedge clk); a_m = 0; q_d = 0; kv_d = 0;
      @(negedge clk); a_clr = 0;
      for (int i = 0; i < 16; i++) begin
        q_in = 1'($urandom); kv_in = 1'($urandom);
        @(posedge clk);
        if (q_d && kv_d) a_m++;
        q_d = q_in; kv_d = kv_in;
        @(negedge clk);
        chk(q_out == q_d && kv_out == kv_d, "pass-through");
        chk(a_out == A_W'(a_m), "attention accumulate");
      end
      q_in = 0; kv_in = 0;
      @(posedge clk); if (q_d && kv_d) a_m++; q_d = 0; kv_d = 0;
      @(negedge clk);
      chk(a_out == A_W'(a_m), "attention final");
      // mode 2
      mode = MODE_AV;
      for (int i = 0; i < 16; i++) begin
        kv_in = 1'($urandom); x_in = X_W'($urandom_range(0, 1000));
        @(posedge clk);
        x_m = int'(x_in) + (kv_d ? a_m : 0);
        kv_d = kv_in;
        @(negedge clk);
        chk(x_out == X_W'(x_m), "X = X_in + V*A");
        chk(a_out == A_W'(a_m), "attention held in mode 2");
      end
      kv_in = 0;
      @(posedge clk); kv_d = 0;
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
