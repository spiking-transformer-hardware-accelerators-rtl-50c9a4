// tb_mlp_pe: self-checking test of the MLP processing element.
// Drives random spike/weight streams and checks, every cycle, that the spike
// and weight are passed on one cycle later and that the integration register
// equals the sum of the weights seen with a spike (signed), including the
// synchronous clear.
module tb_mlp_pe;
  localparam int W_W = 8, X_W = 16;
  logic clk = 0, rst_n = 1, clr = 0, s_in = 0, s_out;
  logic signed [W_W-1:0] w_in = '0, w_out;
  logic signed [X_W-1:0] x_out;
  int checks = 0, failures = 0;
  int acc;
  logic s_d; logic signed [W_W-1:0] w_d;

  mlp_pe #(.W_W(W_W), .X_W(X_W)) dut (.*);
  always #5 clk = ~clk;
  // a real reset edge before the first clock edge, so every flop starts reset
  initial #1 rst_n = 0;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    acc = 0; s_d = 0; w_d = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 400; i++) begin
      s_in = 1'($urandom);
      w_in = W_W'($urandom);
      clr  = (i == 200);
      @(posedge clk);
      // model: uses the registered spike/weight of the previous cycle
      if (clr) acc = 0;
      else if (s_d) acc = acc + int'(w_d);
      s_d = s_in; w_d = w_in;
      @(negedge clk);
      chk(s_out == s_d && w_out == w_d, "pass-through");
      chk(x_out == X_W'(acc), "accumulate");
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
