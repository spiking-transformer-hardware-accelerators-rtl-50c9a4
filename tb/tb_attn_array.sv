// tb_attn_array: self-checking test of the reconfigurable attention array
// (3 query rows x 4 key columns, d = 7 features).
// Mode 1: feeds Q (rows) and K (columns) with the systolic skew and checks the
// whole attention tile A[q][k] = sum_f Q[q][f] & K[k][f]. Mode 2: feeds V
// (columns, feature f at cycle f+c) and partial X (rows, cycle f+r+1) and
// checks that x_right[r] carries X_in[r][f] + sum_k A[r][k]*V[k][f] exactly at
// cycle f+r+W+1, and that A is unchanged by mode 2.
module tb_attn_array;
  import st3d_pkg::*;
  localparam int H = 3, W = 4, A_W = 4, X_W = 12, D = 7;
  logic clk = 0, rst_n = 1, a_clr = 0;
  attn_mode_e mode = MODE_QK;
  logic [H-1:0] q_left = '0;
  logic [W-1:0] kv_top = '0;
  logic [H-1:0][X_W-1:0] x_left = '0, x_right;
  logic [H-1:0][W-1:0][A_W-1:0] a_out;
  int checks = 0, failures = 0;
  bit Q [H][D], K [W][D], V [W][D];
  int A [H][W], Xin [H][D], Xexp [H][D];

  attn_array #(.H(H), .W(W), .A_W(A_W), .X_W(X_W)) dut (.*);
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
    for (int rep = 0; rep < 3; rep++) begin
      foreach (Q[r, f]) Q[r][f] = 1'($urandom);
      foreach (K[c, f]) K[c][f] = 1'($urandom);
      foreach (V[c, f]) V[c][f] = 1'($urandom);
      foreach (A[r, c]) begin
        A[r][c] = 0;
        for (int f = 0; f < D; f++) A[r][c] += (Q[r][f] & K[c][f]);
      end
      foreach (Xin[r, f]) begin
        Xin[r][f] = $urandom_range(0, 200);
        Xexp[r][f] = Xin[r][f];
        for (int c = 0; c < W; c++) if (V[c][f]) Xexp[r][f] += A[r][c];
      end
      // mode 1
      mode = MODE_QK; a_clr = 1;
      @(negedge clk);
      a_clr = 0;
      for (int cyc = 0; cyc < D + H + W + 2; cyc++) begin
        for (int r = 0; r < H; r++) q_left[r] = (cyc - r >= 0 && cyc - r < D) ? Q[r][cyc-r] : 1'b0;
        for (int c = 0; c < W; c++) kv_top[c] = (cyc - c >= 0 && cyc - c < D) ? K[c][cyc-c] : 1'b0;
        @(negedge clk);
      end
      q_left = '0; kv_top = '0;
      foreach (A[r, c]) chk(a_out[r][c] == A_W'(A[r][c]), $sformatf("A[%0d][%0d]", r, c));
      // mode 2
      mode = MODE_AV;
      for (int cyc = 0; cyc < D + H + W + 3; cyc++) begin
        for (int c = 0; c < W; c++) kv_top[c] = (cyc - c >= 0 && cyc - c < D) ? V[c][cyc-c] : 1'b0;
        for (int r = 0; r < H; r++) x_left[r] = (cyc - r - 1 >= 0 && cyc - r - 1 < D) ? X_W'(Xin[r][cyc-r-1]) : '0;
        #1;
        for (int r = 0; r < H; r++) begin
          automatic int f = cyc - r - W - 1;
          if (f >= 0 && f < D) chk(x_right[r] == X_W'(Xexp[r][f]), $sformatf("X[%0d][%0d] on time", r, f));
        end
        @(negedge clk);
      end
      kv_top = '0; x_left = '0;
      foreach (A[r, c]) chk(a_out[r][c] == A_W'(A[r][c]), "A held");
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
