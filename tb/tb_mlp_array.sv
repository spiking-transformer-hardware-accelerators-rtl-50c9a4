// tb_mlp_array: self-checking test of the MLP systolic array (4 x 6).
// For two tiles it feeds K input features with the systolic skew (feature k
// at row r in cycle k+r, at column c in cycle k+c), waits H+W+1 cycles and
// compares every PE's integration with X[r][c] = sum_k S[k][c] * W[k][r]
// (signed weights). Between the tiles clr must zero the whole array. It also
// checks the latency: the last feature, entering at clock edge K-1, is added
// in PE (H-1,W-1) exactly at edge K-1+H-1+W-1+1, not before.
module tb_mlp_array;
  localparam int H = 4, W = 6, W_W = 8, X_W = 16, K = 9;
  logic clk = 0, rst_n = 1, clr = 0;
  logic [W-1:0] s_top = '0;
  logic [H-1:0][W_W-1:0] w_left = '0;
  logic [H-1:0][W-1:0][X_W-1:0] x_out;
  int checks = 0, failures = 0;
  bit S [K][W];
  logic signed [W_W-1:0] Wt [K][H];
  int Xr [H][W];

  mlp_array #(.H(H), .W(W), .W_W(W_W), .X_W(X_W)) dut (.*);
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
    for (int tile = 0; tile < 2; tile++) begin
      for (int k = 0; k < K; k++) begin
        for (int c = 0; c < W; c++) S[k][c] = 1'($urandom);
        for (int r = 0; r < H; r++) Wt[k][r] = W_W'($urandom);
      end
      foreach (Xr[r, c]) begin
        Xr[r][c] = 0;
        for (int k = 0; k < K; k++) if (S[k][c]) Xr[r][c] += int'(Wt[k][r]);
      end
      // skewed feed: cycle cyc drives feature cyc-c on column c, cyc-r on row r
      for (int cyc = 0; cyc < K + H + W; cyc++) begin
        for (int c = 0; c < W; c++) s_top[c] = (cyc - c >= 0 && cyc - c < K) ? S[cyc-c][c] : 1'b0;
        for (int r = 0; r < H; r++) w_left[r] = (cyc - r >= 0 && cyc - r < K) ? Wt[cyc-r][r] : '0;
        @(negedge clk);
        // last contribution to PE(H-1,W-1) is fed at cycle K-1+H-1+W-1; visible 2 cycles later
        // feature k, driven in loop cycle k+r / k+c, is added in PE (r,c) at edge k+r+c+1
        if (cyc == K + H + W - 3)
          chk(x_out[H-1][W-1] == X_W'(Xr[H-1][W-1] - (S[K-1][W-1] ? int'(Wt[K-1][H-1]) : 0)),
              "corner PE not yet complete");
        if (cyc == K + H + W - 2)
          chk(x_out[H-1][W-1] == X_W'(Xr[H-1][W-1]), "corner PE complete on time");
      end
      s_top = '0; w_left = '0;
      foreach (Xr[r, c]) chk(x_out[r][c] == X_W'(Xr[r][c]), $sformatf("X[%0d][%0d]", r, c));
      clr = 1;
      @(negedge clk);
      clr = 0;
      foreach (Xr[r, c]) chk(x_out[r][c] == '0, "clear");
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
