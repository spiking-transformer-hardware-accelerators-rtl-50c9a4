// tb_mlp_spike_gen: self-checking test of the MLP spiking generators
// (H=3 rows, W=8 columns, T_TILE=4 timesteps per token).
// Four extracts of random X: the first with first_t (membranes start at 0),
// the next two continuing the membranes, the last with first_t again (a new
// token tile restarts the membranes). For each it checks busy lasts
// T_TILE+H cycles, the H write-through words and their addresses, against an
// integer LIF model that walks the timesteps of each token in order.
module tb_mlp_spike_gen;
  localparam int H = 3, W = 8, T_TILE = 4, X_W = 16, V_W = 20, AW = 12, G = W / T_TILE;
  logic clk = 0, rst_n = 1, extract = 0, first_t = 0, busy, wr_en;
  logic [AW-1:0] wr_base = '0, wr_addr;
  logic [H-1:0][W-1:0][X_W-1:0] x_in = '0;
  logic signed [V_W-1:0] v_th = 40, v_leak = 2;
  logic [W-1:0] wr_data;
  int checks = 0, failures = 0;
  int vm [H][G];
  logic [W-1:0] exp_row [H];

  mlp_spike_gen #(.H(H), .W(W), .T_TILE(T_TILE), .X_W(X_W), .V_W(V_W), .AW(AW)) dut (.*);
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
    for (int ex = 0; ex < 4; ex++) begin
      int nbusy, nwr;
      for (int r = 0; r < H; r++) for (int c = 0; c < W; c++)
        x_in[r][c] = X_W'($signed($urandom_range(0, 60)) - 15);
      // model
      for (int r = 0; r < H; r++) begin
        exp_row[r] = '0;
        for (int g = 0; g < G; g++) begin
          if (ex == 0 || ex == 3) vm[r][g] = 0;
          for (int k = 0; k < T_TILE; k++) begin
            vm[r][g] = vm[r][g] + int'($signed(x_in[r][g*T_TILE+k])) - int'(v_leak);
            if (vm[r][g] > int'(v_th)) begin exp_row[r][g*T_TILE+k] = 1'b1; vm[r][g] = 0; end
          end
        end
      end
      wr_base = AW'(100 + 10 * ex);
      first_t = (ex == 0 || ex == 3);
      extract = 1;
      @(negedge clk);
      extract = 0;
      x_in = '0;   // the capture must have happened already
      nbusy = 0; nwr = 0;
      while (busy) begin
        nbusy++;
        if (wr_en) begin
          chk(wr_addr == AW'(100 + 10 * ex + nwr), "write address");
          chk(wr_data == exp_row[nwr], $sformatf("spikes row %0d extract %0d", nwr, ex));
          nwr++;
        end
        @(negedge clk);
      end
      chk(nbusy == T_TILE + H, "busy duration T_TILE+H");
      chk(nwr == H, "one word per row");
      repeat (2) @(negedge clk);
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
