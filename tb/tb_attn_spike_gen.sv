// tb_attn_spike_gen: self-checking test of the attention spiking generators
// (GLB_W = 32, X_W = 8, so 4 neurons per word; d = 3 features, 16 tokens).
// A behavioural X GLB (one-cycle read) holds random X for three timesteps.
// For each timestep the test starts the generator (first_t only at t = 0,
// shift 1, leak 1) and checks every Act GLB1 write (address y_addr0 + f, one
// bit per token) against an integer LIF model whose membranes carry over the
// timesteps, plus the run time of nwords + 3 cycles from start to done.
module tb_attn_spike_gen;
  localparam int GLB_W = 32, X_W = 8, V_W = 20, AW = 12, MAX_WORDS = 64;
  localparam int LG = GLB_W / X_W, D = 3, NTOK = 16, NW = NTOK / LG, NWORDS = D * NW;
  localparam int MAW = $clog2(MAX_WORDS), SW = $clog2(X_W);
  logic clk = 0, rst_n = 1, start = 0, first_t = 0, busy, done, xr_re, y_we;
  logic [MAW-1:0] cfg_nwords = MAW'(NWORDS), cfg_nw = MAW'(NW);
  logic [SW-1:0] cfg_shift = 1;
  logic signed [V_W-1:0] v_th = 20, v_leak = 1;
  logic [AW-1:0] y_addr0 = '0, xr_addr, y_addr;
  logic [GLB_W-1:0] xr_data, y_data;
  logic [GLB_W-1:0] xg [MAX_WORDS];
  int checks = 0, failures = 0;
  int vm [D][NTOK];
  logic [GLB_W-1:0] yexp [D];

  attn_spike_gen #(.GLB_W(GLB_W), .X_W(X_W), .V_W(V_W), .AW(AW), .MAX_WORDS(MAX_WORDS)) dut (.*);
  always #5 clk = ~clk;
  // a real reset edge before the first clock edge, so every flop starts reset
  initial #1 rst_n = 0;
  always_ff @(posedge clk) if (xr_re) xr_data <= xg[xr_addr];

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 3; t++) begin
      int nwr, ncyc;
      for (int a = 0; a < NWORDS; a++) xg[a] = {$urandom};
      for (int f = 0; f < D; f++) begin
        yexp[f] = '0;
        for (int n = 0; n < NTOK; n++) begin
          automatic int a = f * NW + n / LG, l = n % LG;
          automatic int x = int'(xg[a][l*X_W +: X_W]) >> cfg_shift;
          if (t == 0) vm[f][n] = 0;
          vm[f][n] = vm[f][n] + x - int'(v_leak);
          if (vm[f][n] > int'(v_th)) begin yexp[f][n] = 1'b1; vm[f][n] = 0; end
        end
      end
      y_addr0 = AW'(200 + 16 * t);
      first_t = (t == 0);
      start = 1;
      @(negedge clk);
      start = 0;
      nwr = 0; ncyc = 1;
      while (!done) begin
        if (y_we) begin
          chk(y_addr == AW'(200 + 16 * t + nwr), "Act GLB1 address");
          chk(y_data == yexp[nwr], $sformatf("spikes t=%0d f=%0d got %h exp %h", t, nwr, y_data, yexp[nwr]));
          nwr++;
        end
        ncyc++;
        @(negedge clk);
      end
      chk(nwr == D, "one word per feature");
      chk(ncyc == NWORDS + 3, "start-to-done cycles");
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
