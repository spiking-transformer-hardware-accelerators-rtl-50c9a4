// tb_mlp_accel: end-to-end self-checking test of the spiking MLP accelerator
// at reduced size (4 x 8 array, 2 timesteps per column group, 8-word local
// buffers, 512-word global buffers).
// The host loads random spikes and signed weights through the host port,
// runs a layer, reads Act GLB1 back and compares every output spike with an
// integer model: X[n][t][o] = sum_i S[n][t][i] * W[i][o], then a LIF neuron per
// (token, output feature) over the timesteps. Two layers are run:
//   layer A: 12 input features, more than one 8-word chunk, so the array
//            accumulates over chunks and the W buffer is reloaded;
//   layer B: 5 input features with 3 time tiles, so the W chunk is reused
//            from the W buffer (hits).
// It counts that each mechanism happened (chunked accumulation, W-buffer
// loads, W-buffer hits, generator working while the array computes the next
// tile) and checks the W-buffer load/hit counts and the layer run time against
// the schedule's cycle formula.
module tb_mlp_accel;
  import st3d_pkg::*;
  localparam int H = 4, W = 8, W_W = 8, X_W = 16, V_W = 20, T_TILE = 2;
  localparam int GLB_DEPTH = 512, BUF_DEPTH = 8, AW = $clog2(GLB_DEPTH), G = W / T_TILE;
  localparam int HW_W = (W > H * W_W) ? W : H * W_W;

  logic clk = 0, rst_n = 1;
  glb_sel_e host_sel = GLB_ACT0;
  logic host_we = 0, host_re = 0, start = 0, busy, done;
  logic [AW-1:0] host_addr = '0;
  logic [HW_W-1:0] host_wdata = '0, host_rdata;
  logic [AW-1:0] cfg_din, cfg_of_tiles, cfg_n_tiles, cfg_t_tiles, cfg_in_base, cfg_out_base, cfg_w_base;
  logic signed [V_W-1:0] cfg_vth, cfg_vleak;
  logic [31:0] stat_wbuf_loads, stat_wbuf_hits, stat_gen_stalls, stat_tiles;
  int checks = 0, failures = 0;
  int n_overlap = 0, n_chunked = 0, n_loads = 0, n_hits = 0;

  mlp_accel #(.H(H), .W(W), .W_W(W_W), .X_W(X_W), .V_W(V_W), .T_TILE(T_TILE),
              .GLB_DEPTH(GLB_DEPTH), .BUF_DEPTH(BUF_DEPTH)) dut (.*);
  always #5 clk = ~clk;
  // a real reset edge before the first clock edge, so every flop starts reset
  initial #1 rst_n = 0;

  // generator busy while the next tile is already being loaded: kernel fusion overlap
  always @(posedge clk) if (dut.gen_busy && dut.a0_re && dut.busy) n_overlap++;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  task automatic host_write(glb_sel_e sel, int addr, logic [HW_W-1:0] data);
    host_sel = sel; host_addr = AW'(addr); host_wdata = data; host_we = 1;
    @(negedge clk);
    host_we = 0;
  endtask

  task automatic host_read(glb_sel_e sel, int addr, output logic [HW_W-1:0] data);
    host_sel = sel; host_addr = AW'(addr); host_re = 1;
    @(negedge clk);
    host_re = 0;
    data = host_rdata;
  endtask

  // one layer: random data, run, compare
  task automatic run_layer(int din, int of_tiles, int n_tiles, int t_tiles, int vth, int vleak);
    int ntok = n_tiles * G, nt = t_tiles * T_TILE, dout = of_tiles * H;
    int in_base = 0, w_base = 0, out_base = 64;
    int cyc, exp_cyc, chunks, last_cs;
    bit S [][][];
    int Wt [][];
    logic [HW_W-1:0] word;
    S = new[ntok]; foreach (S[n]) begin S[n] = new[nt]; foreach (S[n][t]) S[n][t] = new[din]; end
    Wt = new[din]; foreach (Wt[i]) Wt[i] = new[dout];
    foreach (S[n, t, i]) S[n][t][i] = ($urandom_range(0, 99) < 40);
    foreach (Wt[i, o]) Wt[i][o] = $signed($urandom_range(0, 255)) - 128;
    // load Act GLB0
    for (int nb = 0; nb < n_tiles; nb++)
      for (int tb = 0; tb < t_tiles; tb++)
        for (int i = 0; i < din; i++) begin
          word = '0;
          for (int g = 0; g < G; g++)
            for (int k = 0; k < T_TILE; k++) word[g*T_TILE+k] = S[nb*G+g][tb*T_TILE+k][i];
          host_write(GLB_ACT0, in_base + (nb * t_tiles + tb) * din + i, word);
        end
    // load W GLB
    for (int of = 0; of < of_tiles; of++)
      for (int i = 0; i < din; i++) begin
        word = '0;
        for (int r = 0; r < H; r++) word[r*W_W +: W_W] = W_W'(Wt[i][of*H+r]);
        host_write(GLB_AUX, w_base + of * din + i, word);
      end
    // run
    cfg_din = AW'(din); cfg_of_tiles = AW'(of_tiles); cfg_n_tiles = AW'(n_tiles);
    cfg_t_tiles = AW'(t_tiles); cfg_in_base = AW'(in_base); cfg_out_base = AW'(out_base);
    cfg_w_base = AW'(w_base); cfg_vth = V_W'(vth); cfg_vleak = V_W'(vleak);
    begin
      int l0 = stat_wbuf_loads, h0 = stat_wbuf_hits;
      start = 1;
      @(negedge clk);
      start = 0;
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      chunks = (din + BUF_DEPTH - 1) / BUF_DEPTH;
      last_cs = din - (chunks - 1) * BUF_DEPTH;
      if (chunks > 1) n_chunked++;
      n_loads += stat_wbuf_loads - l0;
      n_hits  += stat_wbuf_hits - h0;
      if (chunks == 1) begin
        chk(stat_wbuf_loads - l0 == of_tiles, "one W load per output tile");
        chk(stat_wbuf_hits - h0 == of_tiles * (n_tiles * t_tiles - 1), "W buffer hits");
      end else begin
        chk(stat_wbuf_loads - l0 == of_tiles * n_tiles * t_tiles * chunks, "W reload per chunk");
      end
      // schedule: per chunk 1 + cs + 1 + cs + (H+W+2); per tile +1 extract;
      // then the start cycle, the generator tail (T_TILE + H) and the done cycle.
      exp_cyc = of_tiles * n_tiles * t_tiles *
                ((chunks - 1) * (2 * BUF_DEPTH + 4 + H + W) + (2 * last_cs + 4 + H + W) + 1)
                + T_TILE + H + 2;
      chk(cyc == exp_cyc, $sformatf("layer cycles %0d expected %0d", cyc, exp_cyc));
    end
    // compare
    for (int n = 0; n < ntok; n++)
      for (int o = 0; o < dout; o++) begin
        int v = 0;
        for (int t = 0; t < nt; t++) begin
          int x = 0;
          bit sp;
          for (int i = 0; i < din; i++) if (S[n][t][i]) x += Wt[i][o];
          x = int'($signed(X_W'(x)));
          v = v + x - vleak;
          sp = (v > vth);
          if (sp) v = 0;
          host_read(GLB_ACT1, out_base + ((n / G) * t_tiles + t / T_TILE) * dout + o, word);
          chk(word[(n % G) * T_TILE + t % T_TILE] == sp,
              $sformatf("spike n=%0d t=%0d o=%0d", n, t, o));
        end
      end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    run_layer(12, 2, 2, 2, 60, 3);
    run_layer(5, 2, 1, 3, 30, 1);
    chk(n_chunked > 0, "chunked input-feature accumulation happened");
    chk(n_loads > 0, "W buffer loads happened");
    chk(n_hits > 0, "W buffer hits happened");
    chk(n_overlap > 0, "generator overlapped with next tile");
    $display("INFO chunked=%0d loads=%0d hits=%0d overlap_cycles=%0d stalls=%0d",
             n_chunked, n_loads, n_hits, n_overlap, stat_gen_stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
