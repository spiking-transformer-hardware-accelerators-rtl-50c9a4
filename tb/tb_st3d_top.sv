// tb_st3d_top: end-to-end test of the whole design at its default sizes
// (16 x 128 MLP array with 8-bit weights and 16-bit integration, 4 timesteps
// per column group; 16 x 16 attention array with 5-bit attention and 16-bit
// X; 3072 x 128b global buffers, 96-word local buffers).
// Both accelerators run at the same time, each driven through its own host
// port:
//   MLP layer A: 100 input features (two input chunks of 96 and 4, W buffer
//                reloaded), 16 output features, 32 tokens, 8 timesteps;
//   MLP layer B: 16 input features, 32 output features, 32 tokens,
//                8 timesteps (W chunk reused from the W buffer);
//   attention:   2 heads x 16 features, 32 tokens, 2 timesteps, shift 1.
// Every output spike is compared with an integer model. Mechanisms counted
// (each must occur): chunked accumulation, W-buffer reload, W-buffer hit,
// spike generation overlapping the next tile, attention mode switch,
// partial-sum bypass on the first key tile, partial-sum reload from X GLB.
module tb_st3d_top;
  import st3d_pkg::*;
  localparam int AW = $clog2(GLB_WORDS);
  localparam int MHW = (MLP_W > MLP_H * MLP_WW) ? MLP_W : MLP_H * MLP_WW;
  localparam int G = MLP_W / MLP_T_TILE, SW = $clog2(ATT_XW);

  logic clk = 0, rst_n = 1;
  glb_sel_e mlp_host_sel = GLB_ACT0, att_host_sel = GLB_ACT0;
  logic mlp_host_we = 0, mlp_host_re = 0, mlp_start = 0, mlp_busy, mlp_done;
  logic att_host_we = 0, att_host_re = 0, att_start = 0, att_busy, att_done;
  logic [AW-1:0] mlp_host_addr = '0, att_host_addr = '0;
  logic [MHW-1:0] mlp_host_wdata = '0, mlp_host_rdata;
  logic [GLB_WIDTH-1:0] att_host_wdata = '0, att_host_rdata;
  logic [AW-1:0] mlp_cfg_din, mlp_cfg_of_tiles, mlp_cfg_n_tiles, mlp_cfg_t_tiles;
  logic [AW-1:0] mlp_cfg_in_base, mlp_cfg_out_base, mlp_cfg_w_base;
  logic signed [MLP_VW-1:0] mlp_cfg_vth, mlp_cfg_vleak;
  logic [31:0] mlp_stat_wbuf_loads, mlp_stat_wbuf_hits, mlp_stat_gen_stalls, mlp_stat_tiles;
  logic [AW-1:0] att_cfg_heads, att_cfg_d, att_cfg_ntok, att_cfg_T;
  logic [AW-1:0] att_cfg_qbase, att_cfg_kbase, att_cfg_vbase, att_cfg_ybase;
  logic [SW-1:0] att_cfg_shift;
  logic signed [ATT_VW-1:0] att_cfg_vth, att_cfg_vleak;
  logic [31:0] att_stat_mode_switches, att_stat_x_bypass, att_stat_x_reloads, att_stat_kv_loads;

  int checks = 0, failures = 0;
  int n_chunked = 0, n_overlap = 0;

  st3d_top dut (.*);
  always #5 clk = ~clk;
  // a real reset edge before the first clock edge, so every flop starts reset
  initial #1 rst_n = 0;
  always @(posedge clk) if (dut.u_mlp.gen_busy && dut.u_mlp.a0_re && mlp_busy) n_overlap++;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  // ---------------- MLP accelerator ----------------
  task automatic mlp_wr(glb_sel_e sel, int addr, logic [MHW-1:0] data);
    mlp_host_sel = sel; mlp_host_addr = AW'(addr); mlp_host_wdata = data; mlp_host_we = 1;
    @(negedge clk);
    mlp_host_we = 0;
  endtask
  task automatic mlp_rd(glb_sel_e sel, int addr, output logic [MHW-1:0] data);
    mlp_host_sel = sel; mlp_host_addr = AW'(addr); mlp_host_re = 1;
    @(negedge clk);
    mlp_host_re = 0;
    data = mlp_host_rdata;
  endtask

  task automatic mlp_layer(int din, int of_tiles, int n_tiles, int t_tiles, int vth, int vleak);
    int ntok = n_tiles * G, nt = t_tiles * MLP_T_TILE, dout = of_tiles * MLP_H;
    int in_base = 0, w_base = 0, out_base = 1024;
    bit S [][][];
    int Wt [][];
    logic [MHW-1:0] word;
    S = new[ntok]; foreach (S[n]) begin S[n] = new[nt]; foreach (S[n][t]) S[n][t] = new[din]; end
    Wt = new[din]; foreach (Wt[i]) Wt[i] = new[dout];
    foreach (S[n, t, i]) S[n][t][i] = ($urandom_range(0, 99) < 30);
    foreach (Wt[i, o]) Wt[i][o] = $signed($urandom_range(0, 255)) - 128;
    for (int nb = 0; nb < n_tiles; nb++)
      for (int tb = 0; tb < t_tiles; tb++)
        for (int i = 0; i < din; i++) begin
          word = '0;
          for (int g = 0; g < G; g++)
            for (int k = 0; k < MLP_T_TILE; k++) word[g*MLP_T_TILE+k] = S[nb*G+g][tb*MLP_T_TILE+k][i];
          mlp_wr(GLB_ACT0, in_base + (nb * t_tiles + tb) * din + i, word);
        end
    for (int of = 0; of < of_tiles; of++)
      for (int i = 0; i < din; i++) begin
        word = '0;
        for (int r = 0; r < MLP_H; r++) word[r*MLP_WW +: MLP_WW] = MLP_WW'(Wt[i][of*MLP_H+r]);
        mlp_wr(GLB_AUX, w_base + of * din + i, word);
      end
    mlp_cfg_din = AW'(din); mlp_cfg_of_tiles = AW'(of_tiles); mlp_cfg_n_tiles = AW'(n_tiles);
    mlp_cfg_t_tiles = AW'(t_tiles); mlp_cfg_in_base = AW'(in_base); mlp_cfg_out_base = AW'(out_base);
    mlp_cfg_w_base = AW'(w_base); mlp_cfg_vth = MLP_VW'(vth); mlp_cfg_vleak = MLP_VW'(vleak);
    if (din > LBUF_WORDS) n_chunked++;
    mlp_start = 1;
    @(negedge clk);
    mlp_start = 0;
    while (!mlp_done) @(negedge clk);
    for (int n = 0; n < ntok; n++)
      for (int o = 0; o < dout; o++) begin
        int v = 0;
        for (int t = 0; t < nt; t++) begin
          int x = 0;
          bit sp;
          for (int i = 0; i < din; i++) if (S[n][t][i]) x += Wt[i][o];
          x = int'($signed(MLP_XW'(x)));
          v = v + x - vleak;
          sp = (v > vth);
          if (sp) v = 0;
          mlp_rd(GLB_ACT1, out_base + ((n / G) * t_tiles + t / MLP_T_TILE) * dout + o, word);
          chk(word[(n % G) * MLP_T_TILE + t % MLP_T_TILE] == sp,
              $sformatf("MLP spike n=%0d t=%0d o=%0d", n, t, o));
        end
      end
  endtask

  // ---------------- attention accelerator ----------------
  task automatic att_wr(glb_sel_e sel, int addr, logic [GLB_WIDTH-1:0] data);
    att_host_sel = sel; att_host_addr = AW'(addr); att_host_wdata = data; att_host_we = 1;
    @(negedge clk);
    att_host_we = 0;
  endtask
  task automatic att_rd(glb_sel_e sel, int addr, output logic [GLB_WIDTH-1:0] data);
    att_host_sel = sel; att_host_addr = AW'(addr); att_host_re = 1;
    @(negedge clk);
    att_host_re = 0;
    data = att_host_rdata;
  endtask

  task automatic attention(int heads, int d, int ntok, int T, int shift, int vth, int vleak);
    int D = heads * d, qb = 0, kb = 512, vb = 1024, yb = 2048;
    logic [GLB_WIDTH-1:0] Q [], K [], V [];
    logic [GLB_WIDTH-1:0] word;
    int vm [][][];
    Q = new[T * D]; K = new[T * D]; V = new[T * D];
    foreach (Q[a]) begin
      Q[a] = {$urandom, $urandom, $urandom, $urandom};
      K[a] = {$urandom, $urandom, $urandom, $urandom};
      V[a] = {$urandom, $urandom, $urandom, $urandom};
      for (int n = ntok; n < GLB_WIDTH; n++) begin Q[a][n] = 1'b0; K[a][n] = 1'b0; V[a][n] = 1'b0; end
      att_wr(GLB_ACT0, qb + a, Q[a]);
      att_wr(GLB_ACT0, kb + a, K[a]);
      att_wr(GLB_ACT0, vb + a, V[a]);
    end
    att_cfg_heads = AW'(heads); att_cfg_d = AW'(d); att_cfg_ntok = AW'(ntok); att_cfg_T = AW'(T);
    att_cfg_qbase = AW'(qb); att_cfg_kbase = AW'(kb); att_cfg_vbase = AW'(vb); att_cfg_ybase = AW'(yb);
    att_cfg_shift = SW'(shift); att_cfg_vth = ATT_VW'(vth); att_cfg_vleak = ATT_VW'(vleak);
    att_start = 1;
    @(negedge clk);
    att_start = 0;
    while (!att_done) @(negedge clk);
    vm = new[heads]; foreach (vm[h]) begin vm[h] = new[ntok]; foreach (vm[h][n]) vm[h][n] = new[d]; end
    for (int t = 0; t < T; t++)
      for (int h = 0; h < heads; h++) begin
        int A [][];
        A = new[ntok]; foreach (A[q]) A[q] = new[ntok];
        foreach (A[q, k]) begin
          A[q][k] = 0;
          for (int f = 0; f < d; f++) A[q][k] += int'(Q[t*D+h*d+f][q] & K[t*D+h*d+f][k]);
        end
        for (int f = 0; f < d; f++) begin
          att_rd(GLB_ACT1, yb + t * D + h * d + f, word);
          for (int q = 0; q < ntok; q++) begin
            int x = 0;
            bit sp;
            for (int k = 0; k < ntok; k++) if (V[t*D+h*d+f][k]) x += A[q][k];
            x = x >> shift;
            if (t == 0) vm[h][q][f] = 0;
            vm[h][q][f] = vm[h][q][f] + x - vleak;
            sp = (vm[h][q][f] > vth);
            if (sp) vm[h][q][f] = 0;
            chk(word[q] == sp, $sformatf("attention spike t=%0d h=%0d q=%0d f=%0d", t, h, q, f));
          end
        end
      end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    fork
      begin
        mlp_layer(100, 1, 1, 2, 150, 4);
        mlp_layer(16, 2, 1, 2, 60, 2);
      end
      attention(2, 16, 32, 2, 1, 40, 2);
    join
    $display("INFO mlp: chunked=%0d wbuf_loads=%0d wbuf_hits=%0d overlap=%0d tiles=%0d stalls=%0d",
             n_chunked, mlp_stat_wbuf_loads, mlp_stat_wbuf_hits, n_overlap, mlp_stat_tiles, mlp_stat_gen_stalls);
    $display("INFO attention: mode_switches=%0d bypass=%0d reloads=%0d kv_loads=%0d",
             att_stat_mode_switches, att_stat_x_bypass, att_stat_x_reloads, att_stat_kv_loads);
    chk(n_chunked > 0, "chunked input-feature accumulation happened");
    chk(mlp_stat_wbuf_loads > 0, "W buffer loads happened");
    chk(mlp_stat_wbuf_hits > 0, "W buffer hits happened");
    chk(n_overlap > 0, "spike generation overlapped the next tile");
    chk(mlp_stat_tiles == 2 + 4, "MLP tile count");
    chk(att_stat_mode_switches == 2 * 2 * 2 * 2, "attention mode switches");
    chk(att_stat_x_bypass > 0, "partial-sum bypass happened");
    chk(att_stat_x_reloads > 0, "partial-sum reload happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
