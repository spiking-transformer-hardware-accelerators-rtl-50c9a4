// tb_ssa_block: one complete multi-head spiking self-attention block run on
// the design at its default sizes. The block belongs to a spiking transformer
// with 128 features, 8 heads (16 features per head) and 128 tokens; here it
// runs for 4 timesteps.
//
//   Q, K, V = LIF(S_in W_Q), LIF(S_in W_K), LIF(S_in W_V)  (MLP engine, 3 layers)
//   Y       = LIF((Q K^T) V >> 2), per head                 (attention engine)
//   O       = LIF(Y W_O)                                    (MLP engine)
//
// Each layer is 128 -> 128 features over 128 tokens x 4 timesteps, so each
// MLP layer runs 8 output tiles x 4 token tiles with two input chunks (96 + 32).
// The attention layer runs 8 heads x 4 timesteps with 8 x 8 key/query tiles.
// Between the engines the host reads the spikes back and rearranges them
// from the MLP layout (one word = 32 tokens x 4 timesteps of one feature) to
// the attention layout (one word = all 128 tokens of one feature at one
// timestep) and back.
// Checks:
//  - every output spike of every layer against an integer model;
//  - every layer's cycle count against the schedule formulas;
//  - the W-buffer, mode-switch, bypass and reload counters;
//  - that each layer produces a non-trivial spike pattern.
module tb_ssa_block;
  import st3d_pkg::*;
  localparam int AW  = $clog2(GLB_WORDS);
  localparam int MHW = (MLP_W > MLP_H * MLP_WW) ? MLP_W : MLP_H * MLP_WW;
  localparam int G   = MLP_W / MLP_T_TILE;          // tokens per MLP token tile
  localparam int SW  = $clog2(ATT_XW);
  localparam int NTOK = 128, T = 4, D = 128, HEADS = 8, DH = D / HEADS;
  localparam int NT_TILES = NTOK / G;               // MLP token tiles
  localparam int OF_TILES = D / MLP_H;              // MLP output-feature tiles

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

  // spikes [token][timestep][feature]
  bit S_in [NTOK][T][D];
  bit Qs [NTOK][T][D], Ks [NTOK][T][D], Vs [NTOK][T][D], Ys [NTOK][T][D], Os [NTOK][T][D];
  int Wq [D][D], Wk [D][D], Wv [D][D], Wo [D][D];   // [in][out]

  st3d_top dut (.*);
  always #5 clk = ~clk;
  // a real reset edge before the first clock edge, so every flop starts reset
  initial #1 rst_n = 0;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

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

  // MLP layout: word base + nb*D + f, bit g*T_TILE + k = token nb*G+g, timestep k
  task automatic mlp_put_act(int base, ref bit S [NTOK][T][D]);
    logic [MHW-1:0] word;
    for (int nb = 0; nb < NT_TILES; nb++)
      for (int f = 0; f < D; f++) begin
        word = '0;
        for (int g = 0; g < G; g++)
          for (int k = 0; k < MLP_T_TILE; k++) word[g*MLP_T_TILE+k] = S[nb*G+g][k][f];
        mlp_wr(GLB_ACT0, base + nb * D + f, word);
      end
  endtask

  task automatic mlp_put_w(int base, ref int Wt [D][D]);
    logic [MHW-1:0] word;
    for (int of = 0; of < OF_TILES; of++)
      for (int i = 0; i < D; i++) begin
        word = '0;
        for (int r = 0; r < MLP_H; r++) word[r*MLP_WW +: MLP_WW] = MLP_WW'(Wt[i][of*MLP_H+r]);
        mlp_wr(GLB_AUX, base + of * D + i, word);
      end
  endtask

  // Run one 128 -> 128 layer; compare with the integer model and return the
  // spikes read back from Act GLB1.
  task automatic mlp_layer(string name, int in_base, int w_base, int out_base, int vth, int vleak,
                           ref bit S [NTOK][T][D], ref int Wt [D][D], ref bit So [NTOK][T][D]);
    int cyc, exp_cyc, l0, h0, nspk;
    logic [MHW-1:0] word;
    l0 = mlp_stat_wbuf_loads; h0 = mlp_stat_wbuf_hits;
    mlp_cfg_din = AW'(D); mlp_cfg_of_tiles = AW'(OF_TILES); mlp_cfg_n_tiles = AW'(NT_TILES);
    mlp_cfg_t_tiles = AW'(T / MLP_T_TILE); mlp_cfg_in_base = AW'(in_base);
    mlp_cfg_out_base = AW'(out_base); mlp_cfg_w_base = AW'(w_base);
    mlp_cfg_vth = MLP_VW'(vth); mlp_cfg_vleak = MLP_VW'(vleak);
    mlp_start = 1;
    @(negedge clk);
    mlp_start = 0;
    cyc = 1;
    while (!mlp_done) begin @(negedge clk); cyc++; end
    // two chunks (96 + 32 features) per tile; see mlp_accel for the schedule
    exp_cyc = OF_TILES * NT_TILES * (T / MLP_T_TILE) *
              ((2 * LBUF_WORDS + 4 + MLP_H + MLP_W) + (2 * (D - LBUF_WORDS) + 4 + MLP_H + MLP_W) + 1)
              + MLP_T_TILE + MLP_H + 2;
    chk(cyc == exp_cyc, $sformatf("%s cycles %0d expected %0d", name, cyc, exp_cyc));
    chk(mlp_stat_wbuf_loads - l0 == OF_TILES * NT_TILES * 2, $sformatf("%s W chunk loads", name));
    chk(mlp_stat_wbuf_hits == h0, $sformatf("%s no W hits with two chunks", name));
    $display("INFO %s: %0d cycles, %0d W chunk loads", name, cyc, mlp_stat_wbuf_loads - l0);
    nspk = 0;
    for (int nb = 0; nb < NT_TILES; nb++)
      for (int o = 0; o < D; o++) begin
        mlp_rd(GLB_ACT1, out_base + nb * D + o, word);
        for (int g = 0; g < G; g++) begin
          int v = 0;
          for (int t = 0; t < T; t++) begin
            int x = 0;
            bit sp;
            for (int i = 0; i < D; i++) if (S[nb*G+g][t][i]) x += Wt[i][o];
            v = v + int'($signed(MLP_XW'(x))) - vleak;
            sp = (v > vth);
            if (sp) v = 0;
            chk(word[g*MLP_T_TILE+t] == sp, $sformatf("%s spike n=%0d t=%0d o=%0d", name, nb*G+g, t, o));
            So[nb*G+g][t][o] = word[g*MLP_T_TILE+t];
            nspk += int'(sp);
          end
        end
      end
    $display("INFO %s: %0d of %0d output spikes set", name, nspk, NTOK * T * D);
    chk(nspk > 0 && nspk < NTOK * T * D, $sformatf("%s spike pattern is non-trivial", name));
  endtask

  // Attention layout: word base + t*D + h*DH + f, bit n = token n
  task automatic att_put(int base, ref bit S [NTOK][T][D]);
    logic [GLB_WIDTH-1:0] word;
    for (int t = 0; t < T; t++)
      for (int o = 0; o < D; o++) begin
        word = '0;
        for (int n = 0; n < NTOK; n++) word[n] = S[n][t][o];
        att_wr(GLB_ACT0, base + t * D + o, word);
      end
  endtask

  task automatic attention(int shift, int vth, int vleak);
    int qb = 0, kb = 512, vb = 1024, yb = 0;
    int nk = NTOK / ATT_W, nq = NTOK / ATT_H, xh = ATT_H * ATT_XW / GLB_WIDTH;
    int nw = NTOK * ATT_XW / GLB_WIDTH;
    int cyc, exp_cyc, per_ht, nspk;
    int ms0, by0, rl0, kv0;
    int vm [NTOK][D];
    logic [GLB_WIDTH-1:0] word;
    att_put(qb, Qs); att_put(kb, Ks); att_put(vb, Vs);
    ms0 = att_stat_mode_switches; by0 = att_stat_x_bypass; rl0 = att_stat_x_reloads; kv0 = att_stat_kv_loads;
    att_cfg_heads = AW'(HEADS); att_cfg_d = AW'(DH); att_cfg_ntok = AW'(NTOK); att_cfg_T = AW'(T);
    att_cfg_qbase = AW'(qb); att_cfg_kbase = AW'(kb); att_cfg_vbase = AW'(vb); att_cfg_ybase = AW'(yb);
    att_cfg_shift = SW'(shift); att_cfg_vth = ATT_VW'(vth); att_cfg_vleak = ATT_VW'(vleak);
    att_start = 1;
    @(negedge clk);
    att_start = 0;
    cyc = 1;
    while (!att_done) begin @(negedge clk); cyc++; end
    // per (head, timestep) schedule; see attn_accel
    per_ht = nk * (2 * DH + 1)
           + nk * nq * ((DH + 1) + 1 + DH + (ATT_H + ATT_W + 2) + DH + (ATT_H + ATT_W + 2) + DH * (xh + 1))
           + (nk - 1) * nq * (DH * xh + 1) + DH * nw + 4;
    exp_cyc = HEADS * T * per_ht + 1;
    chk(cyc == exp_cyc, $sformatf("attention cycles %0d expected %0d", cyc, exp_cyc));
    chk(att_stat_mode_switches - ms0 == HEADS * T * nk * nq, "attention mode switches");
    chk(att_stat_x_bypass - by0 == HEADS * T * nq, "first-key-tile X bypasses");
    chk(att_stat_x_reloads - rl0 == HEADS * T * (nk - 1) * nq, "X reloads");
    chk(att_stat_kv_loads - kv0 == HEADS * T * nk, "K/V loads");
    $display("INFO attention: %0d cycles, %0d mode switches, %0d bypasses, %0d reloads",
             cyc, att_stat_mode_switches - ms0, att_stat_x_bypass - by0, att_stat_x_reloads - rl0);
    nspk = 0;
    for (int t = 0; t < T; t++)
      for (int h = 0; h < HEADS; h++) begin
        int A [NTOK][NTOK];
        foreach (A[q, k]) begin
          A[q][k] = 0;
          for (int f = 0; f < DH; f++) A[q][k] += int'(Qs[q][t][h*DH+f] & Ks[k][t][h*DH+f]);
        end
        for (int f = 0; f < DH; f++) begin
          att_rd(GLB_ACT1, yb + t * D + h * DH + f, word);
          for (int q = 0; q < NTOK; q++) begin
            int x = 0;
            bit sp;
            for (int k = 0; k < NTOK; k++) if (Vs[k][t][h*DH+f]) x += A[q][k];
            x = x >> shift;
            if (t == 0) vm[q][h*DH+f] = 0;
            vm[q][h*DH+f] = vm[q][h*DH+f] + x - vleak;
            sp = (vm[q][h*DH+f] > vth);
            if (sp) vm[q][h*DH+f] = 0;
            chk(word[q] == sp, $sformatf("attention spike t=%0d h=%0d q=%0d f=%0d", t, h, q, f));
            Ys[q][t][h*DH+f] = word[q];
            nspk += int'(sp);
          end
        end
      end
    $display("INFO attention: %0d of %0d output spikes set", nspk, NTOK * T * D);
    chk(nspk > 0 && nspk < NTOK * T * D, "attention spike pattern is non-trivial");
  endtask

  initial begin
    foreach (S_in[n, t, f]) S_in[n][t][f] = ($urandom_range(0, 99) < 25);
    foreach (Wq[i, o]) begin
      Wq[i][o] = $signed($urandom_range(0, 255)) - 128;
      Wk[i][o] = $signed($urandom_range(0, 255)) - 128;
      Wv[i][o] = $signed($urandom_range(0, 255)) - 128;
      Wo[i][o] = $signed($urandom_range(0, 255)) - 128;
    end
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    // projections: input at Act GLB0 0.., weights at W GLB 0/1024/2048
    mlp_put_act(0, S_in);
    mlp_put_w(0, Wq); mlp_put_w(1024, Wk); mlp_put_w(2048, Wv);
    mlp_layer("W_Q", 0, 0,    0,    300, 0, S_in, Wq, Qs);
    mlp_layer("W_K", 0, 1024, 512,  300, 0, S_in, Wk, Ks);
    mlp_layer("W_V", 0, 2048, 1024, 300, 0, S_in, Wv, Vs);
    attention(2, 12, 1);
    // output projection: attention output at Act GLB0 512.., W_O over W_Q
    mlp_put_act(512, Ys);
    mlp_put_w(0, Wo);
    mlp_layer("W_O", 512, 0, 1536, 200, 2, Ys, Wo, Os);
    chk(mlp_stat_gen_stalls == 0, "no generator stalls");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1500000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
