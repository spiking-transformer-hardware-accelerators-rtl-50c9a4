// tb_attn_accel: end-to-end self-checking test of the spiking self-attention
// accelerator at reduced size (4 x 4 array, 16-bit global-buffer words so up
// to 16 tokens, 8-bit X, 16-word local buffers).
// The host loads random Q, K, V spike words, runs the kernel-fused attention
// and reads Act GLB1 back. Every output spike is compared with an integer
// model: A = Q K^T per head and timestep, X = A V, then LIF(X >> shift) per
// (head, token, feature) over the timesteps. Two runs: 2 heads x 5 features x
// 8 tokens x 3 timesteps, and 1 head x 8 features x 16 tokens x 2 timesteps.
// It checks the counts of mode switches, partial-sum bypasses (first key
// tile), X reloads and K/V loads against the loop structure, that each of
// these mechanisms happened, and the run time against the schedule formula.
module tb_attn_accel;
  import st3d_pkg::*;
  localparam int H = 4, W = 4, A_W = 4, X_W = 8, V_W = 20, GLB_W = 16;
  localparam int GLB_DEPTH = 512, BUF_DEPTH = 16, AW = $clog2(GLB_DEPTH), SW = $clog2(X_W);
  localparam int XH = H * X_W / GLB_W;

  logic clk = 0, rst_n = 1;
  glb_sel_e host_sel = GLB_ACT0;
  logic host_we = 0, host_re = 0, start = 0, busy, done;
  logic [AW-1:0] host_addr = '0;
  logic [GLB_W-1:0] host_wdata = '0, host_rdata;
  logic [AW-1:0] cfg_heads, cfg_d, cfg_ntok, cfg_T, cfg_qbase, cfg_kbase, cfg_vbase, cfg_ybase;
  logic [SW-1:0] cfg_shift;
  logic signed [V_W-1:0] cfg_vth, cfg_vleak;
  logic [31:0] stat_mode_switches, stat_x_bypass, stat_x_reloads, stat_kv_loads;
  int checks = 0, failures = 0;

  attn_accel #(.H(H), .W(W), .A_W(A_W), .X_W(X_W), .V_W(V_W), .GLB_W(GLB_W),
               .GLB_DEPTH(GLB_DEPTH), .BUF_DEPTH(BUF_DEPTH)) dut (.*);
  always #5 clk = ~clk;
  // a real reset edge before the first clock edge, so every flop starts reset
  initial #1 rst_n = 0;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  task automatic host_write(glb_sel_e sel, int addr, logic [GLB_W-1:0] data);
    host_sel = sel; host_addr = AW'(addr); host_wdata = data; host_we = 1;
    @(negedge clk);
    host_we = 0;
  endtask

  task automatic host_read(glb_sel_e sel, int addr, output logic [GLB_W-1:0] data);
    host_sel = sel; host_addr = AW'(addr); host_re = 1;
    @(negedge clk);
    host_re = 0;
    data = host_rdata;
  endtask

  task automatic run(int heads, int d, int ntok, int T, int shift, int vth, int vleak);
    int D = heads * d, qb = 0, kb = 100, vb = 200, yb = 300;
    int nk = ntok / W, nq = ntok / H, nw = ntok * X_W / GLB_W;
    int ms0 = stat_mode_switches, by0 = stat_x_bypass, rl0 = stat_x_reloads, kv0 = stat_kv_loads;
    int cyc, exp_cyc, per_ht;
    logic [GLB_W-1:0] Q [], K [], V [];   // word index t*D + h*d + f, bit = token
    logic [GLB_W-1:0] word;
    int vm [][][];
    Q = new[T * D]; K = new[T * D]; V = new[T * D];
    foreach (Q[a]) begin
      Q[a] = GLB_W'($urandom); K[a] = GLB_W'($urandom); V[a] = GLB_W'($urandom);
      for (int n = ntok; n < GLB_W; n++) begin Q[a][n] = 1'b0; K[a][n] = 1'b0; V[a][n] = 1'b0; end
      host_write(GLB_ACT0, qb + a, Q[a]);
      host_write(GLB_ACT0, kb + a, K[a]);
      host_write(GLB_ACT0, vb + a, V[a]);
    end
    cfg_heads = AW'(heads); cfg_d = AW'(d); cfg_ntok = AW'(ntok); cfg_T = AW'(T);
    cfg_qbase = AW'(qb); cfg_kbase = AW'(kb); cfg_vbase = AW'(vb); cfg_ybase = AW'(yb);
    cfg_shift = SW'(shift); cfg_vth = V_W'(vth); cfg_vleak = V_W'(vleak);
    start = 1;
    @(negedge clk);
    start = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    chk(stat_mode_switches - ms0 == heads * T * nk * nq, "mode switches");
    chk(stat_x_bypass - by0 == heads * T * nq, "first-key-tile X bypasses");
    chk(stat_x_reloads - rl0 == heads * T * (nk - 1) * nq, "X reloads");
    chk(stat_kv_loads - kv0 == heads * T * nk, "K/V loads");
    // schedule per (h,t): per key tile 2d+1, per query tile d+1 (LD_Q) + 1 + d + (H+W+2) (QK)
    // + [d*XH + 1 (LD_X) unless first key tile] + d + (H+W+2) (AV) + d*(XH+1) (ST_X);
    // then d*nw + 4 for the spiking generators (start, one word per cycle, pipeline, done).
    per_ht = nk * (2 * d + 1) + nk * nq * ((d + 1) + 1 + d + (H + W + 2) + d + (H + W + 2) + d * (XH + 1))
           + (nk - 1) * nq * (d * XH + 1) + d * nw + 4;
    exp_cyc = heads * T * per_ht + 1;
    chk(cyc == exp_cyc, $sformatf("run cycles %0d expected %0d", cyc, exp_cyc));
    // reference
    vm = new[heads]; foreach (vm[h]) begin vm[h] = new[ntok]; foreach (vm[h][n]) vm[h][n] = new[d]; end
    for (int t = 0; t < T; t++)
      for (int h = 0; h < heads; h++) begin
        int A [][];
        A = new[ntok]; foreach (A[q]) A[q] = new[ntok];
        foreach (A[q, k]) begin
          A[q][k] = 0;
          for (int f = 0; f < d; f++) A[q][k] += Q[t*D+h*d+f][q] & K[t*D+h*d+f][k];
        end
        for (int f = 0; f < d; f++) begin
          host_read(GLB_ACT1, yb + t * D + h * d + f, word);
          for (int q = 0; q < ntok; q++) begin
            int x = 0;
            bit sp;
            for (int k = 0; k < ntok; k++) if (V[t*D+h*d+f][k]) x += A[q][k];
            x = (x % (1 << X_W)) >> shift;
            if (t == 0) vm[h][q][f] = 0;
            vm[h][q][f] = vm[h][q][f] + x - vleak;
            sp = (vm[h][q][f] > vth);
            if (sp) vm[h][q][f] = 0;
            chk(word[q] == sp, $sformatf("spike t=%0d h=%0d q=%0d f=%0d", t, h, q, f));
          end
        end
      end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    run(2, 5, 8, 3, 1, 4, 1);
    run(1, 8, 16, 2, 2, 3, 0);
    $display("INFO mode_switches=%0d bypass=%0d reloads=%0d kv_loads=%0d",
             stat_mode_switches, stat_x_bypass, stat_x_reloads, stat_kv_loads);
    chk(stat_mode_switches > 0 && stat_x_bypass > 0 && stat_x_reloads > 0 && stat_kv_loads > 0,
        "every mechanism happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
