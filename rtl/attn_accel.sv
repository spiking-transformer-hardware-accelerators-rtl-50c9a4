// attn_accel: spiking self-attention accelerator with kernel fusion.
//
// For every head h and timestep t it computes, without ever storing the full
// attention map,
//   A[q][k] = sum_f Q[q][f] & K[k][f]            (mode 1 of the array)
//   X[q][f] = sum_k A[q][k] * V[k][f]            (mode 2 of the array)
//   S_out[q][f] = LIF_t( X[q][f] >> cfg_shift )   (spiking generators)
// for cfg_ntok tokens and cfg_d features per head (cfg_heads heads, cfg_T
// timesteps).
//
// Blocks: Act GLB0 (Q, K, V), Act GLB1 (output spikes) and X GLB (partial
// synaptic integration), all 3072 x GLB_W, and attn_spike_gen on the top tier;
// Q buffer and K/V buffer (96 x GLB_W), X-in and X-out buffers
// (96 x H*X_W) and the H x W attn_array on the bottom tier.
// Loop (outer to inner): head h, timestep t, key tile i (W keys), query tile
// j (H queries):
//   LD_KV  copy the d K words and d V words of (h,t) into the K/V buffer
//          (once per key tile, reused by every query tile);
//   LD_Q   copy the d Q words into the Q buffer;
//   QK     clear A, stream the d features through the array in mode 1, drain;
//   LD_X   copy partial X of query tile j from X GLB into the X-in buffer;
//          skipped for the first key tile, whose partial sum is zero;
//   AV     stream V (from the K/V buffer) and X-in through the array in mode 2,
//          catching the de-skewed right-edge results in the X-out buffer;
//   ST_X   write the X-out buffer back to X GLB.
// After all tiles the spiking generators turn X GLB into spikes in Act GLB1.
// Layouts (own choice): Act GLB word base + t*D + h*d + f (D = heads*d) holds
// feature f of every token, bit n = token n, so cfg_ntok <= GLB_W; X GLB word
// f*nw + j*XH + p (nw = cfg_ntok*X_W/GLB_W, XH = H*X_W/GLB_W) holds part p of
// X[j*H .. j*H+H-1][f], X_W bits per query token.
// Host port, start/busy/done and statistics work as in mlp_accel.
// Published: the two modes, tier contents, the loop order of the fused kernel
// and the buffer sizes. Own choices: layouts, phase-by-phase schedule, the
// zero-partial-sum bypass, the host port and the drain waits.
module attn_accel
  import st3d_pkg::*;
#(
  parameter int H         = ATT_H,
  parameter int W         = ATT_W,
  parameter int A_W       = ATT_AW,
  parameter int X_W       = ATT_XW,
  parameter int V_W       = ATT_VW,
  parameter int GLB_W     = GLB_WIDTH,
  parameter int GLB_DEPTH = GLB_WORDS,
  parameter int BUF_DEPTH = LBUF_WORDS,
  localparam int XBW = H * X_W,
  localparam int XH  = XBW / GLB_W,
  localparam int AW  = $clog2(GLB_DEPTH),
  localparam int SW  = $clog2(X_W),
  localparam int MAX_WORDS = (BUF_DEPTH / 2) * X_W
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  glb_sel_e              host_sel,
  input  logic                  host_we,
  input  logic                  host_re,
  input  logic [AW-1:0]         host_addr,
  input  logic [GLB_W-1:0]      host_wdata,
  output logic [GLB_W-1:0]      host_rdata,
  input  logic                  start,
  input  logic [AW-1:0]         cfg_heads,
  input  logic [AW-1:0]         cfg_d,
  input  logic [AW-1:0]         cfg_ntok,
  input  logic [AW-1:0]         cfg_T,
  input  logic [AW-1:0]         cfg_qbase,
  input  logic [AW-1:0]         cfg_kbase,
  input  logic [AW-1:0]         cfg_vbase,
  input  logic [AW-1:0]         cfg_ybase,
  input  logic [SW-1:0]         cfg_shift,
  input  logic signed [V_W-1:0] cfg_vth,
  input  logic signed [V_W-1:0] cfg_vleak,
  output logic                  busy,
  output logic                  done,
  output logic [31:0]           stat_mode_switches,
  output logic [31:0]           stat_x_bypass,
  output logic [31:0]           stat_x_reloads,
  output logic [31:0]           stat_kv_loads
);
  localparam int BAW = $clog2(BUF_DEPTH);
  localparam int MAW = $clog2(MAX_WORDS);
  localparam int DL  = H + W;              // feed-to-aligned-output latency, mode 2

  typedef enum logic [3:0] {
    A_IDLE, A_LD_KV, A_LD_KV_END, A_LD_Q, A_LD_Q_END, A_QK_CLR, A_QK, A_QK_DRAIN,
    A_LD_X, A_LD_X_END, A_AV, A_AV_DRAIN, A_ST_RD, A_ST_WR, A_SPK, A_SPK_WAIT
  } astate_e;
  astate_e st;

  // configuration
  logic [AW-1:0]         heads, d, ntok, tsteps, qbase, kbase, vbase, ybase, dtot, nw;
  logic [SW-1:0]         shift;
  logic signed [V_W-1:0] vth, vleak;
  // loop state
  logic [AW-1:0]  h_i, t_i, ik, jq, j_idx, cnt, f_i;
  logic [AW-1:0]  half;
  logic [AW-1:0]  feat_base;   // t*D + h*d

  assign feat_base = AW'(t_i * dtot + h_i * d);

  // --- global buffers ---------------------------------------------------------
  logic             a0_re, a0_we, a1_re, a1_we, xg_re, xg_we;
  logic [AW-1:0]    a0_raddr, a1_raddr, a1_waddr, xg_raddr, xg_waddr;
  logic [GLB_W-1:0] a0_rdata, a1_rdata, a1_wdata, xg_rdata, xg_wdata;
  glb_sel_e         host_sel_q;

  sram_2p #(.DEPTH(GLB_DEPTH), .WIDTH(GLB_W)) u_act_glb0 (
    .clk, .re(a0_re), .raddr(a0_raddr), .rdata(a0_rdata),
    .we(a0_we), .waddr(host_addr), .wdata(host_wdata));
  sram_2p #(.DEPTH(GLB_DEPTH), .WIDTH(GLB_W)) u_act_glb1 (
    .clk, .re(a1_re), .raddr(a1_raddr), .rdata(a1_rdata),
    .we(a1_we), .waddr(a1_waddr), .wdata(a1_wdata));
  sram_2p #(.DEPTH(GLB_DEPTH), .WIDTH(GLB_W)) u_x_glb (
    .clk, .re(xg_re), .raddr(xg_raddr), .rdata(xg_rdata),
    .we(xg_we), .waddr(xg_waddr), .wdata(xg_wdata));

  // --- local buffers ----------------------------------------------------------
  logic             ld_v, ld_kv;
  logic [BAW-1:0]   ld_a;
  logic             qb_re, kb_re, xi_re, xo_re, xi_we, xo_we;
  logic [BAW-1:0]   qb_raddr, kb_raddr, xi_raddr, xo_raddr, xi_waddr, xo_waddr;
  logic [GLB_W-1:0] qb_rdata, kb_rdata;
  logic [XBW-1:0]   xi_rdata, xo_rdata, xi_wdata, xo_wdata, xi_acc;

  sram_2p #(.DEPTH(BUF_DEPTH), .WIDTH(GLB_W)) u_q_buf (
    .clk, .re(qb_re), .raddr(qb_raddr), .rdata(qb_rdata),
    .we(ld_v && !ld_kv), .waddr(ld_a), .wdata(a0_rdata));
  sram_2p #(.DEPTH(BUF_DEPTH), .WIDTH(GLB_W)) u_kv_buf (
    .clk, .re(kb_re), .raddr(kb_raddr), .rdata(kb_rdata),
    .we(ld_v && ld_kv), .waddr(ld_a), .wdata(a0_rdata));
  sram_2p #(.DEPTH(BUF_DEPTH), .WIDTH(XBW)) u_xin_buf (
    .clk, .re(xi_re), .raddr(xi_raddr), .rdata(xi_rdata),
    .we(xi_we), .waddr(xi_waddr), .wdata(xi_wdata));
  sram_2p #(.DEPTH(BUF_DEPTH), .WIDTH(XBW)) u_xout_buf (
    .clk, .re(xo_re), .raddr(xo_raddr), .rdata(xo_rdata),
    .we(xo_we), .waddr(xo_waddr), .wdata(xo_wdata));

  // --- array and edge skew ---------------------------------------------------
  attn_mode_e                   mode;
  logic                         a_clr, fd_qk, fd_av, first_i;
  logic [BAW-1:0]               fd_idx;
  logic [H-1:0]                 q_raw, q_left;
  logic [W-1:0]                 kv_raw, kv_top;
  logic [H-1:0][X_W-1:0]        x_raw, x_left, x_right, x_al;

  always_comb begin
    q_raw  = fd_qk ? H'(qb_rdata >> jq) : '0;
    kv_raw = (fd_qk || fd_av) ? W'(kb_rdata >> ik) : '0;
    x_raw  = (fd_av && !first_i) ? xi_rdata : '0;
  end

  skew_buffer #(.LANES(H), .WIDTH(1))   u_skew_q (.clk, .rst_n, .din(q_raw),  .dout(q_left));
  skew_buffer #(.LANES(W), .WIDTH(1))   u_skew_k (.clk, .rst_n, .din(kv_raw), .dout(kv_top));
  skew_buffer #(.LANES(H), .WIDTH(X_W), .BASE(1)) u_skew_x (.clk, .rst_n, .din(x_raw), .dout(x_left));
  skew_buffer #(.LANES(H), .WIDTH(X_W), .REVERSE(1'b1)) u_deskew_x (
    .clk, .rst_n, .din(x_right), .dout(x_al));

  attn_array #(.H(H), .W(W), .A_W(A_W), .X_W(X_W)) u_array (
    .clk, .rst_n, .mode, .a_clr, .q_left, .kv_top, .x_left, .x_right, .a_out());

  // valid/index of the mode-2 results, delayed to the de-skewed right edge
  logic           dv [DL];
  logic [BAW-1:0] di [DL];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < DL; k++) begin dv[k] <= 1'b0; di[k] <= '0; end
    end else begin
      dv[0] <= fd_av; di[0] <= fd_idx;
      for (int k = 1; k < DL; k++) begin dv[k] <= dv[k-1]; di[k] <= di[k-1]; end
    end
  end
  assign xo_we    = dv[DL-1];
  assign xo_waddr = di[DL-1];
  assign xo_wdata = x_al;

  // --- spiking generators ----------------------------------------------------
  logic          sg_start, sg_done, sg_re, sg_we;
  logic [AW-1:0] sg_raddr, sg_waddr;
  logic [GLB_W-1:0] sg_wdata;

  attn_spike_gen #(.GLB_W(GLB_W), .X_W(X_W), .V_W(V_W), .AW(AW), .MAX_WORDS(MAX_WORDS)) u_gen (
    .clk, .rst_n, .start(sg_start), .cfg_nwords(MAW'(d * nw)), .cfg_nw(MAW'(nw)),
    .first_t(t_i == '0), .cfg_shift(shift), .v_th(vth), .v_leak(vleak),
    .y_addr0(AW'(ybase + feat_base)), .busy(), .done(sg_done),
    .xr_re(sg_re), .xr_addr(sg_raddr), .xr_data(xg_rdata),
    .y_we(sg_we), .y_addr(sg_waddr), .y_data(sg_wdata));

  // --- port multiplexing -------------------------------------------------------
  logic [AW-1:0] x_addr_fh;   // X GLB word of (f_i, j_idx, half)
  assign x_addr_fh = AW'(f_i * nw + j_idx * AW'(XH) + half);

  always_comb begin
    a0_re    = (st == A_LD_KV) || (st == A_LD_Q);
    a0_raddr = (st == A_LD_Q)  ? AW'(qbase + feat_base + cnt)
             : (cnt < d)       ? AW'(kbase + feat_base + cnt)
                               : AW'(vbase + feat_base + cnt - d);
    xg_re    = (st == A_LD_X) || sg_re;
    xg_raddr = sg_re ? sg_raddr : x_addr_fh;
    a1_re    = 1'b0;
    a1_raddr = host_addr;
    if (!busy) begin
      a0_re    = host_re && host_sel == GLB_ACT0;
      a0_raddr = host_addr;
      xg_re    = host_re && host_sel == GLB_AUX;
      xg_raddr = host_addr;
      a1_re    = host_re && host_sel == GLB_ACT1;
    end
    a0_we    = !busy && host_we && host_sel == GLB_ACT0;
    xg_we    = (st == A_ST_WR) || (!busy && host_we && host_sel == GLB_AUX);
    xg_waddr = (st == A_ST_WR) ? x_addr_fh : host_addr;
    xg_wdata = (st == A_ST_WR) ? GLB_W'(xo_rdata >> (int'(half) * GLB_W)) : host_wdata;
    a1_we    = sg_we || (!busy && host_we && host_sel == GLB_ACT1);
    a1_waddr = sg_we ? sg_waddr : host_addr;
    a1_wdata = sg_we ? sg_wdata : host_wdata;
  end

  always_ff @(posedge clk) if (host_re) host_sel_q <= host_sel;
  always_comb begin
    unique case (host_sel_q)
      GLB_ACT0: host_rdata = a0_rdata;
      GLB_ACT1: host_rdata = a1_rdata;
      default:  host_rdata = xg_rdata;
    endcase
  end

  assign qb_re    = (st == A_QK);
  assign qb_raddr = BAW'(cnt);
  assign kb_re    = (st == A_QK) || (st == A_AV);
  assign kb_raddr = (st == A_AV) ? BAW'(cnt + d) : BAW'(cnt);
  assign xi_re    = (st == A_AV);
  assign xi_raddr = BAW'(cnt);
  assign xo_re    = (st == A_ST_RD);
  assign xo_raddr = BAW'(f_i);
  assign mode     = (st == A_AV || st == A_AV_DRAIN) ? MODE_AV : MODE_QK;
  assign a_clr    = (st == A_QK_CLR);
  assign sg_start = (st == A_SPK);
  assign busy     = (st != A_IDLE);

  // X-in assembly: XH GLB words per buffer word
  logic           lx_v;
  logic [AW-1:0]  lx_half;
  logic [BAW-1:0] lx_f;
  always_comb begin
    xi_wdata = xi_acc;
    xi_wdata[int'(lx_half)*GLB_W +: GLB_W] = xg_rdata;
  end
  assign xi_we    = lx_v && (int'(lx_half) == XH - 1);
  assign xi_waddr = lx_f;

  // --- sequencer ---------------------------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= A_IDLE;
      {heads, d, ntok, tsteps, qbase, kbase, vbase, ybase, dtot, nw} <= '0;
      shift <= '0; vth <= '0; vleak <= '0;
      {h_i, t_i, ik, jq, j_idx, cnt, f_i, half} <= '0;
      ld_v <= 1'b0; ld_kv <= 1'b0; ld_a <= '0;
      fd_qk <= 1'b0; fd_av <= 1'b0; fd_idx <= '0; first_i <= 1'b0;
      lx_v <= 1'b0; lx_half <= '0; lx_f <= '0; xi_acc <= '0;
      done <= 1'b0;
      stat_mode_switches <= '0; stat_x_bypass <= '0; stat_x_reloads <= '0; stat_kv_loads <= '0;
    end else begin
      done  <= 1'b0;
      ld_v  <= 1'b0;
      fd_qk <= 1'b0;
      fd_av <= 1'b0;
      lx_v  <= 1'b0;
      if (lx_v) xi_acc <= xi_wdata;
      unique case (st)
        A_IDLE: if (start) begin
          heads <= cfg_heads; d <= cfg_d; ntok <= cfg_ntok; tsteps <= cfg_T;
          qbase <= cfg_qbase; kbase <= cfg_kbase; vbase <= cfg_vbase; ybase <= cfg_ybase;
          dtot  <= AW'(cfg_heads * cfg_d);
          nw    <= AW'((cfg_ntok * AW'(X_W)) / AW'(GLB_W));
          shift <= cfg_shift; vth <= cfg_vth; vleak <= cfg_vleak;
          {h_i, t_i, ik, jq, j_idx, cnt} <= '0;
          st <= A_LD_KV;
        end
        A_LD_KV: begin
          ld_v <= 1'b1; ld_kv <= 1'b1; ld_a <= BAW'(cnt);
          if (cnt == 2 * d - 1'b1) st <= A_LD_KV_END;
          else                     cnt <= cnt + 1'b1;
        end
        A_LD_KV_END: begin
          stat_kv_loads <= stat_kv_loads + 1;
          cnt <= '0; jq <= '0; j_idx <= '0;
          st  <= A_LD_Q;
        end
        A_LD_Q: begin
          ld_v <= 1'b1; ld_kv <= 1'b0; ld_a <= BAW'(cnt);
          if (cnt == d - 1'b1) st <= A_LD_Q_END;
          else                 cnt <= cnt + 1'b1;
        end
        A_LD_Q_END: begin cnt <= '0; st <= A_QK_CLR; end
        A_QK_CLR:   st <= A_QK;
        A_QK: begin
          fd_qk <= 1'b1;
          if (cnt == d - 1'b1) begin cnt <= '0; st <= A_QK_DRAIN; end
          else                 cnt <= cnt + 1'b1;
        end
        A_QK_DRAIN: begin
          if (int'(cnt) == H + W + 1) begin
            cnt <= '0; f_i <= '0; half <= '0;
            stat_mode_switches <= stat_mode_switches + 1;
            first_i <= (ik == '0);
            if (ik == '0) begin
              stat_x_bypass <= stat_x_bypass + 1;
              st <= A_AV;
            end else begin
              stat_x_reloads <= stat_x_reloads + 1;
              st <= A_LD_X;
            end
          end else cnt <= cnt + 1'b1;
        end
        A_LD_X: begin
          lx_v <= 1'b1; lx_half <= half; lx_f <= BAW'(f_i);
          if (int'(half) == XH - 1) begin
            half <= '0;
            if (f_i == d - 1'b1) st <= A_LD_X_END;
            else                 f_i <= f_i + 1'b1;
          end else half <= half + 1'b1;
        end
        A_LD_X_END: begin f_i <= '0; cnt <= '0; st <= A_AV; end
        A_AV: begin
          fd_av <= 1'b1; fd_idx <= BAW'(cnt);
          if (cnt == d - 1'b1) begin cnt <= '0; st <= A_AV_DRAIN; end
          else                 cnt <= cnt + 1'b1;
        end
        A_AV_DRAIN: begin
          if (int'(cnt) == DL + 1) begin
            cnt <= '0; f_i <= '0; half <= '0;
            st  <= A_ST_RD;
          end else cnt <= cnt + 1'b1;
        end
        A_ST_RD: st <= A_ST_WR;
        A_ST_WR: begin
          if (int'(half) == XH - 1) begin
            half <= '0;
            if (f_i == d - 1'b1) begin
              f_i <= '0;
              // next query tile, next key tile, or spike generation
              if (jq + AW'(H) < ntok) begin
                jq <= jq + AW'(H); j_idx <= j_idx + 1'b1; st <= A_LD_Q;
              end else if (ik + AW'(W) < ntok) begin
                ik <= ik + AW'(W); st <= A_LD_KV;
              end else begin
                st <= A_SPK;
              end
            end else begin
              f_i <= f_i + 1'b1;
              st  <= A_ST_RD;
            end
          end else half <= half + 1'b1;
        end
        A_SPK: st <= A_SPK_WAIT;
        A_SPK_WAIT: if (sg_done) begin
          ik <= '0;
          if (t_i == tsteps - 1'b1) begin
            t_i <= '0;
            if (h_i == heads - 1'b1) begin
              h_i <= '0; done <= 1'b1; st <= A_IDLE;
            end else begin
              h_i <= h_i + 1'b1; st <= A_LD_KV;
            end
          end else begin
            t_i <= t_i + 1'b1; st <= A_LD_KV;
          end
        end
        default: st <= A_IDLE;
      endcase
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n)
      start && !busy |-> (2 * int'(cfg_d) <= BUF_DEPTH) && (int'(cfg_ntok) <= GLB_W) && cfg_d != '0)
    else $error("attn_accel: cfg_d or cfg_ntok exceed the buffers");
endmodule
