// mlp_accel: spiking MLP (linear) layer accelerator with kernel fusion.
//
// Computes S_out[n,t,o] = LIF_t( sum_i W[i,o] * S_in[n,t,i] ) for a layer of
// cfg_din input features and cfg_of_tiles*H output features over
// cfg_n_tiles*(W/T_TILE) tokens and cfg_t_tiles*T_TILE timesteps.
//
// Blocks (top tier / bottom tier of the two-tier stack):
//   Act GLB0, W GLB, Act GLB1 (3072 x 128b, top), mlp_spike_gen (top);
//   S buffer and W buffer (96 x 128b, bottom), mlp_array (H x W, bottom).
// Tile loop (outer to inner): output-feature tile of, token tile n, time tile
// t, input-feature chunk if. For every chunk the sequencer copies up to 96 S
// words from Act GLB0 and, unless the W buffer already holds that (of, if)
// chunk, the matching W words from W GLB into the local buffers (one word per
// cycle, both in parallel), then streams them through the skewed array edges,
// one input feature per cycle, and waits for the wavefront to drain. After the
// last chunk of a tile the whole array is extracted into the spiking
// generators and cleared in the same cycle, and the array starts the next tile
// while the generators accumulate membranes and write spikes to Act GLB1; if
// the generators are still busy at the next extract the sequencer stalls.
//
// Memory layout (own choice, chosen so a layer's output can be the next
// layer's input):
//   Act GLB word  base + (n*cfg_t_tiles + t)*D + f : bit c = spike of feature f
//                 for column c = token_in_tile*T_TILE + timestep_in_tile;
//   W GLB word    cfg_w_base + of*cfg_din + i : bits [r*W_W +: W_W] =
//                 W[i][of*H + r] (signed).
// Host port: while busy is low the host reads and writes any GLB (host_sel);
// reads return on host_rdata one cycle later. start (while idle) launches a
// layer; done pulses for one cycle at the end. Statistics count W-buffer
// loads and hits, generator stall cycles and finished tiles.
// Published: the two tiers' contents, the tile loop with conditional W reload,
// the array dataflow, the extraction into the generators and the write-through.
// Own choices: memory layouts, host port, chunk-by-chunk load-then-compute
// schedule, the drain wait and the stall interlock.
module mlp_accel
  import st3d_pkg::*;
#(
  parameter int H         = MLP_H,
  parameter int W         = MLP_W,
  parameter int W_W       = MLP_WW,
  parameter int X_W       = MLP_XW,
  parameter int V_W       = MLP_VW,
  parameter int T_TILE    = MLP_T_TILE,
  parameter int GLB_DEPTH = GLB_WORDS,
  parameter int BUF_DEPTH = LBUF_WORDS,
  localparam int ACT_W = W,
  localparam int WGT_W = H * W_W,
  localparam int HW_W  = (ACT_W > WGT_W) ? ACT_W : WGT_W,
  localparam int AW    = $clog2(GLB_DEPTH)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // host access to the global buffers (only while idle)
  input  glb_sel_e              host_sel,
  input  logic                  host_we,
  input  logic                  host_re,
  input  logic [AW-1:0]         host_addr,
  input  logic [HW_W-1:0]       host_wdata,
  output logic [HW_W-1:0]       host_rdata,
  // layer configuration, sampled while start is high
  input  logic                  start,
  input  logic [AW-1:0]         cfg_din,
  input  logic [AW-1:0]         cfg_of_tiles,
  input  logic [AW-1:0]         cfg_n_tiles,
  input  logic [AW-1:0]         cfg_t_tiles,
  input  logic [AW-1:0]         cfg_in_base,
  input  logic [AW-1:0]         cfg_out_base,
  input  logic [AW-1:0]         cfg_w_base,
  input  logic signed [V_W-1:0] cfg_vth,
  input  logic signed [V_W-1:0] cfg_vleak,
  output logic                  busy,
  output logic                  done,
  output logic [31:0]           stat_wbuf_loads,
  output logic [31:0]           stat_wbuf_hits,
  output logic [31:0]           stat_gen_stalls,
  output logic [31:0]           stat_tiles
);
  localparam int BAW = $clog2(BUF_DEPTH);

  typedef enum logic [2:0] {
    S_IDLE, S_CHUNK, S_LOAD, S_LOAD_END, S_COMP, S_DRAIN, S_EXTRACT, S_FINISH
  } mstate_e;
  mstate_e st;

  // latched configuration
  logic [AW-1:0]         din, of_tiles, n_tiles, t_tiles, in_base, out_base, w_base;
  logic signed [V_W-1:0] vth, vleak;

  // loop counters
  logic [AW-1:0]  of_i, n_i, t_i, if_off, rem, cs;
  logic [AW-1:0]  cnt;
  logic           load_w;
  logic           wtag_v;
  logic [AW-1:0]  wtag_of, wtag_if;

  // --- global buffers ---------------------------------------------------------
  logic             a0_re, a1_re, wg_re, a0_we, a1_we, wg_we;
  logic [AW-1:0]    a0_raddr, a1_raddr, wg_raddr, a0_waddr, a1_waddr, wg_waddr;
  logic [ACT_W-1:0] a0_rdata, a1_rdata, a1_wdata;
  logic [WGT_W-1:0] wg_rdata;
  glb_sel_e         host_sel_q;

  sram_2p #(.DEPTH(GLB_DEPTH), .WIDTH(ACT_W)) u_act_glb0 (
    .clk, .re(a0_re), .raddr(a0_raddr), .rdata(a0_rdata),
    .we(a0_we), .waddr(a0_waddr), .wdata(host_wdata[ACT_W-1:0]));
  sram_2p #(.DEPTH(GLB_DEPTH), .WIDTH(ACT_W)) u_act_glb1 (
    .clk, .re(a1_re), .raddr(a1_raddr), .rdata(a1_rdata),
    .we(a1_we), .waddr(a1_waddr), .wdata(a1_wdata));
  sram_2p #(.DEPTH(GLB_DEPTH), .WIDTH(WGT_W)) u_w_glb (
    .clk, .re(wg_re), .raddr(wg_raddr), .rdata(wg_rdata),
    .we(wg_we), .waddr(wg_waddr), .wdata(host_wdata[WGT_W-1:0]));

  // --- local buffers ----------------------------------------------------------
  logic             ld_v, ld_w;
  logic [BAW-1:0]   ld_a;
  logic             sb_re;
  logic [BAW-1:0]   sb_raddr;
  logic [ACT_W-1:0] sb_rdata;
  logic [WGT_W-1:0] wb_rdata;

  sram_2p #(.DEPTH(BUF_DEPTH), .WIDTH(ACT_W)) u_s_buf (
    .clk, .re(sb_re), .raddr(sb_raddr), .rdata(sb_rdata),
    .we(ld_v), .waddr(ld_a), .wdata(a0_rdata));
  sram_2p #(.DEPTH(BUF_DEPTH), .WIDTH(WGT_W)) u_w_buf (
    .clk, .re(sb_re), .raddr(sb_raddr), .rdata(wb_rdata),
    .we(ld_v && ld_w), .waddr(ld_a), .wdata(wg_rdata));

  // --- array with skewed edges -----------------------------------------------
  logic                         fd_v;
  logic [W-1:0]                 s_raw, s_top;
  logic [H-1:0][W_W-1:0]        w_raw, w_left;
  logic [H-1:0][W-1:0][X_W-1:0] x_all;
  logic                         extract, clr;

  assign s_raw = fd_v ? sb_rdata : '0;
  assign w_raw = fd_v ? wb_rdata : '0;

  skew_buffer #(.LANES(W), .WIDTH(1))   u_skew_s (.clk, .rst_n, .din(s_raw), .dout(s_top));
  skew_buffer #(.LANES(H), .WIDTH(W_W)) u_skew_w (.clk, .rst_n, .din(w_raw), .dout(w_left));

  mlp_array #(.H(H), .W(W), .W_W(W_W), .X_W(X_W)) u_array (
    .clk, .rst_n, .clr, .s_top, .w_left, .x_out(x_all));

  // --- spiking generators ----------------------------------------------------
  logic          gen_busy, gen_wr;
  logic [AW-1:0] gen_addr, gen_base;
  logic [W-1:0]  gen_data;
  logic [AW-1:0] col_blk;   // n_i*t_tiles + t_i

  assign col_blk  = AW'(n_i * t_tiles + t_i);
  assign gen_base = AW'(out_base + col_blk * (of_tiles * AW'(H)) + of_i * AW'(H));

  mlp_spike_gen #(.H(H), .W(W), .T_TILE(T_TILE), .X_W(X_W), .V_W(V_W), .AW(AW)) u_gen (
    .clk, .rst_n, .extract, .first_t(t_i == '0), .wr_base(gen_base), .x_in(x_all),
    .v_th(vth), .v_leak(vleak), .busy(gen_busy),
    .wr_en(gen_wr), .wr_addr(gen_addr), .wr_data(gen_data));

  // --- memory port multiplexing ----------------------------------------------
  logic          seq_load;
  assign seq_load = (st == S_LOAD);

  always_comb begin
    a0_re    = seq_load;
    a0_raddr = AW'(in_base + col_blk * din + if_off + cnt);
    wg_re    = seq_load && load_w;
    wg_raddr = AW'(w_base + of_i * din + if_off + cnt);
    a1_re    = 1'b0;
    a1_raddr = host_addr;
    if (!busy) begin
      a0_re    = host_re && host_sel == GLB_ACT0;
      a0_raddr = host_addr;
      wg_re    = host_re && host_sel == GLB_AUX;
      wg_raddr = host_addr;
      a1_re    = host_re && host_sel == GLB_ACT1;
    end
    a0_we    = !busy && host_we && host_sel == GLB_ACT0;
    a0_waddr = host_addr;
    wg_we    = !busy && host_we && host_sel == GLB_AUX;
    wg_waddr = host_addr;
    a1_we    = gen_wr || (!busy && host_we && host_sel == GLB_ACT1);
    a1_waddr = gen_wr ? gen_addr : host_addr;
    a1_wdata = gen_wr ? gen_data : host_wdata[ACT_W-1:0];
  end

  always_ff @(posedge clk) if (host_re) host_sel_q <= host_sel;

  always_comb begin
    unique case (host_sel_q)
      GLB_ACT0: host_rdata = HW_W'(a0_rdata);
      GLB_ACT1: host_rdata = HW_W'(a1_rdata);
      default:  host_rdata = HW_W'(wg_rdata);
    endcase
  end

  // --- tile sequencer (kernel-fused loop) ------------------------------------
  assign sb_re    = (st == S_COMP);
  assign sb_raddr = BAW'(cnt);
  assign extract  = (st == S_EXTRACT) && !gen_busy;
  assign clr      = extract;
  assign busy     = (st != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE;
      {din, of_tiles, n_tiles, t_tiles, in_base, out_base, w_base} <= '0;
      vth <= '0; vleak <= '0;
      {of_i, n_i, t_i, if_off, rem, cs, cnt} <= '0;
      load_w <= 1'b0; wtag_v <= 1'b0; wtag_of <= '0; wtag_if <= '0;
      ld_v <= 1'b0; ld_w <= 1'b0; ld_a <= '0; fd_v <= 1'b0;
      done <= 1'b0;
      stat_wbuf_loads <= '0; stat_wbuf_hits <= '0; stat_gen_stalls <= '0; stat_tiles <= '0;
    end else begin
      done <= 1'b0;
      ld_v <= 1'b0;
      fd_v <= 1'b0;
      unique case (st)
        S_IDLE: if (start) begin
          din <= cfg_din; of_tiles <= cfg_of_tiles; n_tiles <= cfg_n_tiles;
          t_tiles <= cfg_t_tiles; in_base <= cfg_in_base; out_base <= cfg_out_base;
          w_base <= cfg_w_base; vth <= cfg_vth; vleak <= cfg_vleak;
          {of_i, n_i, t_i, if_off} <= '0;
          rem    <= cfg_din;
          wtag_v <= 1'b0;   // new layer: W buffer contents are stale
          st     <= S_CHUNK;
        end
        S_CHUNK: begin
          cs  <= (rem > AW'(BUF_DEPTH)) ? AW'(BUF_DEPTH) : rem;
          cnt <= '0;
          if (wtag_v && wtag_of == of_i && wtag_if == if_off) begin
            load_w         <= 1'b0;
            stat_wbuf_hits <= stat_wbuf_hits + 1;
          end else begin
            load_w          <= 1'b1;
            stat_wbuf_loads <= stat_wbuf_loads + 1;
          end
          wtag_v  <= 1'b1;
          wtag_of <= of_i;
          wtag_if <= if_off;
          st      <= S_LOAD;
        end
        S_LOAD: begin
          ld_v <= 1'b1;
          ld_w <= load_w;
          ld_a <= BAW'(cnt);
          if (cnt == cs - 1'b1) st <= S_LOAD_END;
          else                  cnt <= cnt + 1'b1;
        end
        S_LOAD_END: begin     // last buffer write happens this cycle
          cnt <= '0;
          st  <= S_COMP;
        end
        S_COMP: begin
          fd_v <= 1'b1;
          if (cnt == cs - 1'b1) begin
            cnt <= '0;
            st  <= S_DRAIN;
          end else begin
            cnt <= cnt + 1'b1;
          end
        end
        S_DRAIN: begin        // let the last wavefront reach PE (H-1, W-1)
          if (int'(cnt) == H + W + 1) begin
            cnt <= '0;
            if (rem == cs) begin
              rem    <= din;
              if_off <= '0;
              st     <= S_EXTRACT;
            end else begin
              rem    <= rem - cs;
              if_off <= if_off + cs;
              st     <= S_CHUNK;
            end
          end else begin
            cnt <= cnt + 1'b1;
          end
        end
        S_EXTRACT: begin
          if (gen_busy) begin
            stat_gen_stalls <= stat_gen_stalls + 1;
          end else begin
            stat_tiles <= stat_tiles + 1;
            st <= S_CHUNK;
            if (t_i == t_tiles - 1'b1) begin
              t_i <= '0;
              if (n_i == n_tiles - 1'b1) begin
                n_i <= '0;
                if (of_i == of_tiles - 1'b1) begin
                  of_i <= '0;
                  st   <= S_FINISH;
                end else begin
                  of_i <= of_i + 1'b1;
                end
              end else begin
                n_i <= n_i + 1'b1;
              end
            end else begin
              t_i <= t_i + 1'b1;
            end
          end
        end
        S_FINISH: if (!gen_busy) begin
          done <= 1'b1;
          st   <= S_IDLE;
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) start && !busy |-> cfg_din != '0)
    else $error("mlp_accel: cfg_din must be non-zero");
endmodule
