// st3d_top: spiking-transformer accelerator top level.
//
// Holds the two accelerators of the design side by side: the spiking MLP
// (linear-layer) accelerator and the spiking self-attention accelerator.
// Each has its own global buffers, local buffers, compute array and spiking
// generators, its own host port to load inputs/weights and read results, and
// its own start/busy/done handshake; they run independently and may run at the
// same time. Ports are prefixed mlp_ and att_ and behave as described in
// mlp_accel and attn_accel. A layer sequence (Q/K/V projections on the MLP
// accelerator, attention on the attention accelerator, output projection and
// MLP again) is driven by the host copying spike words between the two.
// That the two engines are separate designs follows the published work;
// putting them under one top with independent host ports is this design's
// choice.
module st3d_top
  import st3d_pkg::*;
#(
  localparam int MAW  = $clog2(GLB_WORDS),
  localparam int MHW  = (MLP_W > MLP_H * MLP_WW) ? MLP_W : MLP_H * MLP_WW,
  localparam int ASW  = $clog2(ATT_XW)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // ---- spiking MLP accelerator ----
  input  glb_sel_e                 mlp_host_sel,
  input  logic                     mlp_host_we,
  input  logic                     mlp_host_re,
  input  logic [MAW-1:0]           mlp_host_addr,
  input  logic [MHW-1:0]           mlp_host_wdata,
  output logic [MHW-1:0]           mlp_host_rdata,
  input  logic                     mlp_start,
  input  logic [MAW-1:0]           mlp_cfg_din,
  input  logic [MAW-1:0]           mlp_cfg_of_tiles,
  input  logic [MAW-1:0]           mlp_cfg_n_tiles,
  input  logic [MAW-1:0]           mlp_cfg_t_tiles,
  input  logic [MAW-1:0]           mlp_cfg_in_base,
  input  logic [MAW-1:0]           mlp_cfg_out_base,
  input  logic [MAW-1:0]           mlp_cfg_w_base,
  input  logic signed [MLP_VW-1:0] mlp_cfg_vth,
  input  logic signed [MLP_VW-1:0] mlp_cfg_vleak,
  output logic                     mlp_busy,
  output logic                     mlp_done,
  output logic [31:0]              mlp_stat_wbuf_loads,
  output logic [31:0]              mlp_stat_wbuf_hits,
  output logic [31:0]              mlp_stat_gen_stalls,
  output logic [31:0]              mlp_stat_tiles,
  // ---- spiking self-attention accelerator ----
  input  glb_sel_e                 att_host_sel,
  input  logic                     att_host_we,
  input  logic                     att_host_re,
  input  logic [MAW-1:0]           att_host_addr,
  input  logic [GLB_WIDTH-1:0]     att_host_wdata,
  output logic [GLB_WIDTH-1:0]     att_host_rdata,
  input  logic                     att_start,
  input  logic [MAW-1:0]           att_cfg_heads,
  input  logic [MAW-1:0]           att_cfg_d,
  input  logic [MAW-1:0]           att_cfg_ntok,
  input  logic [MAW-1:0]           att_cfg_T,
  input  logic [MAW-1:0]           att_cfg_qbase,
  input  logic [MAW-1:0]           att_cfg_kbase,
  input  logic [MAW-1:0]           att_cfg_vbase,
  input  logic [MAW-1:0]           att_cfg_ybase,
  input  logic [ASW-1:0]           att_cfg_shift,
  input  logic signed [ATT_VW-1:0] att_cfg_vth,
  input  logic signed [ATT_VW-1:0] att_cfg_vleak,
  output logic                     att_busy,
  output logic                     att_done,
  output logic [31:0]              att_stat_mode_switches,
  output logic [31:0]              att_stat_x_bypass,
  output logic [31:0]              att_stat_x_reloads,
  output logic [31:0]              att_stat_kv_loads
);
  mlp_accel u_mlp (
    .clk, .rst_n,
    .host_sel(mlp_host_sel), .host_we(mlp_host_we), .host_re(mlp_host_re),
    .host_addr(mlp_host_addr), .host_wdata(mlp_host_wdata), .host_rdata(mlp_host_rdata),
    .start(mlp_start), .cfg_din(mlp_cfg_din), .cfg_of_tiles(mlp_cfg_of_tiles),
    .cfg_n_tiles(mlp_cfg_n_tiles), .cfg_t_tiles(mlp_cfg_t_tiles),
    .cfg_in_base(mlp_cfg_in_base), .cfg_out_base(mlp_cfg_out_base),
    .cfg_w_base(mlp_cfg_w_base), .cfg_vth(mlp_cfg_vth), .cfg_vleak(mlp_cfg_vleak),
    .busy(mlp_busy), .done(mlp_done),
    .stat_wbuf_loads(mlp_stat_wbuf_loads), .stat_wbuf_hits(mlp_stat_wbuf_hits),
    .stat_gen_stalls(mlp_stat_gen_stalls), .stat_tiles(mlp_stat_tiles));

  attn_accel u_attn (
    .clk, .rst_n,
    .host_sel(att_host_sel), .host_we(att_host_we), .host_re(att_host_re),
    .host_addr(att_host_addr), .host_wdata(att_host_wdata), .host_rdata(att_host_rdata),
    .start(att_start), .cfg_heads(att_cfg_heads), .cfg_d(att_cfg_d), .cfg_ntok(att_cfg_ntok),
    .cfg_T(att_cfg_T), .cfg_qbase(att_cfg_qbase), .cfg_kbase(att_cfg_kbase),
    .cfg_vbase(att_cfg_vbase), .cfg_ybase(att_cfg_ybase), .cfg_shift(att_cfg_shift),
    .cfg_vth(att_cfg_vth), .cfg_vleak(att_cfg_vleak),
    .busy(att_busy), .done(att_done),
    .stat_mode_switches(att_stat_mode_switches), .stat_x_bypass(att_stat_x_bypass),
    .stat_x_reloads(att_stat_x_reloads), .stat_kv_loads(att_stat_kv_loads));

  // The default sizes must map onto the published buffer macros: the MLP
  // S buffer and W buffer are one 128b local-buffer word wide, and the two
  // attention X buffers are one 256b word (ATT_H query tokens x ATT_XW bits).
  if (MLP_W != LBUF_WIDTH || MLP_H * MLP_WW != LBUF_WIDTH) begin : g_chk_mlp_buf
    $error("MLP array size does not match the 128b local buffers");
  end
  if (ATT_H * ATT_XW != XBUF_WIDTH) begin : g_chk_att_xbuf
    $error("attention array size does not match the 256b X buffers");
  end
endmodule
