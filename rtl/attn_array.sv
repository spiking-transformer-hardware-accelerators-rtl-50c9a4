// attn_array: H x W reconfigurable spiking self-attention array of attn_rpe.
//
// Row r belongs to query token r of the query tile, column c to key token c of
// the key tile. In mode 1 query spikes enter at the left (q_left[r]) and key
// spikes at the top (kv_top[c]); PE (r,c) accumulates A[r][c] = Q_r . K_c,
// each query reused across the W keys and each key across the H queries. In
// mode 2 value spikes enter at the top (kv_top[c] = V[c][f]) and partial
// synaptic integrations X[r][f] at the left (x_left[r]); X leaves at the right
// edge (x_right[r]) with sum_c A[r][c]*V[c][f] added, each attention element
// reused across features and each value across the H queries. Edge timing
// (caller skews): mode 1 feature k at row r at cycle k+r, column c at k+c;
// mode 2 V for feature f at column c at cycle f+c, X at row r at cycle f+r+1,
// result on x_right[r] at f+r+W+1. The whole attention tile is also visible on
// a_out. Structure and data directions follow the published array.
module attn_array
  import st3d_pkg::*;
#(
  parameter int H   = 16,
  parameter int W   = 16,
  parameter int A_W = 5,
  parameter int X_W = 16
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  attn_mode_e                   mode,
  input  logic                         a_clr,
  input  logic [H-1:0]                 q_left,
  input  logic [W-1:0]                 kv_top,
  input  logic [H-1:0][X_W-1:0]        x_left,
  output logic [H-1:0][X_W-1:0]        x_right,
  output logic [H-1:0][W-1:0][A_W-1:0] a_out
);
  logic           q_h  [H][W+1];
  logic [X_W-1:0] x_h  [H][W+1];
  logic           kv_v [H+1][W];

  for (genvar c = 0; c < W; c++) begin : g_top
    assign kv_v[0][c] = kv_top[c];
  end

  for (genvar r = 0; r < H; r++) begin : g_row
    assign q_h[r][0]  = q_left[r];
    assign x_h[r][0]  = x_left[r];
    assign x_right[r] = x_h[r][W];
    for (genvar c = 0; c < W; c++) begin : g_col
      attn_rpe #(.A_W(A_W), .X_W(X_W)) u_rpe (
        .clk, .rst_n, .mode, .a_clr,
        .q_in (q_h[r][c]),  .kv_in(kv_v[r][c]),  .x_in (x_h[r][c]),
        .q_out(q_h[r][c+1]), .kv_out(kv_v[r+1][c]), .x_out(x_h[r][c+1]),
        .a_out(a_out[r][c])
      );
    end
  end
endmodule
