// mlp_array: H x W spatiotemporal systolic array of mlp_pe for synaptic
// integration of a spiking MLP layer.
//
// Row r computes output feature r of the current output-feature tile; column c
// holds one (token, timestep) pair of the current token/time tile. Weights for
// row r enter at the left edge (w_left[r]) and move one PE right per cycle, so
// one weight is reused by all W tokens/timesteps. Input spikes for column c
// enter at the top edge (s_top[c]) and move one PE down per cycle, so one spike
// is reused by all H output features. The caller must skew the edges: the
// values for input feature k go to row r at cycle k+r and to column c at cycle
// k+c; PE (r,c) then sees both at cycle k+r+c+1. All H*W integration
// registers are visible at once on x_out (parallel vertical readout), and clr
// zeroes all of them in one cycle. Arrangement and data movement follow the
// published array; the edge skew timing is this design's.
module mlp_array #(
  parameter int H   = 16,
  parameter int W   = 128,
  parameter int W_W = 8,
  parameter int X_W = 16
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic                              clr,
  input  logic [W-1:0]                      s_top,
  input  logic [H-1:0][W_W-1:0]             w_left,
  output logic [H-1:0][W-1:0][X_W-1:0]      x_out
);
  logic             s_v [H+1][W];   // spike entering PE (r,c) from above
  logic [W_W-1:0]   w_h [H][W+1];   // weight entering PE (r,c) from the left

  for (genvar c = 0; c < W; c++) begin : g_top
    assign s_v[0][c] = s_top[c];
  end

  for (genvar r = 0; r < H; r++) begin : g_row
    assign w_h[r][0] = w_left[r];
    for (genvar c = 0; c < W; c++) begin : g_col
      mlp_pe #(.W_W(W_W), .X_W(X_W)) u_pe (
        .clk  (clk),
        .rst_n(rst_n),
        .clr  (clr),
        .s_in (s_v[r][c]),
        .w_in (w_h[r][c]),
        .s_out(s_v[r+1][c]),
        .w_out(w_h[r][c+1]),
        .x_out(x_out[r][c])
      );
    end
  end
endmodule
