// attn_rpe: reconfigurable processing element (R-PE) of the spiking
// self-attention array.
//
// Registers: a 1-bit Q register (fed from the left, passed right), a 1-bit
// K/V register (fed from above, passed down), an A_W-bit attention register
// and an X_W-bit synaptic-integration register (fed from the left, passed
// right).
//   mode MODE_QK (mode 1): A <= A + (Q & K). The AND of the two registered
//     spikes is the 1-bit product; A accumulates one attention-map element
//     A[nq][nk] over the features of a head and then stays in the PE.
//   mode MODE_AV (mode 2): X <= x_in + (V ? A : 0). The registered value spike
//     selects the stored attention or 0, and the sum moves one PE right per
//     cycle, so a row of PEs accumulates sum_k A[nq][k] * V[k][f].
// a_clr zeroes A (it wins over accumulation). Register set, AND product,
// select-and-add and directions follow the published R-PE; the clear, the
// reset values and holding X at 0 in mode 1 are this design's choices. A
// wraps if the head has more than 2^A_W - 1 features; A_W = log2(d)+1 avoids
// that.
module attn_rpe
  import st3d_pkg::*;
#(
  parameter int A_W = 5,
  parameter int X_W = 16
) (
  input  logic           clk,
  input  logic           rst_n,
  input  attn_mode_e     mode,
  input  logic           a_clr,
  input  logic           q_in,
  input  logic           kv_in,
  input  logic [X_W-1:0] x_in,
  output logic           q_out,
  output logic           kv_out,
  output logic [X_W-1:0] x_out,
  output logic [A_W-1:0] a_out
);
  logic           q_q, kv_q;
  logic [A_W-1:0] a_q;
  logic [X_W-1:0] x_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q_q  <= 1'b0;
      kv_q <= 1'b0;
      a_q  <= '0;
      x_q  <= '0;
    end else begin
      q_q  <= q_in;
      kv_q <= kv_in;
      if (a_clr)                         a_q <= '0;
      else if (mode == MODE_QK && q_q && kv_q) a_q <= a_q + 1'b1;
      if (mode == MODE_AV) x_q <= x_in + (kv_q ? X_W'(a_q) : '0);
      else                 x_q <= '0;
    end
  end

  assign q_out  = q_q;
  assign kv_out = kv_q;
  assign x_out  = x_q;
  assign a_out  = a_q;
endmodule
