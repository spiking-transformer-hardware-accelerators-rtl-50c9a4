// mlp_pe: processing element of the spiking MLP systolic array.
//
// The PE is synaptic-integration stationary. It holds three registers: a 1-bit
// spike register fed from the PE above, a W_W-bit weight register fed from the
// PE to the left, and an X_W-bit synaptic-integration register. Each cycle the
// registered weight is added to the integration only if the registered spike
// is 1 (a select between 0 and the weight, whose inputs the PE drawing labels
// 0 and 1), so a spike/weight product costs no multiplier. The spike is passed on downwards
// and the weight to the right, both one cycle later. x_out is the integration
// register itself; it goes straight up to the spiking generators ("3D
// extraction"). This structure follows the published PE. Signed weights,
// wrap-around accumulation and the synchronous clear (clr, which wins over
// accumulation) are this design's choices.
module mlp_pe #(
  parameter int W_W = 8,
  parameter int X_W = 16
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  clr,
  input  logic                  s_in,
  input  logic signed [W_W-1:0] w_in,
  output logic                  s_out,
  output logic signed [W_W-1:0] w_out,
  output logic signed [X_W-1:0] x_out
);
  logic                  s_q;
  logic signed [W_W-1:0] w_q;
  logic signed [X_W-1:0] x_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_q <= 1'b0;
      w_q <= '0;
      x_q <= '0;
    end else begin
      s_q <= s_in;
      w_q <= w_in;
      if (clr)      x_q <= '0;
      else if (s_q) x_q <= x_q + X_W'(w_q);
    end
  end

  assign s_out = s_q;
  assign w_out = w_q;
  assign x_out = x_q;
endmodule
