// lif_unit: one leaky integrate-and-fire neuron update (combinational).
//
// v_next = v_prev + x - v_leak; if that sum is greater than v_th the neuron
// spikes and its membrane is reset to zero, otherwise the sum is kept. With
// v_leak = 0 this is the IF neuron. This is the discrete LIF/IF dynamics of the
// spiking transformer. The membrane width V_W and two's-complement wrap on
// overflow (V_W is chosen with headroom over X_W) are this design's choices.
// Interface: x is a signed X_W-bit synaptic integration, everything else is
// signed V_W bits. No clock; the caller registers v_next.
module lif_unit #(
  parameter int X_W = 16,
  parameter int V_W = 20
) (
  input  logic signed [V_W-1:0] v_prev,
  input  logic signed [X_W-1:0] x,
  input  logic signed [V_W-1:0] v_leak,
  input  logic signed [V_W-1:0] v_th,
  output logic signed [V_W-1:0] v_next,
  output logic                  spike
);
  logic signed [V_W-1:0] v_int;

  always_comb begin
    v_int  = v_prev + V_W'(x) - v_leak;
    spike  = (v_int > v_th);
    v_next = spike ? '0 : v_int;
  end
endmodule
