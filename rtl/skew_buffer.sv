// skew_buffer: per-lane delay lines that skew (or de-skew) a word entering or
// leaving a systolic array.
//
// Lane i is delayed by BASE + i cycles, or by BASE + (LANES-1-i) cycles when
// REVERSE is set, so a word presented in one cycle reaches lane i of the array
// edge i cycles later (the classic systolic wavefront). Lanes with zero delay
// are wires. Registers reset to zero, so an idle array is fed zeros.
module skew_buffer #(
  parameter int LANES   = 4,
  parameter int WIDTH   = 1,
  parameter int BASE    = 0,
  parameter bit REVERSE = 1'b0
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic [LANES-1:0][WIDTH-1:0] din,
  output logic [LANES-1:0][WIDTH-1:0] dout
);
  for (genvar i = 0; i < LANES; i++) begin : g_lane
    localparam int D = BASE + (REVERSE ? (LANES - 1 - i) : i);
    if (D == 0) begin : g_wire
      assign dout[i] = din[i];
    end else begin : g_dly
      logic [WIDTH-1:0] sr [D];
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          for (int k = 0; k < D; k++) sr[k] <= '0;
        end else begin
          sr[0] <= din[i];
          for (int k = 1; k < D; k++) sr[k] <= sr[k-1];
        end
      end
      assign dout[i] = sr[D-1];
    end
  end
endmodule
