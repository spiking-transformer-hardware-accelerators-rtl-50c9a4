// mlp_spike_gen: spiking generators of the MLP accelerator (top tier).
//
// On an extract pulse the generator captures the synaptic integration of all
// H x W array PEs in one cycle (the vertical readout). Columns are grouped as
// column c = g*T_TILE + k: token g of the tile at timestep k of the time tile.
// One LIF neuron per (row r, token g), H*W/T_TILE in all, then walks the
// T_TILE timesteps in order, one per cycle, accumulating X onto its membrane
// potential and producing the spike for column c (membrane accumulation and
// conditional spike generation in time order). The membrane is kept between
// extracts so that consecutive time tiles of the same tokens continue it;
// first_t starts it from zero. After the T_TILE steps the H rows of W spikes are
// written through to Act GLB1, one 128-bit word (row r at wr_base + r) per
// cycle. busy is high from the cycle after extract for T_TILE + H cycles;
// extract while busy is not allowed.
// Published: the generators take the extracted X by time index, accumulate the
// membrane, compare with a broadcast threshold and write spikes through to Act
// GLB1. Own choices: the number of neurons, the step-per-cycle schedule, the
// word/row output layout and the membrane width.
module mlp_spike_gen #(
  parameter int H      = 16,
  parameter int W      = 128,
  parameter int T_TILE = 4,
  parameter int X_W    = 16,
  parameter int V_W    = 20,
  parameter int AW     = 12
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         extract,
  input  logic                         first_t,
  input  logic [AW-1:0]                wr_base,
  input  logic [H-1:0][W-1:0][X_W-1:0] x_in,
  input  logic signed [V_W-1:0]        v_th,
  input  logic signed [V_W-1:0]        v_leak,
  output logic                         busy,
  output logic                         wr_en,
  output logic [AW-1:0]                wr_addr,
  output logic [W-1:0]                 wr_data
);
  localparam int G  = W / T_TILE;
  localparam int KW = (T_TILE > 1) ? $clog2(T_TILE) : 1;
  localparam int RW = (H > 1) ? $clog2(H) : 1;

  typedef enum logic [1:0] {G_IDLE, G_RUN, G_WRITE} gstate_e;
  gstate_e st;

  logic [H-1:0][W-1:0][X_W-1:0] xcap;
  logic [W-1:0]                 spk [H];
  logic signed [V_W-1:0]        vmem [H][G];
  logic [KW-1:0]                k;
  logic [RW-1:0]                r_wr;
  logic                         first_q;
  logic [AW-1:0]                base_q;

  logic signed [V_W-1:0]        v_nx [H][G];
  logic                         s_nx [H][G];

  for (genvar r = 0; r < H; r++) begin : g_r
    for (genvar g = 0; g < G; g++) begin : g_g
      logic signed [V_W-1:0] v_prev;
      logic signed [X_W-1:0] x_cur;
      assign v_prev = (first_q && k == '0) ? '0 : vmem[r][g];
      assign x_cur  = xcap[r][g*T_TILE + int'(k)];
      lif_unit #(.X_W(X_W), .V_W(V_W)) u_lif (
        .v_prev(v_prev), .x(x_cur), .v_leak(v_leak), .v_th(v_th),
        .v_next(v_nx[r][g]), .spike(s_nx[r][g])
      );
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st      <= G_IDLE;
      k       <= '0;
      r_wr    <= '0;
      first_q <= 1'b0;
      base_q  <= '0;
      for (int r = 0; r < H; r++) begin
        spk[r] <= '0;
        for (int g = 0; g < G; g++) vmem[r][g] <= '0;
      end
    end else begin
      unique case (st)
        G_IDLE: if (extract) begin
          st      <= G_RUN;
          k       <= '0;
          first_q <= first_t;
          base_q  <= wr_base;
        end
        G_RUN: begin
          for (int r = 0; r < H; r++) begin
            for (int g = 0; g < G; g++) begin
              vmem[r][g]                  <= v_nx[r][g];
              spk[r][g*T_TILE + int'(k)]  <= s_nx[r][g];
            end
          end
          if (int'(k) == T_TILE - 1) begin
            st   <= G_WRITE;
            r_wr <= '0;
          end else begin
            k <= k + 1'b1;
          end
        end
        G_WRITE: begin
          if (int'(r_wr) == H - 1) st <= G_IDLE;
          else                     r_wr <= r_wr + 1'b1;
        end
        default: st <= G_IDLE;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (st == G_IDLE && extract) xcap <= x_in;
  end

  assign busy    = (st != G_IDLE);
  assign wr_en   = (st == G_WRITE);
  assign wr_addr = base_q + AW'(r_wr);
  assign wr_data = spk[r_wr];

  assert property (@(posedge clk) disable iff (!rst_n) extract |-> st == G_IDLE)
    else $error("mlp_spike_gen: extract while busy");
endmodule
