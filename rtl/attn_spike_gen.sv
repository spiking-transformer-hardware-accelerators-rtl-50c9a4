// attn_spike_gen: spiking generators of the self-attention accelerator (top
// tier).
//
// After the array has finished the synaptic integration X of one head at one
// timestep, the generators read X from X GLB, accumulate it onto the membrane
// of every LIF neuron (one per token and feature of the head) and write the
// output spikes through to Act GLB1.
// X GLB holds LG = GLB_W/X_W values per word; word a = f*nw + w holds tokens
// w*LG .. w*LG+LG-1 of feature f (nw = tokens/LG words per feature). LG LIF
// units process one word per cycle. Membranes live in a MAX_WORDS x (LG*V_W)
// memory addressed like X GLB, so a neuron keeps its membrane across the
// timesteps of its head; first_t starts all of them from zero. Before
// integration X is shifted right by cfg_shift (the "Shift" after the second
// matrix product of spiking self-attention; 0 disables it). The LG spikes of
// each word are collected into a GLB_W-bit word, one bit per token, written to
// Act GLB1 at y_addr0 + f after the last word of feature f.
// Timing: start (while idle) -> one X GLB read per cycle for cfg_nwords cycles
// -> done pulses two cycles after the last read. The generator reads only the
// first MAX_WORDS words of X GLB, so the upper bits of xr_addr stay 0.
// Published: the generators accumulate X onto LIF membranes over timesteps and
// write spikes through to Act GLB1. Own choices: lane count, membrane storage, layouts, the shift
// control.
module attn_spike_gen #(
  parameter int GLB_W     = 128,
  parameter int X_W       = 16,
  parameter int V_W       = 20,
  parameter int AW        = 12,
  parameter int MAX_WORDS = 768,
  localparam int LG  = GLB_W / X_W,
  localparam int MAW = $clog2(MAX_WORDS),
  localparam int SW  = $clog2(X_W)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  start,
  input  logic [MAW-1:0]        cfg_nwords,   // d * nw, <= MAX_WORDS
  input  logic [MAW-1:0]        cfg_nw,       // words per feature
  input  logic                  first_t,
  input  logic [SW-1:0]         cfg_shift,
  input  logic signed [V_W-1:0] v_th,
  input  logic signed [V_W-1:0] v_leak,
  input  logic [AW-1:0]         y_addr0,
  output logic                  busy,
  output logic                  done,
  // X GLB read port
  output logic                  xr_re,
  output logic [AW-1:0]         xr_addr,
  input  logic [GLB_W-1:0]      xr_data,
  // Act GLB1 write port
  output logic                  y_we,
  output logic [AW-1:0]         y_addr,
  output logic [GLB_W-1:0]      y_data
);
  logic           run, first_q;
  logic [MAW-1:0] a, w, f, nwords, nw;
  logic [SW-1:0]  shift;
  logic [AW-1:0]  ybase;
  // second pipeline stage
  logic           p_v, p_last;
  logic [MAW-1:0] p_a, p_w, p_f;
  logic           tail;

  logic [LG*V_W-1:0] m_rdata, m_wdata;
  logic [GLB_W-1:0]  sp_acc, sp_next;
  logic [LG-1:0]     lane_spk;

  sram_2p #(.DEPTH(MAX_WORDS), .WIDTH(LG*V_W)) u_vmem (
    .clk, .re(run), .raddr(a), .rdata(m_rdata),
    .we(p_v), .waddr(p_a), .wdata(m_wdata));

  for (genvar l = 0; l < LG; l++) begin : g_lane
    logic [X_W-1:0]        xs;
    logic signed [V_W-1:0] vp, vn;
    assign xs = xr_data[l*X_W +: X_W] >> shift;
    assign vp = first_q ? '0 : m_rdata[l*V_W +: V_W];
    lif_unit #(.X_W(X_W + 1), .V_W(V_W)) u_lif (
      .v_prev(vp), .x({1'b0, xs}), .v_leak(v_leak), .v_th(v_th),
      .v_next(vn), .spike(lane_spk[l]));
    assign m_wdata[l*V_W +: V_W] = vn;
  end

  always_comb begin
    sp_next = (p_w == '0) ? '0 : sp_acc;
    sp_next[int'(p_w)*LG +: LG] = lane_spk;
  end

  assign xr_re   = run;
  assign xr_addr = AW'(a);
  assign y_we    = p_v && p_last;
  assign y_addr  = ybase + AW'(p_f);
  assign y_data  = sp_next;
  assign busy    = run || p_v || tail;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run <= 1'b0; first_q <= 1'b0; a <= '0; w <= '0; f <= '0;
      nwords <= '0; nw <= '0; shift <= '0; ybase <= '0;
      p_v <= 1'b0; p_last <= 1'b0; p_a <= '0; p_w <= '0; p_f <= '0;
      tail <= 1'b0; done <= 1'b0; sp_acc <= '0;
    end else begin
      done <= 1'b0;
      tail <= 1'b0;
      p_v  <= run;
      if (run) begin
        p_a    <= a;
        p_w    <= w;
        p_f    <= f;
        p_last <= (w == nw - 1'b1);
        if (a == nwords - 1'b1) run <= 1'b0;
        a <= a + 1'b1;
        if (w == nw - 1'b1) begin
          w <= '0;
          f <= f + 1'b1;
        end else begin
          w <= w + 1'b1;
        end
      end else if (start && !busy) begin
        run <= 1'b1; first_q <= first_t; a <= '0; w <= '0; f <= '0;
        nwords <= cfg_nwords; nw <= cfg_nw; shift <= cfg_shift; ybase <= y_addr0;
      end
      if (p_v) begin
        sp_acc <= sp_next;
        if (!run) tail <= 1'b1;
      end
      if (tail) done <= 1'b1;
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) start && !busy |-> int'(cfg_nwords) <= MAX_WORDS && cfg_nw != '0)
    else $error("attn_spike_gen: bad word counts");
endmodule
