// sram_2p: model of a two-port SRAM macro (one read port, one write port).
//
// Used for every global buffer (Act GLB0/1, W GLB, X GLB: 3072 x 128b) and
// local buffer (S, W, Q, K/V buffers: 96 x 128b; X buffers: 96 x 256b) of the
// accelerators. The published design uses compiler-generated SRAM macros; their
// port structure is not given, so one read and one write port per macro is
// this design's choice. Timing: a read issued with re in cycle n returns
// mem[raddr] on rdata in cycle n+1 and rdata holds until the next read. A write
// with we lands at the clock edge; a read of the same address in the same cycle
// returns the old word. Contents are not reset.
module sram_2p #(
  parameter int DEPTH = 3072,
  parameter int WIDTH = 128,
  localparam int AW = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             re,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end

  always_ff @(posedge clk) begin
    if (re) assert (int'(raddr) < DEPTH) else $error("sram_2p: read address %0d out of range", raddr);
    if (we) assert (int'(waddr) < DEPTH) else $error("sram_2p: write address %0d out of range", waddr);
  end
endmodule
