// tb_sram_2p: self-checking test of the SRAM macro model.
// Writes random words, reads them back and checks the one-cycle read
// latency, that rdata holds between reads, and that a read of the address
// being written in the same cycle returns the old word.
module tb_sram_2p;
  localparam int DEPTH = 96, WIDTH = 128, AW = $clog2(DEPTH);
  logic clk = 0, re = 0, we = 0;
  logic [AW-1:0] raddr = '0, waddr = '0;
  logic [WIDTH-1:0] rdata, wdata = '0;
  logic [WIDTH-1:0] model [DEPTH];
  int checks = 0, failures = 0;

  sram_2p #(.DEPTH(DEPTH), .WIDTH(WIDTH)) dut (.*);
  always #5 clk = ~clk;

  function automatic logic [WIDTH-1:0] rnd();
    return {$urandom, $urandom, $urandom, $urandom};
  endfunction

  task automatic chk(logic [WIDTH-1:0] exp, string what);
    checks++;
    if (rdata !== exp) begin
      failures++;
      $display("FAIL %s: got %h exp %h", what, rdata, exp);
    end
  endtask

  initial begin
    @(negedge clk);
    for (int a = 0; a < DEPTH; a++) begin
      we = 1; waddr = AW'(a); wdata = rnd(); model[a] = wdata;
      @(negedge clk);
    end
    we = 0;
    for (int i = 0; i < 200; i++) begin
      automatic int a = $urandom_range(0, DEPTH - 1);
      re = 1; raddr = AW'(a);
      @(negedge clk);
      re = 0;
      chk(model[a], "read");
      @(negedge clk);
      chk(model[a], "hold");
    end
    // read and write the same address in one cycle: old data
    re = 1; we = 1; raddr = 7; waddr = 7; wdata = rnd();
    @(negedge clk);
    re = 0; we = 0;
    chk(model[7], "read-during-write");
    model[7] = wdata;
    re = 1;
    @(negedge clk);
    re = 0;
    chk(model[7], "after write");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
