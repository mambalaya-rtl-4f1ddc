// tb_global_buffer: checks the line-organised global buffer at 64 lines of
// 4 words with 4 read and 3 write ports.
//
// Fills every line through rotating write ports, reads them back on all read
// ports with one cycle of latency, checks that simultaneous writes to one
// line resolve to the highest port, that a read in the cycle of a write
// returns the old line, and that a line not written holds its value.
module tb_global_buffer;
  import mambalaya_pkg::*;

  localparam int LINES = 64, LANES = 4, NR = 4, NW = 3;
  localparam int AW = $clog2(LINES), LW = LANES * DATA_W;

  logic clk = 0;
  always #5 clk = ~clk;

  logic          re    [NR];
  logic [AW-1:0] raddr [NR];
  logic [LW-1:0] rdata [NR];
  logic          we    [NW];
  logic [AW-1:0] waddr [NW];
  logic [LW-1:0] wdata [NW];

  global_buffer #(.LINES(LINES), .LANES(LANES), .NR(NR), .NW(NW)) dut (.*);

  int checks = 0, failures = 0;
  logic [LW-1:0] model [LINES];

  task automatic expect_eq(input string what, input logic [LW-1:0] got, input logic [LW-1:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  task automatic step();
    @(posedge clk);
    #1;
  endtask

  task automatic idle();
    foreach (re[p]) re[p] = 0;
    foreach (we[p]) we[p] = 0;
  endtask

  initial begin
    idle();
    foreach (raddr[p]) raddr[p] = 0;
    foreach (waddr[p]) waddr[p] = 0;
    foreach (wdata[p]) wdata[p] = 0;
    step();
    for (int l = 0; l < LINES; l++) begin
      idle();
      model[l] = {$urandom(), $urandom()};
      we[l % NW] = 1; waddr[l % NW] = AW'(l); wdata[l % NW] = model[l];
      step();
    end
    idle();
    for (int l = 0; l < LINES; l += NR) begin
      for (int p = 0; p < NR; p++) begin re[p] = 1; raddr[p] = AW'((l + p * 5) % LINES); end
      step();
      idle();
      for (int p = 0; p < NR; p++) expect_eq("readback", rdata[p], model[(l + p * 5) % LINES]);
    end
    // all write ports hit line 7; read port 0 reads line 7 in the same cycle
    for (int p = 0; p < NW; p++) begin we[p] = 1; waddr[p] = 7; wdata[p] = LW'(1000 + p); end
    re[0] = 1; raddr[0] = 7;
    step();
    idle();
    expect_eq("read during write gives old data", rdata[0], model[7]);
    re[0] = 1; raddr[0] = 7;
    step();
    idle();
    expect_eq("highest write port wins", rdata[0], LW'(1000 + NW - 1));
    // rdata holds without re
    step();
    expect_eq("rdata holds", rdata[0], LW'(1000 + NW - 1));
    re[1] = 1; raddr[1] = 8;
    step();
    expect_eq("other line untouched", rdata[1], model[8]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
