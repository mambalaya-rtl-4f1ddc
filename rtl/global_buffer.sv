// global_buffer: the 32 MB on-chip global buffer.
//
// Organised as LINES lines of LANES Q8.8 words (65536 x 256 x 2 bytes =
// 32 MiB by default), one line being one word for each row or column of the
// array. It has NR read ports and NW write ports, each moving a whole line
// per cycle; in the accelerator they serve the west edge, the north edge /
// 1D-mode row buses, the 1D array, the result drain, the 1D-array results
// and the external (DRAM side) port. Reads have one cycle of latency
// (rdata is valid the cycle after re). Writes in the same cycle to the same
// line resolve to the highest-numbered port. A read of a line written in the
// same cycle returns the old contents.
// The capacity is the paper's (Table 3); the line organisation and the port
// count are this design's own: the paper says only which units the buffer
// connects to.
module global_buffer
  import mambalaya_pkg::*;
#(
  parameter int unsigned LINES = 65536,
  parameter int unsigned LANES = 256,
  parameter int unsigned NR    = 4,
  parameter int unsigned NW    = 3,
  localparam int unsigned AW   = $clog2(LINES),
  localparam int unsigned LW   = LANES * DATA_W
) (
  input  logic          clk,
  input  logic          re    [NR],
  input  logic [AW-1:0] raddr [NR],
  output logic [LW-1:0] rdata [NR],
  input  logic          we    [NW],
  input  logic [AW-1:0] waddr [NW],
  input  logic [LW-1:0] wdata [NW]
);

  logic [LW-1:0] mem [LINES];

  always_ff @(posedge clk) begin
    for (int p = 0; p < NR; p++)
      if (re[p]) rdata[p] <= mem[raddr[p]];
  end

  always_ff @(posedge clk) begin
    for (int p = 0; p < NW; p++)
      if (we[p]) mem[waddr[p]] <= wdata[p];
  end

endmodule
