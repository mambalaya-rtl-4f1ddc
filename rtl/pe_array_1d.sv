// pe_array_1d: the separate low-intensity 1D array of LANES (256) PEs.
//
// The paper adds this array beside the 2D array for fusion groups in which
// an elementwise producer feeds a GEMM consumer: the 1D array computes the
// elementwise Einsums while the whole 2D array is busy with the GEMM, and
// broadcasts its results into the first row of the 2D array. It is joined
// to the global buffer and to the first and last rows of the 2D array.
//
// Here each lane is a full pe. The input line (from the global buffer or
// from the bus below the 2D array's last row, chosen outside) reaches every
// PE as both its north operand and its bus word, so a line can be streamed
// through one operation per cycle (SRC_NORTH) or loaded into the register
// files (ctl.bus_we). The PEs are chained linearly, lane i-1 feeding lane i.
// res_line is the last FU result of every lane and res_valid marks the cycle
// after a result was written: in a streaming operation a line issued in
// cycle t appears on res_line in cycle t + FU_STAGES + 1. rf_line reads
// rf[ctl.ra] of every lane.
// Size and connections follow the paper; the lane-level details are own.
module pe_array_1d
  import mambalaya_pkg::*;
#(
  parameter int unsigned LANES = 256
) (
  input  logic     clk,
  input  logic     rst_n,
  input  pe_ctrl_t ctl,
  input  data_t    in_line  [LANES],
  output data_t    res_line [LANES],
  output logic     res_valid,
  output data_t    rf_line  [LANES]
);

  data_t ch [LANES];
  logic  rv [LANES];

  for (genvar i = 0; i < LANES; i++) begin : g_lane
    data_t e_unused, s_unused;
    pe u_pe (
      .clk      (clk),
      .rst_n    (rst_n),
      .en       (1'b1),
      .ctl      (ctl),
      .west_in  ('0),
      .north_in (in_line[i]),
      .chain_in ((i == 0) ? data_t'('0) : ch[(i == 0) ? 0 : i-1]),
      .bus_in   (in_line[i]),
      .bus_sel  (1'b1),
      .east_out (e_unused),
      .south_out(s_unused),
      .chain_out(ch[i]),
      .rf_out   (rf_line[i]),
      .res_out  (res_line[i]),
      .res_valid(rv[i])
    );
  end

  // every lane runs the same control word, so lane 0 speaks for all
  assign res_valid = rv[0];

endmodule
