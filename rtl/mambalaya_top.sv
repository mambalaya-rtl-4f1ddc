// mambalaya_top: the Mambalaya accelerator.
//
// Mamba's layer is a cascade of two dozen Einsums, most of them elementwise
// or nonlinear, and its speed is set by how much of the inter-Einsum traffic
// can be kept on chip (fusion). The accelerator is built so that every fused
// mapping has hardware to run on:
//   * a ROWS x COLS array of PEs (256 x 256 in the paper; ROWS defaults to
//     48 here, see below), each with a 6-stage functional
//     unit able to do MACCs and the low-intensity operations, whose network
//     switches between a 2D systolic mode (GEMMs and what follows a GEMM)
//     and a 1D mode in which its first ROWS_1D rows (8192 PEs) form one long
//     chain with direct global-buffer row buses (fusion groups of only
//     elementwise Einsums);
//   * a separate 1D array of COLS (256) PEs that computes elementwise
//     producers while the 2D array runs the consuming GEMM, broadcasting its
//     results into the 2D array's first row, and that can post-process the
//     rows leaving the 2D array's last row;
//   * a 32 MB global buffer of GB_LINES lines, one word per array column per
//     line, with an external line port where DRAM traffic enters and leaves;
//   * a command sequencer (mambalaya_ctrl) that picks the mode and drives it.
// Interface: commands (cmd_t) over cmd_valid/cmd_ready, done pulses when a
// command has finished; mode and mode_switch report the array mode;
// ext_* is the external port of the global buffer (read latency one cycle).
// Sizes follow the paper (Table 3 and Figs. 12, 13) except the default row
// count of the 2D array: 256 x 256 PEs (65,792 with the 1D array) are more
// than the lint and synthesis front ends can elaborate in 32 GiB (about
// 0.8 MB and 0.15 MB per PE instance), so ROWS defaults to 48 and the
// 256-wide columns, the 32 rows of 1D mode and the 256-lane 1D array stay
// at the paper's sizes. ROWS = 256 is a legal setting. The command
// interface, buffer ports and number format are this design's own.
// The 1D array's rf_line port is left open on purpose: in this top level its
// register file is only read by its own operations. The assertions in the
// sequencer sample rst_n synchronously (disable iff) while the flops reset
// asynchronously; lint tools flag that mix, which is harmless here.
module mambalaya_top
  import mambalaya_pkg::*;
#(
  parameter int unsigned ROWS     = 48,
  parameter int unsigned COLS     = 256,
  parameter int unsigned ROWS_1D  = 32,
  parameter int unsigned GB_LINES = 65536,
  localparam int unsigned AW      = $clog2(GB_LINES),
  localparam int unsigned LW      = COLS * DATA_W
) (
  input  logic          clk,
  input  logic          rst_n,
  input  cmd_t          cmd,
  input  logic          cmd_valid,
  output logic          cmd_ready,
  output logic          done,
  output array_mode_e   mode,
  output logic          mode_switch,
  input  logic          ext_re,
  input  logic [AW-1:0] ext_raddr,
  output logic [LW-1:0] ext_rdata,
  input  logic          ext_we,
  input  logic [AW-1:0] ext_waddr,
  input  logic [LW-1:0] ext_wdata,
  output data_t         chain_tail
);

  // ---- sequencer -------------------------------------------------------------
  pe_ctrl_t ctl2d, ctl1a;
  logic          r0_re, r1_re, r2_re, w0_we, w1_we;
  logic [AW-1:0] r0_addr, r1_addr, r2_addr, w0_addr, w1_addr;
  logic          w0_from_rf, west_valid, north_valid, north_from_1a, in1a_from_2d;
  logic [$clog2(ROWS)-1:0] bus_row;
  logic          res1a_valid;

  mambalaya_ctrl #(.ROWS(ROWS), .COLS(COLS), .AW(AW)) u_ctrl (
    .clk, .rst_n, .cmd, .cmd_valid, .cmd_ready, .done, .mode, .mode_switch,
    .ctl2d, .ctl1a,
    .r0_re, .r1_re, .r2_re, .r0_addr, .r1_addr, .r2_addr,
    .w0_we, .w1_we, .w0_addr, .w1_addr, .w0_from_rf,
    .west_valid, .north_valid, .north_from_1a, .in1a_from_2d, .bus_row,
    .res1a_valid
  );

  // ---- global buffer -----------------------------------------------------------
  logic          gb_re    [4];
  logic [AW-1:0] gb_raddr [4];
  logic [LW-1:0] gb_rdata [4];
  logic          gb_we    [3];
  logic [AW-1:0] gb_waddr [3];
  logic [LW-1:0] gb_wdata [3];

  global_buffer #(.LINES(GB_LINES), .LANES(COLS), .NR(4), .NW(3)) u_gb (
    .clk, .re(gb_re), .raddr(gb_raddr), .rdata(gb_rdata),
    .we(gb_we), .waddr(gb_waddr), .wdata(gb_wdata));

  assign gb_re[0] = r0_re;   assign gb_raddr[0] = r0_addr;
  assign gb_re[1] = r1_re;   assign gb_raddr[1] = r1_addr;
  assign gb_re[2] = r2_re;   assign gb_raddr[2] = r2_addr;
  assign gb_re[3] = ext_re;  assign gb_raddr[3] = ext_raddr;
  assign ext_rdata = gb_rdata[3];

  // ---- arrays ------------------------------------------------------------------
  data_t west_line  [ROWS];
  data_t north_line [COLS];
  data_t south_line [COLS];
  data_t bus_line   [COLS];
  data_t rf_line    [COLS];
  data_t in1a_line  [COLS];
  data_t res1a_line [COLS];
  logic [LW-1:0] w0_data, w1_data;

  for (genvar r = 0; r < ROWS; r++) begin : g_west
    assign west_line[r] = data_t'(gb_rdata[0][r*DATA_W +: DATA_W]);
  end
  for (genvar c = 0; c < COLS; c++) begin : g_col
    data_t gb1, gb2;
    assign gb1 = data_t'(gb_rdata[1][c*DATA_W +: DATA_W]);
    assign gb2 = data_t'(gb_rdata[2][c*DATA_W +: DATA_W]);
    assign north_line[c] = north_from_1a ? res1a_line[c] : gb1;
    assign bus_line[c]   = gb1;
    assign in1a_line[c]  = in1a_from_2d ? south_line[c] : gb2;
    assign w0_data[c*DATA_W +: DATA_W] = w0_from_rf ? rf_line[c] : south_line[c];
    assign w1_data[c*DATA_W +: DATA_W] = res1a_line[c];
  end

  pe_array_2d #(.ROWS(ROWS), .COLS(COLS), .ROWS_1D(ROWS_1D)) u_array2d (
    .clk, .rst_n, .mode, .ctl(ctl2d),
    .west_valid, .west_line, .north_valid, .north_line,
    .south_line,
    .bus_row, .bus_line, .rf_line,
    .chain_in_head(data_t'('0)), .chain_tail);

  pe_array_1d #(.LANES(COLS)) u_array1d (
    .clk, .rst_n, .ctl(ctl1a), .in_line(in1a_line),
    .res_line(res1a_line), .res_valid(res1a_valid), .rf_line());

  assign gb_we[0] = w0_we;   assign gb_waddr[0] = w0_addr;   assign gb_wdata[0] = w0_data;
  assign gb_we[1] = w1_we;   assign gb_waddr[1] = w1_addr;   assign gb_wdata[1] = w1_data;
  assign gb_we[2] = ext_we;  assign gb_waddr[2] = ext_waddr; assign gb_wdata[2] = ext_wdata;

  initial assert (ROWS <= COLS) else $error("west edge lines are COLS words wide");

endmodule
