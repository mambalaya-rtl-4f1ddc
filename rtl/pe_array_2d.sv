// pe_array_2d: the reconfigurable ROWS x COLS PE array (256 x 256 in the
// paper; ROWS defaults to 48 so that the array can be elaborated in 32 GiB,
// COLS and ROWS_1D keep the paper's 256 and 32).
//
// Two network modes, as in the paper:
//   * MODE_2D: every PE works. West-edge lines enter row r, north-edge lines
//     column c, both through diagonal skew (skew_line), and operands move
//     one PE per cycle east and south (store and forward, as in a TPU-style
//     systolic array). With the broadcast control word set to MACC into the
//     accumulator this is an output-stationary GEMM:
//       acc[r][c] = sum_k west_line_k[r] * north_line_k[c].
//     drain_load then moves the accumulators into the south links and the
//     bottom row delivers one row of results per cycle on south_line, last
//     row first: cycle j after the drain_load shows row ROWS-1-j.
//   * MODE_1D: only the first ROWS_1D rows (32 x 256 = 8192 PEs) work. Each of
//     those rows has its own bus from the global buffer: with ctl.bus_we,
//     bus_line is written into rf[rd] of row bus_row; rf_line reads rf[ra]
//     of row bus_row back out. The rows are joined into one linear chain
//     that snakes through the array (row 0 left to right, row 1 right to
//     left, ...), so chain_out of chain position s feeds chain_in of s+1;
//     chain_in_head feeds position 0 and chain_tail gives the last position.
// The control word is broadcast; the mode only decides which PEs are enabled
// and whether the row buses and the chain are active.
// The sizes and the two modes follow the paper (Table 3, Figs. 12 and 13);
// the snake order of the chain is read off Fig. 13; the skew, the drain
// direction (down into the bus that the figure draws between the last row
// and the 1D array) and the row-bus protocol are this design's choices.
// The block diagram also ties the east end of each row to a return bus to
// the global buffer; that path is not built (the last column's east links
// end here), so results leave the array only through the bottom row.
module pe_array_2d
  import mambalaya_pkg::*;
#(
  parameter int unsigned ROWS    = 48,
  parameter int unsigned COLS    = 256,
  parameter int unsigned ROWS_1D = 32
) (
  input  logic        clk,
  input  logic        rst_n,
  input  array_mode_e mode,
  input  pe_ctrl_t    ctl,
  // 2D-mode edges
  input  logic        west_valid,
  input  data_t       west_line  [ROWS],
  input  logic        north_valid,
  input  data_t       north_line [COLS],
  output data_t       south_line [COLS],
  // 1D-mode row buses and chain
  input  logic [$clog2(ROWS)-1:0] bus_row,
  input  data_t       bus_line   [COLS],
  output data_t       rf_line    [COLS],
  input  data_t       chain_in_head,
  output data_t       chain_tail
);

  data_t west_sk  [ROWS];
  data_t north_sk [COLS];

  skew_line #(.LANES(ROWS)) u_skew_w (
    .clk(clk), .rst_n(rst_n), .in_valid(west_valid && mode == MODE_2D),
    .in_line(west_line), .out_line(west_sk));
  skew_line #(.LANES(COLS)) u_skew_n (
    .clk(clk), .rst_n(rst_n), .in_valid(north_valid && mode == MODE_2D),
    .in_line(north_line), .out_line(north_sk));

  data_t e_out  [ROWS][COLS];
  data_t s_out  [ROWS][COLS];
  data_t ch_out [ROWS][COLS];
  data_t rf_o   [ROWS][COLS];

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    for (genvar c = 0; c < COLS; c++) begin : g_col
      data_t w_in, n_in, ch_in;
      logic  en;
      data_t res_unused;
      logic  resv_unused;

      assign w_in = (c == 0) ? west_sk[r]  : e_out[r][c-1];
      assign n_in = (r == 0) ? north_sk[c] : s_out[r-1][c];

      // predecessor on the snake-shaped 1D chain
      if (r == 0 && c == 0) begin : g_head
        assign ch_in = chain_in_head;
      end else if (r % 2 == 0) begin : g_even
        if (c == 0) begin : g_turn
          assign ch_in = ch_out[r-1][0];
        end else begin : g_run
          assign ch_in = ch_out[r][c-1];
        end
      end else begin : g_odd
        if (c == COLS - 1) begin : g_turn
          assign ch_in = ch_out[r-1][COLS-1];
        end else begin : g_run
          assign ch_in = ch_out[r][c+1];
        end
      end

      assign en = (mode == MODE_2D) || (r < ROWS_1D);

      pe u_pe (
        .clk      (clk),
        .rst_n    (rst_n),
        .en       (en),
        .ctl      (ctl),
        .west_in  (w_in),
        .north_in (n_in),
        .chain_in (ch_in),
        .bus_in   (bus_line[c]),
        .bus_sel  (mode == MODE_1D && bus_row == r),
        .east_out (e_out[r][c]),
        .south_out(s_out[r][c]),
        .chain_out(ch_out[r][c]),
        .rf_out   (rf_o[r][c]),
        .res_out  (res_unused),
        .res_valid(resv_unused)
      );
    end
  end

  for (genvar c = 0; c < COLS; c++) begin : g_bottom
    assign south_line[c] = s_out[ROWS-1][c];
    assign rf_line[c]    = rf_o[bus_row][c];
  end

  localparam int unsigned LAST_R = (ROWS_1D > 0) ? ROWS_1D - 1 : 0;
  assign chain_tail = (LAST_R % 2 == 0) ? ch_out[LAST_R][COLS-1] : ch_out[LAST_R][0];

  initial assert (ROWS_1D >= 1 && ROWS_1D <= ROWS) else $error("ROWS_1D out of range");

endmodule
