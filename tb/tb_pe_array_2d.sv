// tb_pe_array_2d: checks the reconfigurable 2D array at 5 x 6 with a
// 2-row 1D mode.
//
// 2D mode: a K = 9 output-stationary GEMM through the skewed edges, read
// out through the drain (last row first, one row per cycle) and compared
// with an integer reference; then one elementwise operation on every
// accumulator. 1D mode: row-bus loads into the two 1D rows, an elementwise
// multiply in every 1D-mode PE, read back over the row bus; rows outside
// the 1D region must stay idle; the snake-shaped chain must hand each PE
// the value of its predecessor (row 0 left to right, row 1 right to left).
module tb_pe_array_2d;
  import mambalaya_pkg::*;

  localparam int R = 5, C = 6, R1 = 2, K = 9;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  array_mode_e mode;
  pe_ctrl_t    ctl;
  logic        west_valid, north_valid;
  data_t       west_line [R];
  data_t       north_line [C];
  data_t       south_line [C];
  logic [$clog2(R)-1:0] bus_row;
  data_t       bus_line [C];
  data_t       rf_line [C];
  data_t       chain_in_head, chain_tail;

  pe_array_2d #(.ROWS(R), .COLS(C), .ROWS_1D(R1)) dut (.*);

  int checks = 0, failures = 0;
  int cycles;

  task automatic expect_eq(input string what, input longint got, input longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  task automatic step();
    @(posedge clk);
    #1;
  endtask

  data_t  A [K][R];
  data_t  B [K][C];
  longint Cref [R][C];

  initial begin
    mode = MODE_2D; ctl = PE_CTRL_IDLE; west_valid = 0; north_valid = 0;
    bus_row = 0; chain_in_head = 16'sd4242;
    foreach (west_line[i]) west_line[i] = 0;
    foreach (north_line[i]) north_line[i] = 0;
    foreach (bus_line[i]) bus_line[i] = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;

    // ---- GEMM ----------------------------------------------------------------
    foreach (Cref[r, c]) Cref[r][c] = 0;
    for (int k = 0; k < K; k++) begin
      for (int r = 0; r < R; r++) A[k][r] = data_t'($signed($urandom_range(0, 511)) - 256);
      for (int c = 0; c < C; c++) B[k][c] = data_t'($signed($urandom_range(0, 511)) - 256);
      for (int r = 0; r < R; r++)
        for (int c = 0; c < C; c++)
          Cref[r][c] += (longint'(A[k][r]) * longint'(B[k][c])) >>> 8;
    end
    ctl.valid = 1; ctl.op = OP_MACC; ctl.src_a = SRC_WEST; ctl.src_b = SRC_NORTH; ctl.wb = WB_ACCUM;
    for (int t = 0; t < K + R + C - 2; t++) begin
      ctl.acc_clr = (t == 0);
      west_valid = (t < K); north_valid = (t < K);
      for (int r = 0; r < R; r++) west_line[r] = (t < K) ? A[t][r] : 16'sd999;
      for (int c = 0; c < C; c++) north_line[c] = (t < K) ? B[t][c] : 16'sd999;
      step();
    end
    ctl = PE_CTRL_IDLE; west_valid = 0; north_valid = 0;
    repeat (FU_STAGES) step();
    ctl.drain_load = 1;
    step();
    ctl = PE_CTRL_IDLE;
    for (int j = 0; j < R; j++) begin
      for (int c = 0; c < C; c++) expect_eq($sformatf("C[%0d][%0d]", R-1-j, c), south_line[c], Cref[R-1-j][c]);
      step();
    end

    // ---- elementwise on the accumulators (2D mode): acc = max(acc, 0) -----------
    ctl.valid = 1; ctl.op = OP_MAX; ctl.src_a = SRC_ACC; ctl.src_b = SRC_IMM; ctl.imm = 0; ctl.wb = WB_ACC;
    step();
    ctl = PE_CTRL_IDLE;
    repeat (FU_STAGES) step();
    ctl.drain_load = 1;
    step();
    ctl = PE_CTRL_IDLE;
    for (int j = 0; j < R; j++) begin
      for (int c = 0; c < C; c++)
        expect_eq("relu(acc)", south_line[c], Cref[R-1-j][c] > 0 ? Cref[R-1-j][c] : 0);
      step();
    end

    // ---- 1D mode: row-bus loads -------------------------------------------------
    mode = MODE_1D;
    for (int r = 0; r < R; r++) begin          // rows >= R1 must ignore the bus
      bus_row = r[$clog2(R)-1:0];
      for (int c = 0; c < C; c++) bus_line[c] = data_t'(100 * r + c + 1);
      ctl = PE_CTRL_IDLE; ctl.bus_we = 1; ctl.rd = 3;
      step();
    end
    ctl = PE_CTRL_IDLE;
    // every 1D-mode PE: rf[4] = rf[3] * 2.0 ; also acc = 1.0 (checked below)
    ctl.valid = 1; ctl.op = OP_MUL; ctl.src_a = SRC_RF_A; ctl.src_b = SRC_IMM; ctl.ra = 3; ctl.imm = 16'sd512;
    ctl.wb = WB_RF; ctl.rd = 4;
    step();
    ctl.valid = 1; ctl.op = OP_PASS; ctl.src_a = SRC_IMM; ctl.imm = 16'sd256; ctl.wb = WB_ACC;
    step();
    ctl = PE_CTRL_IDLE;
    repeat (FU_STAGES) step();
    for (int r = 0; r < R; r++) begin
      bus_row = r[$clog2(R)-1:0]; ctl.ra = 4;
      #1;
      for (int c = 0; c < C; c++)
        expect_eq($sformatf("1D rf[4] row %0d col %0d", r, c), rf_line[c], (r < R1) ? 2 * (100 * r + c + 1) : 0);
    end

    // ---- chain ------------------------------------------------------------------
    ctl = PE_CTRL_IDLE; ctl.chain_load = 1; ctl.ra = 3;
    step();
    ctl = PE_CTRL_IDLE;
    expect_eq("chain tail = rf[3] of PE (1,0)", chain_tail, 101);
    ctl.valid = 1; ctl.op = OP_PASS; ctl.src_a = SRC_CHAIN; ctl.wb = WB_RF; ctl.rd = 5;
    step();
    ctl = PE_CTRL_IDLE;
    repeat (FU_STAGES) step();
    ctl.ra = 5;
    bus_row = 0;
    #1;
    for (int c = 0; c < C; c++) expect_eq("chain row 0", rf_line[c], (c == 0) ? 4242 : c);      // (0,c-1)
    bus_row = 1;
    #1;
    for (int c = 0; c < C; c++) expect_eq("chain row 1", rf_line[c], (c == C-1) ? C : 100 + c + 2); // (1,c+1) / (0,C-1)

    // ---- back to 2D: only the 1D rows got acc = 1.0 --------------------------------
    mode = MODE_2D;
    ctl = PE_CTRL_IDLE; ctl.drain_load = 1;
    step();
    ctl = PE_CTRL_IDLE;
    for (int j = 0; j < R; j++) begin
      int r;
      r = R - 1 - j;
      for (int c = 0; c < C; c++)
        expect_eq("1D mode leaves other rows idle", south_line[c],
                  (r < R1) ? 256 : (Cref[r][c] > 0 ? Cref[r][c] : 0));
      step();
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
