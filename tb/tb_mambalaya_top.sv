// tb_mambalaya_top: end-to-end test of the accelerator through its command
// interface and the global buffer's external port.
//
// Parameters ROWS/COLS/ROWS_1D/GB_LINES of the top can be overridden with
// the same-named parameters of this testbench (defaults: 4 x 4 array, 2-row
// 1D mode, 256 lines). The test preloads the buffer, then runs:
//   1. a plain GEMM (both operands from the buffer) and a drain to the buffer;
//   2. an elementwise ReLU on the accumulators in 2D mode and a drain whose
//      rows pass through the 1D array (x 2.0) on the way to the buffer;
//   3. a fused GEMM whose north operand is produced by the 1D array
//      (x 0.5) and broadcast into the first row of the 2D array;
//   4. in 1D mode: row-bus loads, an elementwise square (PX = LEX * LEX),
//      a chain step adding each PE's predecessor, and row-bus stores;
//   4b. in 1D mode, softplus as a fused group (exp, add 1.0, log) on the
//      register files, compared with ln(1 + e^x);
//   5. a stream of lines through the 1D array (SiLU) into the buffer.
// All results are read back through the external port and compared with
// integer / real reference values; each command's cycle count is compared
// with the sequencer's documented timing. Mechanisms counted (each must
// occur): mode switches 2D->1D and 1D->2D, fused GEMM broadcast, drain
// through the 1D array, 1D-mode row-bus loads and stores, chain steps,
// 1D-array streaming.
module tb_mambalaya_top #(
  parameter int unsigned ROWS     = 4,
  parameter int unsigned COLS     = 4,
  parameter int unsigned ROWS_1D  = 2,
  parameter int unsigned GB_LINES = 256
);
  import mambalaya_pkg::*;

  localparam int AW = $clog2(GB_LINES), LW = COLS * DATA_W;
  localparam int K  = 6;
  localparam int S  = FU_STAGES;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  cmd_t          cmd;
  logic          cmd_valid, cmd_ready, done;
  array_mode_e   mode;
  logic          mode_switch;
  logic          ext_re, ext_we;
  logic [AW-1:0] ext_raddr, ext_waddr;
  logic [LW-1:0] ext_rdata, ext_wdata;
  data_t         chain_tail;

  mambalaya_top #(.ROWS(ROWS), .COLS(COLS), .ROWS_1D(ROWS_1D), .GB_LINES(GB_LINES)) dut (.*);

  int checks = 0, failures = 0;
  int n_to1d = 0, n_to2d = 0, n_drain1a = 0, n_load1d = 0, n_store1d = 0,
      n_chain = 0, n_stream = 0, n_softplus = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  always @(posedge clk) if (rst_n && mode_switch) begin
    if (mode == MODE_1D) n_to1d++; else n_to2d++;
  end

  task automatic expect_eq(input string what, input longint got, input longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 30) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  task automatic step();
    @(posedge clk);
    #1;
  endtask

  // ---- buffer access through the external port ----------------------------------
  task automatic gb_write(input int addr, input data_t w [COLS]);
    ext_we = 1; ext_waddr = AW'(addr);
    for (int c = 0; c < COLS; c++) ext_wdata[c*DATA_W +: DATA_W] = w[c];
    step();
    ext_we = 0;
  endtask

  task automatic gb_read(input int addr, output data_t w [COLS]);
    ext_re = 1; ext_raddr = AW'(addr);
    step();
    ext_re = 0;
    for (int c = 0; c < COLS; c++) w[c] = data_t'(ext_rdata[c*DATA_W +: DATA_W]);
  endtask

  // ---- commands -------------------------------------------------------------------
  function automatic cmd_t blank();
    cmd_t c;
    c = '0;
    c.op = OP_NOP; c.src_a = SRC_NORTH; c.src_b = SRC_IMM; c.wb = WB_NONE;
    return c;
  endfunction

  task automatic run(input cmd_t c, input longint exp_cycles, input string name);
    longint t0;
    while (!cmd_ready) step();
    cmd = c; cmd_valid = 1;
    t0 = cyc;
    step();
    cmd_valid = 0;
    while (!done) step();
    expect_eq({name, " cycles"}, cyc - t0, exp_cycles);
  endtask

  function automatic longint clampq(input longint v);
    if (v > 32767) return 32767;
    if (v < -32768) return -32768;
    return v;
  endfunction

  data_t A [K][COLS];
  data_t B [K][COLS];
  data_t Bh [K][COLS];
  longint Cref [ROWS][COLS];
  data_t line [COLS];

  task automatic gemm_ref(input bit halve);
    foreach (Cref[r, c]) Cref[r][c] = 0;
    for (int k = 0; k < K; k++)
      for (int r = 0; r < ROWS; r++)
        for (int c = 0; c < COLS; c++)
          Cref[r][c] = clampq(Cref[r][c] + clampq((longint'(A[k][r]) *
                       longint'(halve ? Bh[k][c] : B[k][c])) >>> 8));
  endtask

  initial begin
    cmd_t c;
    cmd = '0; cmd_valid = 0; ext_re = 0; ext_we = 0; ext_raddr = 0; ext_waddr = 0; ext_wdata = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;

    // ---- preload: A at lines 0.., B at 16.. ------------------------------------------
    for (int k = 0; k < K; k++) begin
      for (int i = 0; i < COLS; i++) begin
        A[k][i] = data_t'($signed($urandom_range(0, 511)) - 256);
        B[k][i] = data_t'($signed($urandom_range(0, 511)) - 256);
        Bh[k][i] = data_t'(clampq((longint'(B[k][i]) * 128) >>> 8));
      end
      gb_write(k, A[k]);
      gb_write(16 + k, B[k]);
    end

    // ---- 1. GEMM + drain --------------------------------------------------------------
    c = blank(); c.kind = CMD_GEMM; c.addr_a = 0; c.addr_b = 16; c.len = K;
    run(c, K + ROWS + COLS + S + 1, "GEMM");
    c = blank(); c.kind = CMD_DRAIN; c.addr_b = 64;
    run(c, ROWS + 2, "DRAIN");
    gemm_ref(0);
    for (int r = 0; r < ROWS; r++) begin
      gb_read(64 + r, line);
      for (int j = 0; j < COLS; j++) expect_eq($sformatf("GEMM C[%0d][%0d]", r, j), line[j], Cref[r][j]);
    end

    // ---- 2. ReLU in 2D mode, drain through the 1D array (x 2.0) ----------------------------
    c = blank(); c.kind = CMD_EW2D; c.op = OP_MAX; c.src_a = SRC_ACC; c.src_b = SRC_IMM; c.imm = 0; c.wb = WB_ACC;
    run(c, S + 3, "EW2D");
    c = blank(); c.kind = CMD_DRAIN; c.via_1d = 1; c.op = OP_MUL; c.src_b = SRC_IMM; c.imm = 16'sd512; c.addr_b = 80;
    run(c, ROWS + S + 3, "DRAIN via 1D array");
    n_drain1a++;
    for (int r = 0; r < ROWS; r++) begin
      gb_read(80 + r, line);
      for (int j = 0; j < COLS; j++)
        expect_eq("relu then x2", line[j], clampq(2 * (Cref[r][j] > 0 ? Cref[r][j] : 0)));
    end

    // ---- 3. fused GEMM: north = 1D array (B x 0.5) broadcast into row 0 -------------------
    c = blank(); c.kind = CMD_GEMM; c.via_1d = 1; c.op = OP_MUL; c.src_a = SRC_NORTH; c.src_b = SRC_IMM;
    c.imm = 16'sd128; c.addr_a = 0; c.addr_b = 16; c.len = K;
    run(c, K + (S + 1) + ROWS + COLS + S + 1, "fused GEMM");
    c = blank(); c.kind = CMD_DRAIN; c.addr_b = 96;
    run(c, ROWS + 2, "DRAIN");
    gemm_ref(1);
    for (int r = 0; r < ROWS; r++) begin
      gb_read(96 + r, line);
      for (int j = 0; j < COLS; j++) expect_eq("fused GEMM", line[j], Cref[r][j]);
    end

    // ---- 4. 1D mode on the 2D array ----------------------------------------------------------
    for (int r = 0; r < ROWS_1D; r++) begin
      for (int j = 0; j < COLS; j++) line[j] = data_t'(r * 40 + j * 7 - 30);
      gb_write(40 + r, line);
    end
    c = blank(); c.kind = CMD_LOAD1D; c.addr_a = 40; c.len = 16'(ROWS_1D); c.row = 0; c.rd = 1;
    run(c, ROWS_1D + 2, "LOAD1D");
    n_load1d++;
    c = blank(); c.kind = CMD_EW1D; c.op = OP_MUL; c.src_a = SRC_RF_A; c.src_b = SRC_RF_A; c.ra = 1; c.wb = WB_RF; c.rd = 2;
    run(c, S + 3, "EW1D");
    c = blank(); c.kind = CMD_CHAIN1D; c.ra = 1;
    run(c, 3, "CHAIN1D");
    n_chain++;
    c = blank(); c.kind = CMD_EW1D; c.op = OP_ADD; c.src_a = SRC_CHAIN; c.src_b = SRC_RF_B; c.rb = 2; c.wb = WB_RF; c.rd = 3;
    run(c, S + 3, "EW1D chain add");
    c = blank(); c.kind = CMD_STORE1D; c.addr_b = 120; c.len = 16'(ROWS_1D); c.row = 0; c.ra = 3;
    run(c, ROWS_1D + 2, "STORE1D");
    n_store1d++;
    for (int r = 0; r < ROWS_1D; r++) begin
      gb_read(120 + r, line);
      for (int j = 0; j < COLS; j++) begin
        longint x, sq, pr;
        int pr_r, pr_c;
        x  = r * 40 + j * 7 - 30;
        sq = clampq((x * x) >>> 8);
        // predecessor on the snake: even rows come from the left, odd from the right
        if (r % 2 == 0) begin pr_r = (j == 0) ? r - 1 : r; pr_c = (j == 0) ? 0 : j - 1; end
        else begin pr_r = (j == COLS - 1) ? r - 1 : r; pr_c = (j == COLS - 1) ? COLS - 1 : j + 1; end
        pr = (pr_r < 0) ? 0 : pr_r * 40 + pr_c * 7 - 30;
        expect_eq($sformatf("1D square + chain r%0d c%0d", r, j), line[j], clampq(sq + pr));
      end
    end

    // ---- 4b. a fused elementwise group in 1D mode: softplus(x) = ln(1 + exp(x)) ------------
    // (the discretisation step of Mamba's selective scan), three operations
    // on the register files with no buffer traffic between them.
    for (int r = 0; r < ROWS_1D; r++) begin
      for (int j = 0; j < COLS; j++) line[j] = data_t'(((r * int'(COLS) + j) * 397) % 2048 - 1024);
      gb_write(60 + r, line);
    end
    c = blank(); c.kind = CMD_LOAD1D; c.addr_a = 60; c.len = 16'(ROWS_1D); c.row = 0; c.rd = 4;
    run(c, ROWS_1D + 2, "LOAD1D softplus");
    n_load1d++;
    c = blank(); c.kind = CMD_EW1D; c.op = OP_EXP; c.src_a = SRC_RF_A; c.ra = 4; c.wb = WB_RF; c.rd = 5;
    run(c, S + 3, "EW1D exp");
    c = blank(); c.kind = CMD_EW1D; c.op = OP_ADD; c.src_a = SRC_RF_A; c.src_b = SRC_IMM; c.imm = 16'sh0100;
    c.ra = 5; c.wb = WB_RF; c.rd = 5;
    run(c, S + 3, "EW1D add 1");
    c = blank(); c.kind = CMD_EW1D; c.op = OP_LOG; c.src_a = SRC_RF_A; c.ra = 5; c.wb = WB_RF; c.rd = 6;
    run(c, S + 3, "EW1D log");
    c = blank(); c.kind = CMD_STORE1D; c.addr_b = 160; c.len = 16'(ROWS_1D); c.row = 0; c.ra = 6;
    run(c, ROWS_1D + 2, "STORE1D softplus");
    n_store1d++;
    for (int r = 0; r < ROWS_1D; r++) begin
      gb_read(160 + r, line);
      for (int j = 0; j < COLS; j++) begin
        real xr, rv, gv;
        xr = real'(((r * int'(COLS) + j) * 397) % 2048 - 1024) / 256.0;
        rv = $ln(1.0 + $exp(xr));
        gv = real'(line[j]) / 256.0;
        checks++;
        n_softplus++;
        if (gv - rv > 0.04 || rv - gv > 0.04) begin
          failures++;
          $display("FAIL softplus %f -> %f (ref %f)", xr, gv, rv);
        end
      end
    end

    // ---- 5. stream through the 1D array: SiLU -------------------------------------------------
    for (int k = 0; k < 3; k++) begin
      for (int j = 0; j < COLS; j++) line[j] = data_t'(k * 300 + j * 50 - 600);
      gb_write(48 + k, line);
    end
    c = blank(); c.kind = CMD_STREAM1A; c.op = OP_SILU; c.src_a = SRC_NORTH; c.addr_a = 48; c.addr_b = 140; c.len = 3;
    run(c, 3 + S + 3, "STREAM1A");
    n_stream++;
    for (int k = 0; k < 3; k++) begin
      gb_read(140 + k, line);
      for (int j = 0; j < COLS; j++) begin
        real xr, rv, gv, tol;
        xr = real'(k * 300 + j * 50 - 600) / 256.0;
        rv = xr / (1.0 + $exp(-xr));
        gv = real'(line[j]) / 256.0;
        checks++;
        // sigmoid is good to 0.02, so SiLU to 0.02 |x|, plus rounding
        tol = 0.02 * (xr < 0.0 ? -xr : xr) + 0.02;
        if (gv - rv > tol || rv - gv > tol) begin
          failures++;
          $display("FAIL silu stream %f -> %f (ref %f)", xr, gv, rv);
        end
      end
    end

    // ---- back to 2D ---------------------------------------------------------------------------
    c = blank(); c.kind = CMD_GEMM; c.addr_a = 0; c.addr_b = 16; c.len = K;
    run(c, K + ROWS + COLS + S + 1, "GEMM again");

    // ---- mechanism coverage ---------------------------------------------------------------------
    $display("mechanisms: to1D=%0d to2D=%0d fusedcycles=%0d drain1A=%0d load1D=%0d store1D=%0d chain=%0d stream=%0d",
             n_to1d, n_to2d, n_fused_seen, n_drain1a, n_load1d, n_store1d, n_chain, n_stream);
    expect_eq("mode switch to 1D happened", n_to1d > 0, 1);
    expect_eq("mode switch to 2D happened", n_to2d > 0, 1);
    expect_eq("fused broadcast happened", n_fused_seen > 0, 1);
    expect_eq("drain through 1D array happened", n_drain1a > 0, 1);
    expect_eq("row-bus load happened", n_load1d > 0, 1);
    expect_eq("row-bus store happened", n_store1d > 0, 1);
    expect_eq("chain step happened", n_chain > 0, 1);
    expect_eq("1D array stream happened", n_stream > 0, 1);
    expect_eq("1D-mode softplus group happened", n_softplus > 0, 1);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // counts cycles in which the 1D array feeds the 2D array's first row
  int n_fused_seen = 0;
  always @(posedge clk) if (dut.north_from_1a && dut.res1a_valid) n_fused_seen++;

  initial begin
    repeat (20000 + 40 * (ROWS + COLS)) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
