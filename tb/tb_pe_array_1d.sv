// tb_pe_array_1d: checks the 1D array at 8 lanes.
//
// Streams 12 lines, one per cycle, through a multiply by an immediate and
// checks that each result line appears exactly FU_STAGES + 1 cycles after
// its input with res_valid; loads a line into the register files, runs
// SiLU from the register file, and checks the linear chain (lane i receives
// lane i-1's value, lane 0 receives zero).
module tb_pe_array_1d;
  import mambalaya_pkg::*;

  localparam int L = 8, N = 12;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  pe_ctrl_t ctl;
  data_t    in_line [L];
  data_t    res_line [L];
  logic     res_valid;
  data_t    rf_line [L];

  pe_array_1d #(.LANES(L)) dut (.*);

  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

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

  data_t lines [N][L];
  int    issue_cyc [N];
  int    n_out = 0;

  // result monitor for the streaming phase
  always @(negedge clk) if (rst_n && res_valid && n_out < N) begin
    expect_eq("stream latency", cyc - issue_cyc[n_out], FU_STAGES + 1);
    for (int i = 0; i < L; i++)
      expect_eq("stream x * 1.5", res_line[i], (longint'(lines[n_out][i]) * 384) >>> 8);
    n_out++;
  end

  initial begin
    ctl = PE_CTRL_IDLE;
    foreach (in_line[i]) in_line[i] = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;

    for (int k = 0; k < N; k++) begin
      for (int i = 0; i < L; i++) lines[k][i] = data_t'($signed($urandom_range(0, 4095)) - 2048);
      ctl = PE_CTRL_IDLE;
      ctl.valid = 1; ctl.op = OP_MUL; ctl.src_a = SRC_NORTH; ctl.src_b = SRC_IMM; ctl.imm = 16'sd384;
      in_line = lines[k];
      issue_cyc[k] = cyc;
      step();
    end
    ctl = PE_CTRL_IDLE;
    repeat (FU_STAGES + 3) step();
    expect_eq("all streamed lines came out", n_out, N);

    // load a line into rf[2], SiLU into rf[3]
    for (int i = 0; i < L; i++) in_line[i] = data_t'(i * 64 - 200);
    ctl.bus_we = 1; ctl.rd = 2;
    step();
    ctl = PE_CTRL_IDLE;
    ctl.valid = 1; ctl.op = OP_SILU; ctl.src_a = SRC_RF_A; ctl.ra = 2; ctl.wb = WB_RF; ctl.rd = 3;
    step();
    ctl = PE_CTRL_IDLE;
    repeat (FU_STAGES) step();
    ctl.ra = 3;
    #1;
    for (int i = 0; i < L; i++) begin
      real xr, got, ref_v;
      xr = real'(i * 64 - 200) / 256.0;
      ref_v = xr / (1.0 + $exp(-xr));
      got = real'(rf_line[i]) / 256.0;
      checks++;
      if (got - ref_v > 0.03 || ref_v - got > 0.03) begin
        failures++;
        $display("FAIL silu lane %0d: %f vs %f", i, got, ref_v);
      end
    end

    // chain: rf[4] = chain_in, where chain registers hold rf[2]
    ctl = PE_CTRL_IDLE; ctl.chain_load = 1; ctl.ra = 2;
    step();
    ctl = PE_CTRL_IDLE;
    ctl.valid = 1; ctl.op = OP_PASS; ctl.src_a = SRC_CHAIN; ctl.wb = WB_RF; ctl.rd = 4;
    step();
    ctl = PE_CTRL_IDLE;
    repeat (FU_STAGES) step();
    ctl.ra = 4;
    #1;
    for (int i = 0; i < L; i++) expect_eq("chain", rf_line[i], (i == 0) ? 0 : (i - 1) * 64 - 200);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
