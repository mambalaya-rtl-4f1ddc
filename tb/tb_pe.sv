// tb_pe: checks one processing element.
//
// Covers: the one-cycle store-and-forward links (east/south), an
// output-stationary multiply-accumulate of 40 random products read back
// through drain_load, the 6-cycle writeback into the register file and onto
// res_out, register-file loads from the row bus (only when the row is
// selected), the chain register, acc_clr and en = 0 (PE idle).
// Expected values come from integer reference arithmetic in the testbench.
module tb_pe;
  import mambalaya_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic     en;
  pe_ctrl_t ctl;
  data_t    west_in, north_in, chain_in, bus_in;
  logic     bus_sel;
  data_t    east_out, south_out, chain_out, rf_out, res_out;
  logic     res_valid;

  pe dut (.*);

  int checks = 0, failures = 0;

  task automatic expect_eq(input string what, input longint got, input longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  function automatic longint clampq(input longint v);
    if (v > 32767) return 32767;
    if (v < -32768) return -32768;
    return v;
  endfunction

  task automatic step();
    @(posedge clk);
    #1;
  endtask

  task automatic idle();
    ctl = PE_CTRL_IDLE;
  endtask

  initial begin
    longint acc_ref;
    data_t  e_hold;
    en = 1; idle(); west_in = 0; north_in = 0; chain_in = 0; bus_in = 0; bus_sel = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;

    // forwarding
    west_in = 16'sd123; north_in = -16'sd77;
    step();
    expect_eq("east forward", east_out, 123);
    expect_eq("south forward", south_out, -77);

    // MACC of 40 products, first issue clears the accumulator
    acc_ref = 0;
    for (int k = 0; k < 40; k++) begin
      data_t a, b;
      a = data_t'($signed($urandom_range(0, 1023)) - 512);
      b = data_t'($signed($urandom_range(0, 1023)) - 512);
      ctl = PE_CTRL_IDLE;
      ctl.valid = 1; ctl.op = OP_MACC; ctl.src_a = SRC_WEST; ctl.src_b = SRC_NORTH;
      ctl.wb = WB_ACCUM; ctl.acc_clr = (k == 0);
      west_in = a; north_in = b;
      acc_ref = clampq(acc_ref + clampq((longint'(a) * longint'(b)) >>> 8));
      step();
    end
    idle(); north_in = 0;
    repeat (6) step();
    ctl.drain_load = 1;
    step();
    idle();
    expect_eq("MACC result via drain", south_out, acc_ref);
    step();
    expect_eq("drain then forwards north", south_out, 0);

    // bus loads: only with bus_sel
    ctl.bus_we = 1; ctl.rd = 5; bus_in = 16'sd1000; bus_sel = 1;
    step();
    ctl.rd = 6; bus_in = 16'sd2000; bus_sel = 0;
    step();
    idle(); ctl.ra = 5;
    #1 expect_eq("rf[5] from bus", rf_out, 1000);
    ctl.ra = 6;
    #1 expect_eq("rf[6] not written without bus_sel", rf_out, 0);

    // rf[7] = rf[5] + imm, writeback and res_out timing
    ctl = PE_CTRL_IDLE;
    ctl.valid = 1; ctl.op = OP_ADD; ctl.src_a = SRC_RF_A; ctl.src_b = SRC_IMM;
    ctl.ra = 5; ctl.imm = 16'sd300; ctl.wb = WB_RF; ctl.rd = 7;
    step();
    idle(); ctl.ra = 7;
    for (int i = 1; i <= 7; i++) begin
      if (i == 6) expect_eq("rf[7] not before 6 cycles", rf_out, 0);
      if (i == 7) begin
        expect_eq("rf[7] = rf[5] + imm after 6 cycles", rf_out, 1300);
        expect_eq("res_valid", res_valid, 1);
        expect_eq("res_out", res_out, 1300);
      end
      if (i < 7) step();
    end

    // chain register
    ctl.chain_load = 1; ctl.ra = 7;
    step();
    idle();
    expect_eq("chain_out = rf[ra]", chain_out, 1300);
    // chain source: rf[8] = chain_in * rf[5] (chain_in = 2.0)
    chain_in = 16'sd512;
    ctl.valid = 1; ctl.op = OP_MUL; ctl.src_a = SRC_CHAIN; ctl.src_b = SRC_RF_A;
    ctl.ra = 5; ctl.wb = WB_RF; ctl.rd = 8;
    step();
    idle();
    repeat (6) step();
    ctl.ra = 8;
    #1 expect_eq("rf[8] = chain_in * rf[5]", rf_out, 2000);

    // accumulator write and clear
    ctl = PE_CTRL_IDLE;
    ctl.valid = 1; ctl.op = OP_EXP; ctl.src_a = SRC_IMM; ctl.imm = 0; ctl.wb = WB_ACC;
    step();
    idle();
    repeat (6) step();
    ctl.drain_load = 1;
    step();
    idle();
    expect_eq("acc = exp(0) = 1.0", south_out, 256);
    ctl.acc_clr = 1;
    step();
    idle(); ctl.drain_load = 1;
    step();
    idle();
    expect_eq("acc cleared", south_out, 0);

    // disabled PE: no issue, links hold
    e_hold = east_out;
    en = 0; west_in = 16'sd55;
    ctl.valid = 1; ctl.op = OP_PASS; ctl.src_a = SRC_WEST; ctl.wb = WB_RF; ctl.rd = 9;
    step();
    idle();
    expect_eq("disabled PE holds east link", east_out, e_hold);
    repeat (7) step();
    ctl.ra = 9;
    #1 expect_eq("disabled PE issues nothing", rf_out, 0);
    expect_eq("disabled PE no result", res_valid, 0);

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
