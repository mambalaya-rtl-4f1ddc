// tb_nlfu: checks the non-linear function unit against real-valued math.
//
// Sweeps every 7th Q8.8 value over [-16, 8) (plus both range ends) through
// exp, sigmoid and SiLU and compares with $exp-based references: exp within
// 1 % + 2 LSB (or saturated to the largest value where the true result is
// out of range), sigmoid within 0.025, SiLU within 0.025 |x| + 2 LSB.
module tb_nlfu;
  import mambalaya_pkg::*;

  fu_op_e sel;
  data_t  x, y;
  int checks = 0, failures = 0;

  nlfu dut (.sel(sel), .x(x), .y(y));

  function automatic real to_r(input data_t v);
    return real'(v) / 256.0;
  endfunction

  task automatic check(input fu_op_e s, input data_t xv);
    real xr, ref_v, got, tol;
    sel = s; x = xv;
    #1;
    xr  = to_r(xv);
    got = to_r(y);
    unique case (s)
      OP_EXP: begin
        ref_v = $exp(xr);
        if (ref_v > 127.99) ref_v = 32767.0 / 256.0;
        tol = ref_v * 0.01 + 2.0 / 256.0;
      end
      OP_SIGMOID: begin
        ref_v = 1.0 / (1.0 + $exp(-xr));
        tol = 0.025;
      end
      default: begin
        ref_v = xr / (1.0 + $exp(-xr));
        tol = 0.025 * (xr < 0 ? -xr : xr) + 2.0 / 256.0;
      end
    endcase
    checks++;
    if ((got - ref_v) > tol || (ref_v - got) > tol) begin
      failures++;
      if (failures < 10) $display("FAIL %s x=%f got=%f ref=%f", s.name(), xr, got, ref_v);
    end
  endtask

  initial begin
    for (int v = -4096; v < 2048; v += 7) begin
      check(OP_EXP, data_t'(v));
      check(OP_SIGMOID, data_t'(v));
      check(OP_SILU, data_t'(v));
    end
    check(OP_EXP, DATA_MAX);    check(OP_EXP, DATA_MIN);
    check(OP_SIGMOID, DATA_MAX); check(OP_SIGMOID, DATA_MIN);
    check(OP_SILU, DATA_MAX);   check(OP_SILU, DATA_MIN);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
