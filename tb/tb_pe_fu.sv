// tb_pe_fu: checks the 6-stage functional unit.
//
// Issues a random operation every cycle for 2000 cycles (with a few idle
// cycles) and checks that each result leaves exactly 6 cycles after issue,
// in order, one per cycle, with its tag. Add, multiply, MACC product, max and
// pass are compared bit-exactly with integer reference arithmetic (saturating
// Q8.8); exp, sigmoid, SiLU and log against real-valued math with tolerance.
module tb_pe_fu;
  import mambalaya_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic    in_valid;
  fu_op_e  op;
  data_t   a, b;
  fu_tag_t in_tag, out_tag;
  logic    out_valid;
  data_t   out_data;

  pe_fu dut (.*);

  typedef struct {
    longint cyc;
    fu_op_e op;
    data_t  a, b;
    fu_tag_t tag;
  } item_t;
  item_t q[$];

  int checks = 0, failures = 0;
  longint cyc = 0;

  function automatic longint clampq(input longint v);
    if (v > 32767) return 32767;
    if (v < -32768) return -32768;
    return v;
  endfunction

  function automatic longint ref_exact(input fu_op_e o, input data_t x, input data_t y);
    unique case (o)
      OP_PASS:         return x;
      OP_ADD:          return clampq(longint'(x) + longint'(y));
      OP_MUL, OP_MACC: return clampq((longint'(x) * longint'(y)) >>> 8);
      default:         return (x > y) ? x : y;    // OP_MAX
    endcase
  endfunction

  function automatic real ref_real(input fu_op_e o, input real x);
    unique case (o)
      OP_EXP:     return (x > 4.85) ? 127.99 : $exp(x);
      OP_SIGMOID: return 1.0 / (1.0 + $exp(-x));
      OP_SILU:    return x / (1.0 + $exp(-x));
      default:    return $ln(x);                  // OP_LOG
    endcase
  endfunction

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && out_valid) begin
      item_t it;
      checks++;
      if (q.size() == 0) begin
        failures++;
        $display("FAIL unexpected output");
      end else begin
        it = q.pop_front();
        if (cyc - it.cyc != 6 || out_tag != it.tag) begin
          failures++;
          if (failures < 10) $display("FAIL latency %0d tag %p/%p", cyc - it.cyc, out_tag, it.tag);
        end
        if (it.op inside {OP_PASS, OP_ADD, OP_MUL, OP_MACC, OP_MAX}) begin
          if (longint'(out_data) != ref_exact(it.op, it.a, it.b)) begin
            failures++;
            if (failures < 10) $display("FAIL %s %0d %0d -> %0d", it.op.name(), it.a, it.b, out_data);
          end
        end else begin
          real r, g, tol;
          r = ref_real(it.op, real'(it.a) / 256.0);
          g = real'(out_data) / 256.0;
          tol = (it.op == OP_EXP) ? r * 0.01 + 0.01 : (it.op == OP_SILU) ? 0.1 : 0.03;
          if (g - r > tol || r - g > tol) begin
            failures++;
            if (failures < 10) $display("FAIL %s %f -> %f (ref %f)", it.op.name(), real'(it.a) / 256.0, g, r);
          end
        end
      end
    end
  end

  initial begin
    fu_op_e ops[9] = '{OP_PASS, OP_ADD, OP_MUL, OP_MAX, OP_MACC, OP_EXP, OP_SILU, OP_SIGMOID, OP_LOG};
    in_valid = 0; op = OP_NOP; a = 0; b = 0; in_tag = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int i = 0; i < 2000; i++) begin
      #1;
      in_valid = ($urandom_range(0, 9) != 0);
      op = ops[$urandom_range(0, 8)];
      a = data_t'($urandom());
      b = data_t'($urandom());
      if (op inside {OP_EXP, OP_SILU, OP_SIGMOID}) a = data_t'($signed($urandom_range(0, 3000)) - 2000);
      if (op == OP_LOG) a = data_t'($urandom_range(1, 32767));
      in_tag = fu_tag_t'($urandom());
      if (in_valid) q.push_back('{cyc: cyc, op: op, a: a, b: b, tag: in_tag});
      @(posedge clk);
    end
    #1 in_valid = 0;
    repeat (10) @(posedge clk);
    checks++;
    if (q.size() != 0) begin
      failures++;
      $display("FAIL %0d results missing", q.size());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
