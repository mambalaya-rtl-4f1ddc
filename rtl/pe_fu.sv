// pe_fu: the pipelined functional unit inside every processing element.
//
// One operation can be issued each cycle and its result leaves the pipeline
// exactly FU_STAGES (6) cycles later, as the paper states for its PEs. The
// unit offers the operations the paper lists for a PE: add, max, multiply
// (also as the product half of a multiply-accumulate), the non-linear unit's
// SiLU / sigmoid / exp, and log. A tag (writeback destination) travels with
// every operation so the PE knows where to put the result.
//
// Stage use (own choice, the paper gives only the depth): stage 1 registers
// the operands, stage 2 registers the computed result, stages 3 to 6 carry it
// down to the output register. Arithmetic is saturating Q8.8.
// Interface: in_valid/op/a/b/in_tag at issue; out_valid/out_data/out_tag
// FU_STAGES cycles later. Reset clears the valid bits only.
module pe_fu
  import mambalaya_pkg::*;
#(
  parameter int unsigned STAGES = FU_STAGES
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    in_valid,
  input  fu_op_e  op,
  input  data_t   a,
  input  data_t   b,
  input  fu_tag_t in_tag,
  output logic    out_valid,
  output data_t   out_data,
  output fu_tag_t out_tag
);

  // stage 1: operand registers
  logic    s1_v;
  fu_op_e  s1_op;
  data_t   s1_a, s1_b;
  fu_tag_t s1_tag;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) s1_v <= 1'b0;
    else        s1_v <= in_valid;
  end
  always_ff @(posedge clk) begin
    s1_op  <= op;
    s1_a   <= a;
    s1_b   <= b;
    s1_tag <= in_tag;
  end

  // stage 2: compute
  data_t nl_y, log_y, res;

  nlfu u_nlfu (.sel(s1_op), .x(s1_a), .y(nl_y));
  log_unit u_log (.x(s1_a), .y(log_y));

  always_comb begin
    unique case (s1_op)
      OP_PASS:                      res = s1_a;
      OP_ADD:                       res = fx_add(s1_a, s1_b);
      OP_MUL, OP_MACC:              res = fx_mul(s1_a, s1_b);
      OP_MAX:                       res = (s1_a > s1_b) ? s1_a : s1_b;
      OP_EXP, OP_SILU, OP_SIGMOID:  res = nl_y;
      OP_LOG:                       res = log_y;
      default:                      res = '0;
    endcase
  end

  // stages 2 .. STAGES: result registers
  logic    pv [2:STAGES];
  data_t   pd [2:STAGES];
  fu_tag_t pt [2:STAGES];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 2; s <= STAGES; s++) pv[s] <= 1'b0;
    end else begin
      pv[2] <= s1_v && (s1_op != OP_NOP);
      for (int s = 3; s <= STAGES; s++) pv[s] <= pv[s-1];
    end
  end
  always_ff @(posedge clk) begin
    pd[2] <= res;
    pt[2] <= s1_tag;
    for (int s = 3; s <= STAGES; s++) begin
      pd[s] <= pd[s-1];
      pt[s] <= pt[s-1];
    end
  end

  assign out_valid = pv[STAGES];
  assign out_data  = pd[STAGES];
  assign out_tag   = pt[STAGES];

  initial assert (STAGES >= 2) else $error("pe_fu needs at least 2 stages");

endmodule
