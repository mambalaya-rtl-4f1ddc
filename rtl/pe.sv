// pe: processing element of the 2D array and of the 1D array.
//
// Every PE holds the paper's mix of high- and low-intensity hardware: a
// 6-stage functional unit (pe_fu: add, max, multiply / MACC, SiLU, sigmoid,
// exp, log), an accumulator for output-stationary GEMMs, and a 32-word
// register file that keeps intermediates of fused elementwise Einsums on the
// PE. Around it sit the links of the reconfigurable network:
//   * 2D mode, store and forward: east_out/south_out are the west/north
//     inputs registered for one cycle, so operands march one PE per cycle.
//     At the end of a GEMM, drain_load copies the accumulator into the south
//     register, and the same forwarding then shifts results down the column.
//   * 1D mode: chain_out (rf[ra] latched by chain_load) feeds the next PE on
//     the linear chain; bus_in/bus_we load rf[rd] straight from the global
//     buffer row bus.
// The same control word (pe_ctrl_t) is broadcast to every PE of an array;
// `en` turns a PE off (1D mode leaves the rows beyond the first 32 idle).
// Timing: an operation issued with ctl.valid in cycle t has its operands
// sampled in cycle t and its result written to acc / rf[rd] / res_out at the
// end of cycle t+6; rf_out and the operand muxes are combinational.
// The register file size and all link/control details are this design's own.
module pe
  import mambalaya_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  logic     en,
  input  pe_ctrl_t ctl,
  input  data_t    west_in,
  input  data_t    north_in,
  input  data_t    chain_in,
  input  data_t    bus_in,
  input  logic     bus_sel,     // this PE's row is selected on the row bus
  output data_t    east_out,
  output data_t    south_out,
  output data_t    chain_out,
  output data_t    rf_out,      // rf[ctl.ra]
  output data_t    res_out,     // last FU result
  output logic     res_valid
);

  data_t acc;
  data_t rf [RF_DEPTH];
  data_t east_q, south_q, chain_q;

  function automatic data_t pick(input src_e s, input data_t w, input data_t n,
                                 input data_t ac, input data_t ra_v, input data_t rb_v,
                                 input data_t ch, input data_t im, input data_t bu);
    unique case (s)
      SRC_WEST:  return w;
      SRC_NORTH: return n;
      SRC_ACC:   return ac;
      SRC_RF_A:  return ra_v;
      SRC_RF_B:  return rb_v;
      SRC_CHAIN: return ch;
      SRC_IMM:   return im;
      default:   return bu;
    endcase
  endfunction

  data_t   op_a, op_b;
  logic    fu_ov;
  data_t   fu_od;
  fu_tag_t fu_ot;

  assign op_a = pick(ctl.src_a, west_in, north_in, acc, rf[ctl.ra], rf[ctl.rb],
                     chain_in, ctl.imm, bus_in);
  assign op_b = pick(ctl.src_b, west_in, north_in, acc, rf[ctl.ra], rf[ctl.rb],
                     chain_in, ctl.imm, bus_in);

  pe_fu u_fu (
    .clk      (clk),
    .rst_n    (rst_n),
    .in_valid (en && ctl.valid),
    .op       (ctl.op),
    .a        (op_a),
    .b        (op_b),
    .in_tag   ('{wb: ctl.wb, rd: ctl.rd}),
    .out_valid(fu_ov),
    .out_data (fu_od),
    .out_tag  (fu_ot)
  );

  // accumulator: cleared at issue time, written at FU writeback
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) acc <= '0;
    else if (fu_ov && fu_ot.wb == WB_ACC)   acc <= fu_od;
    else if (fu_ov && fu_ot.wb == WB_ACCUM) acc <= fx_add(en && ctl.acc_clr ? '0 : acc, fu_od);
    else if (en && ctl.acc_clr)             acc <= '0;
  end

  // register file: FU writeback, then the row bus (the bus wins a tie)
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < RF_DEPTH; i++) rf[i] <= '0;
    end else begin
      if (fu_ov && fu_ot.wb == WB_RF) rf[fu_ot.rd] <= fu_od;
      if (en && ctl.bus_we && bus_sel) rf[ctl.rd] <= bus_in;
    end
  end

  // network registers
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      east_q  <= '0;
      south_q <= '0;
      chain_q <= '0;
    end else if (en) begin
      east_q  <= west_in;
      south_q <= ctl.drain_load ? acc : north_in;
      if (ctl.chain_load) chain_q <= rf[ctl.ra];
    end
  end

  // last result
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      res_out   <= '0;
      res_valid <= 1'b0;
    end else begin
      res_valid <= fu_ov;
      if (fu_ov) res_out <= fu_od;
    end
  end

  assign east_out  = east_q;
  assign south_out = south_q;
  assign chain_out = chain_q;
  assign rf_out    = rf[ctl.ra];

endmodule
