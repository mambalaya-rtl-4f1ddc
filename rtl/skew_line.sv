// skew_line: diagonal skew at an edge of the systolic 2D array.
//
// Lane i of the incoming line leaves i cycles after it arrived, so that
// operand k of row (or column) i meets its partner operand k in PE (r, c)
// at the same cycle after r + c hops. A lane whose line was not valid
// carries zero, which a multiply-accumulate ignores. Lane 0 is combinational.
// Own design detail: the paper states the store-and-forward network only.
module skew_line
  import mambalaya_pkg::*;
#(
  parameter int unsigned LANES = 256
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  data_t in_line  [LANES],
  output data_t out_line [LANES]
);

  for (genvar i = 0; i < LANES; i++) begin : g_lane
    data_t masked;
    assign masked = in_valid ? in_line[i] : '0;
    if (i == 0) begin : g_direct
      assign out_line[i] = masked;
    end else begin : g_delay
      data_t sr [i];
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          for (int j = 0; j < i; j++) sr[j] <= '0;
        end else begin
          sr[0] <= masked;
          for (int j = 1; j < i; j++) sr[j] <= sr[j-1];
        end
      end
      assign out_line[i] = sr[i-1];
    end
  end

endmodule
