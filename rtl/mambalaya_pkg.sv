// mambalaya_pkg: types and constants shared by the Mambalaya accelerator RTL.
//
// Every datapath value is a 16-bit signed fixed-point number with 8 fraction
// bits (Q8.8). The accelerator evaluates the paper's Einsum cascade with
// elementwise, reduction and GEMM operations built from one small set of
// functional-unit operations (add, max, multiply, multiply-accumulate, the
// non-linear unit's SiLU / sigmoid / exp, and log), so everything above the
// functional unit only moves Q8.8 words around.
//
// What follows the paper: the 6-stage functional unit (FU_STAGES), the set of
// operations listed in its PE ("+, max, x, NLFU, log"), and the array sizes
// used as parameter defaults elsewhere (256x256 2D array, 32-row 1D mode,
// 256-PE 1D array, 32 MB global buffer). Own choices: the number format, the
// 32-word PE register file, the control word layout and the command set of
// the sequencer.
package mambalaya_pkg;

  // ---- number format -----------------------------------------------------
  localparam int unsigned DATA_W = 16;
  localparam int unsigned FRAC_W = 8;
  typedef logic signed [DATA_W-1:0] data_t;
  localparam data_t DATA_MAX = 16'sh7fff;
  localparam data_t DATA_MIN = -16'sh8000;

  // ---- processing element ------------------------------------------------
  localparam int unsigned FU_STAGES = 6;   // paper: 6-stage pipelined FU
  localparam int unsigned RF_DEPTH  = 32;  // words per PE register file
  localparam int unsigned RF_AW     = $clog2(RF_DEPTH);
  typedef logic [RF_AW-1:0] rf_addr_t;

  typedef enum logic [3:0] {
    OP_NOP     = 4'd0,
    OP_PASS    = 4'd1,   // a
    OP_ADD     = 4'd2,   // a + b (saturating)
    OP_MUL     = 4'd3,   // a * b (saturating)
    OP_MAX     = 4'd4,   // max(a, b)
    OP_MACC    = 4'd5,   // a * b, accumulated into the PE accumulator at writeback
    OP_EXP     = 4'd6,   // exp(a)
    OP_SILU    = 4'd7,   // a * sigmoid(a)
    OP_SIGMOID = 4'd8,   // sigmoid(a)
    OP_LOG     = 4'd9    // ln(a)
  } fu_op_e;

  // operand sources of a PE
  typedef enum logic [2:0] {
    SRC_WEST  = 3'd0,    // west neighbour / west edge (2D network)
    SRC_NORTH = 3'd1,    // north neighbour / north edge (2D network)
    SRC_ACC   = 3'd2,    // local accumulator
    SRC_RF_A  = 3'd3,    // register file word ra
    SRC_RF_B  = 3'd4,    // register file word rb
    SRC_CHAIN = 3'd5,    // previous PE on the linear chain (1D mode)
    SRC_IMM   = 3'd6,    // immediate broadcast with the control word
    SRC_BUS   = 3'd7     // global-buffer row bus (1D mode)
  } src_e;

  // where a functional-unit result goes FU_STAGES cycles after issue
  typedef enum logic [1:0] {
    WB_NONE  = 2'd0,     // result only visible on the PE result register
    WB_ACC   = 2'd1,     // acc  <= result
    WB_ACCUM = 2'd2,     // acc  <= acc + result
    WB_RF    = 2'd3      // rf[rd] <= result
  } wb_e;

  // control word broadcast each cycle to all enabled PEs of an array
  typedef struct packed {
    logic     valid;       // issue one FU operation this cycle
    fu_op_e   op;
    src_e     src_a;
    src_e     src_b;
    rf_addr_t ra;
    rf_addr_t rb;
    rf_addr_t rd;
    wb_e      wb;
    data_t    imm;
    logic     acc_clr;     // acc <= 0
    logic     drain_load;  // south link register <= acc (start of a drain)
    logic     chain_load;  // chain register <= rf[ra]
    logic     bus_we;      // rf[rd] <= bus word (only in the selected row)
  } pe_ctrl_t;

  localparam pe_ctrl_t PE_CTRL_IDLE = '{
    valid: 1'b0, op: OP_NOP, src_a: SRC_WEST, src_b: SRC_WEST,
    ra: '0, rb: '0, rd: '0, wb: WB_NONE, imm: '0,
    acc_clr: 1'b0, drain_load: 1'b0, chain_load: 1'b0, bus_we: 1'b0};

  // writeback tag carried down the FU pipeline
  typedef struct packed {
    wb_e      wb;
    rf_addr_t rd;
  } fu_tag_t;

  // ---- array modes -------------------------------------------------------
  typedef enum logic {
    MODE_2D = 1'b0,      // all PEs, store-and-forward 2D network
    MODE_1D = 1'b1       // first ROWS_1D rows, linear chain + row buses
  } array_mode_e;

  // ---- sequencer commands ------------------------------------------------
  typedef enum logic [2:0] {
    CMD_GEMM     = 3'd0, // 2D: acc[r][c] = sum_k west[k][r] * north[k][c]
    CMD_EW2D     = 3'd1, // 2D: one elementwise op in every PE
    CMD_DRAIN    = 3'd2, // 2D: shift accumulators out of the bottom row
    CMD_LOAD1D   = 3'd3, // 1D: global-buffer lines into row register files
    CMD_EW1D     = 3'd4, // 1D: one elementwise op in every 1D-mode PE
    CMD_STORE1D  = 3'd5, // 1D: row register-file words back to the buffer
    CMD_CHAIN1D  = 3'd6, // 1D: latch rf[ra] into the linear-chain registers
    CMD_STREAM1A = 3'd7  // 1D array: stream lines through one op
  } cmd_e;

  localparam int unsigned GB_AW = 16;       // line address width (65536 lines)
  typedef logic [GB_AW-1:0] gb_addr_t;

  typedef struct packed {
    cmd_e     kind;
    fu_op_e   op;        // FU op (EW2D/EW1D/STREAM1A; the 1D-array op of a fused GEMM or drain)
    src_e     src_a;
    src_e     src_b;
    rf_addr_t ra;
    rf_addr_t rb;
    rf_addr_t rd;
    wb_e      wb;
    data_t    imm;
    gb_addr_t addr_a;    // first source line
    gb_addr_t addr_b;    // second source line (GEMM north) or destination line
    logic [15:0] len;    // K of a GEMM, number of lines / rows otherwise
    logic [15:0] row;    // first row in 1D mode
    logic     via_1d;    // GEMM: north operand produced by the 1D array;
                         // DRAIN: drained rows pass through the 1D array
  } cmd_t;

  // ---- fixed-point helpers -----------------------------------------------
  function automatic data_t sat16(input logic signed [39:0] v);
    if (v > 40'sd32767)       return DATA_MAX;
    else if (v < -40'sd32768) return DATA_MIN;
    else                      return data_t'(v[15:0]);
  endfunction

  function automatic data_t fx_add(input data_t a, input data_t b);
    return sat16(40'(a) + 40'(b));
  endfunction

  function automatic data_t fx_mul(input data_t a, input data_t b);
    logic signed [39:0] p;
    p = 40'(a) * 40'(b);
    return sat16(p >>> FRAC_W);
  endfunction

endpackage
