// mambalaya_ctrl: command sequencer of the accelerator.
//
// Takes one command (cmd_t) at a time over a valid/ready handshake and turns
// it into per-cycle control: the broadcast PE control words of the 2D array
// (ctl2d) and of the 1D array (ctl1a), global-buffer port strobes and
// addresses, edge valids and the data-path selects. `done` pulses for one
// cycle when a command has finished, results written.
//
// The array mode follows the paper's binding rule: GEMMs and the work that
// stays on the 2D array after a GEMM (CMD_GEMM, CMD_EW2D, CMD_DRAIN) run in
// 2D mode; fusion groups of only low-intensity Einsums (CMD_LOAD1D, CMD_EW1D,
// CMD_STORE1D, CMD_CHAIN1D) run in 1D mode; the separate 1D array
// (CMD_STREAM1A) leaves the mode as it is. mode_switch pulses when a command
// changes the mode. A fused GEMM (CMD_GEMM with via_1d) streams its north
// operand through one 1D-array operation, which is broadcast into the first
// row of the 2D array; the west operand is delayed by the 1D array's latency
// (FU_STAGES + 1) to meet it. A drain with via_1d sends the rows leaving the
// 2D array's last row through one 1D-array operation before they are stored.
//
// Command timings, in cycles from the clock edge that accepts the command to
// the first edge at which done is high (R = ROWS, C = COLS, S = FU_STAGES,
// D = S + 1 for a fused GEMM, else 0):
//   GEMM      K + D + R + C + S + 1     EW2D / EW1D       S + 3
//   DRAIN     R + 2 (via_1d: R + S + 3) LOAD1D / STORE1D  len + 2
//   CHAIN1D   3                         STREAM1A          len + S + 3
// CMD_STREAM1A with op OP_NOP loads line k into rf[rd + k] of the 1D array
// instead of computing; with wb WB_NONE its results go to the buffer at
// addr_b, addr_b + 1, ...
// The paper describes the modes and the binding but no controller; the
// command set and every timing here are this design's own.
module mambalaya_ctrl
  import mambalaya_pkg::*;
#(
  parameter int unsigned ROWS    = 48,
  parameter int unsigned COLS    = 256,
  parameter int unsigned AW      = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  input  cmd_t        cmd,
  input  logic        cmd_valid,
  output logic        cmd_ready,
  output logic        done,
  output array_mode_e mode,
  output logic        mode_switch,
  output pe_ctrl_t    ctl2d,
  output pe_ctrl_t    ctl1a,
  // global buffer: r0 west edge, r1 north edge / row bus, r2 1D array input
  output logic          r0_re, r1_re, r2_re,
  output logic [AW-1:0] r0_addr, r1_addr, r2_addr,
  // w0 drained rows / row-bus stores, w1 1D array results
  output logic          w0_we, w1_we,
  output logic [AW-1:0] w0_addr, w1_addr,
  output logic          w0_from_rf,     // w0 data: 1 = row-bus rf_line, 0 = 2D south line
  output logic          west_valid,
  output logic          north_valid,
  output logic          north_from_1a,  // north edge fed by the 1D array
  output logic          in1a_from_2d,   // 1D array input from the 2D last row
  output logic [$clog2(ROWS)-1:0] bus_row,
  input  logic          res1a_valid
);

  typedef enum logic [1:0] {S_IDLE, S_RUN} state_e;

  state_e      state;
  cmd_t        c;
  logic [31:0] cnt;
  logic [31:0] wr_idx;
  logic        r0_v, r1_v, r2_v;    // read data valid (one cycle after re)
  logic [31:0] last;                 // cnt value at which the command is done

  localparam int unsigned S  = FU_STAGES;
  localparam int unsigned RB = $clog2(ROWS);

  function automatic array_mode_e mode_of(input cmd_e k, input array_mode_e cur);
    unique case (k)
      CMD_GEMM, CMD_EW2D, CMD_DRAIN:                      return MODE_2D;
      CMD_LOAD1D, CMD_EW1D, CMD_STORE1D, CMD_CHAIN1D:     return MODE_1D;
      default:                                            return cur;
    endcase
  endfunction

  logic [31:0] d_fuse;
  assign d_fuse = c.via_1d ? 32'(S + 1) : 32'd0;

  always_comb begin
    unique case (c.kind)
      CMD_GEMM:     last = 32'(c.len) + d_fuse + 32'(ROWS + COLS + S) - 32'd1;
      CMD_EW2D,
      CMD_EW1D:     last = 32'(S + 1);
      CMD_DRAIN:    last = c.via_1d ? 32'(ROWS + S + 1) : 32'(ROWS);
      CMD_LOAD1D,
      CMD_STORE1D:  last = 32'(c.len);
      CMD_CHAIN1D:  last = 32'd1;
      default:      last = 32'(c.len) + 32'(S + 1);
    endcase
  end

  assign cmd_ready = (state == S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_IDLE;
      c           <= '0;
      cnt         <= '0;
      wr_idx      <= '0;
      mode        <= MODE_2D;
      mode_switch <= 1'b0;
      done        <= 1'b0;
      r0_v        <= 1'b0;
      r1_v        <= 1'b0;
      r2_v        <= 1'b0;
    end else begin
      done        <= 1'b0;
      mode_switch <= 1'b0;
      r0_v        <= r0_re;
      r1_v        <= r1_re;
      r2_v        <= r2_re;
      unique case (state)
        S_IDLE: if (cmd_valid) begin
          c      <= cmd;
          cnt    <= '0;
          wr_idx <= '0;
          state  <= S_RUN;
          if (mode_of(cmd.kind, mode) != mode) begin
            mode        <= mode_of(cmd.kind, mode);
            mode_switch <= 1'b1;
          end
        end
        default: begin
          if (w1_we) wr_idx <= wr_idx + 32'd1;
          if (cnt == last) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end else begin
            cnt <= cnt + 32'd1;
          end
        end
      endcase
    end
  end

  // ---- per-cycle outputs ------------------------------------------------------
  logic run;
  assign run = (state == S_RUN);

  always_comb begin
    ctl2d         = PE_CTRL_IDLE;
    ctl1a         = PE_CTRL_IDLE;
    r0_re         = 1'b0;  r0_addr = '0;
    r1_re         = 1'b0;  r1_addr = '0;
    r2_re         = 1'b0;  r2_addr = '0;
    w0_we         = 1'b0;  w0_addr = '0;
    w1_we         = 1'b0;  w1_addr = '0;
    w0_from_rf    = 1'b0;
    west_valid    = r0_v;
    north_valid   = r1_v;
    north_from_1a = 1'b0;
    in1a_from_2d  = 1'b0;
    bus_row       = '0;

    if (run) begin
      unique case (c.kind)
        CMD_GEMM: begin
          if (cnt < 32'(c.len) + d_fuse + 32'(ROWS + COLS) - 32'd1) begin
            ctl2d.valid = 1'b1;
            ctl2d.op    = OP_MACC;
            ctl2d.src_a = SRC_WEST;
            ctl2d.src_b = SRC_NORTH;
            ctl2d.wb    = WB_ACCUM;
          end
          ctl2d.acc_clr = (cnt == 0);
          r0_re   = (cnt >= d_fuse) && (cnt < 32'(c.len) + d_fuse);
          r0_addr = AW'(32'(c.addr_a) + cnt - d_fuse);
          if (c.via_1d) begin
            north_from_1a = 1'b1;
            north_valid   = res1a_valid;
            r2_re   = (cnt < 32'(c.len));
            r2_addr = AW'(32'(c.addr_b) + cnt);
            ctl1a.valid = r2_v;
            ctl1a.op    = c.op;
            ctl1a.src_a = c.src_a;
            ctl1a.src_b = c.src_b;
            ctl1a.ra    = c.ra;
            ctl1a.rb    = c.rb;
            ctl1a.imm   = c.imm;
            ctl1a.wb    = WB_NONE;
          end else begin
            r1_re   = (cnt < 32'(c.len));
            r1_addr = AW'(32'(c.addr_b) + cnt);
          end
        end

        CMD_EW2D, CMD_EW1D: begin
          if (cnt == 0) begin
            ctl2d.valid = 1'b1;
            ctl2d.op    = c.op;
            ctl2d.src_a = c.src_a;
            ctl2d.src_b = c.src_b;
            ctl2d.ra    = c.ra;
            ctl2d.rb    = c.rb;
            ctl2d.rd    = c.rd;
            ctl2d.wb    = c.wb;
            ctl2d.imm   = c.imm;
          end
        end

        CMD_DRAIN: begin
          ctl2d.drain_load = (cnt == 0);
          if (!c.via_1d) begin
            w0_we   = (cnt >= 1) && (cnt <= 32'(ROWS));
            w0_addr = AW'(32'(c.addr_b) + 32'(ROWS) - cnt);
          end else begin
            in1a_from_2d = 1'b1;
            ctl1a.valid  = (cnt >= 1) && (cnt <= 32'(ROWS));
            ctl1a.op     = c.op;
            ctl1a.src_a  = SRC_NORTH;
            ctl1a.src_b  = c.src_b;
            ctl1a.imm    = c.imm;
            ctl1a.wb     = WB_NONE;
            w1_we   = res1a_valid;
            w1_addr = AW'(32'(c.addr_b) + 32'(ROWS) - 32'd1 - wr_idx);
          end
        end

        CMD_LOAD1D: begin
          r1_re   = (cnt < 32'(c.len));
          r1_addr = AW'(32'(c.addr_a) + cnt);
          north_valid  = 1'b0;
          bus_row      = RB'(32'(c.row) + cnt - 32'd1);
          ctl2d.bus_we = r1_v;
          ctl2d.rd     = c.rd;
        end

        CMD_STORE1D: begin
          bus_row    = RB'(32'(c.row) + cnt);
          ctl2d.ra   = c.ra;
          w0_from_rf = 1'b1;
          w0_we      = (cnt < 32'(c.len));
          w0_addr    = AW'(32'(c.addr_b) + cnt);
        end

        CMD_CHAIN1D: begin
          ctl2d.chain_load = (cnt == 0);
          ctl2d.ra         = c.ra;
        end

        default: begin  // CMD_STREAM1A
          r2_re   = (cnt < 32'(c.len));
          r2_addr = AW'(32'(c.addr_a) + cnt);
          ctl1a.valid = r2_v;
          ctl1a.op    = c.op;
          ctl1a.src_a = c.src_a;
          ctl1a.src_b = c.src_b;
          ctl1a.ra    = c.ra;
          ctl1a.rb    = c.rb;
          ctl1a.rd    = c.rd;
          ctl1a.wb    = c.wb;
          ctl1a.imm   = c.imm;
          if (c.op == OP_NOP) begin     // load: line k into rf[rd + k]
            ctl1a.valid  = 1'b0;
            ctl1a.bus_we = r2_v;
            ctl1a.rd     = rf_addr_t'(32'(c.rd) + cnt - 32'd1);
          end
          w1_we   = res1a_valid && (c.wb == WB_NONE);
          w1_addr = AW'(32'(c.addr_b) + wr_idx);
        end
      endcase
    end
  end

  // an accepted command starts running; the mode never changes mid-command
  a_accept: assert property (@(posedge clk) disable iff (!rst_n)
    (cmd_valid && cmd_ready) |=> (state == S_RUN));
  a_mode_stable: assert property (@(posedge clk) disable iff (!rst_n)
    (state == S_RUN && $past(state == S_RUN)) |-> $stable(mode));

endmodule
