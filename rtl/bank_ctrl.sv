// bank_ctrl: the control FSM of one bank.
//
// It accepts one in-cache instruction (valid/ready handshake, taken in the
// IDLE state) and then, one micro-step per clock cycle, drives the word-line
// addresses, latch enables, write-back mux and predication of the arrays it
// controls (all arrays of a bank execute the same step, SIMD fashion). The
// paper gives the algorithms and says each bank has such an FSM; the state
// encoding, the handshake and the exact step order are this design's own.
//
// Cycle counts (n = operand width; the cycles after acceptance):
//   ZERO, ONES, COPY, MOVE : n
//   ADD                    : n + 1  (n sum bits, then the carry into d[n])
//   REDUCE                 : 2n + 1 (move by 'shift' bit lines, then add)
//   MUL                    : n*n + 4n - 1  (2n to clear the product, then
//                            per multiplier bit: load tag, n predicated adds,
//                            and from the second bit on a carry store; the
//                            part after clearing is n*n + 2n - 1, 7 cycles
//                            for n = 2 as in the paper's multiplication
//                            example; the paper's total is n*n + 5n - 2, it
//                            does not list its initialisation steps)
//   MAX, MIN               : 3n + 3
//   RELU                   : n + 1
//
// Invariant: the carry latch is 0 between instructions (every step that
// leaves a carry behind ends with lat_rst), so an addition needs no extra
// clearing cycle.
//
// Zero-extension of a shorter b in ADD reads ZERO_ROW; inversion for
// MAX/MIN reads ONES_ROW (A&1 = A, ~A&~1 = 0, so A^B = ~A). Software must
// keep those two rows initialised (OP_ZERO / OP_ONES).
module bank_ctrl
  import nc_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   instr_valid,
  input  instr_t instr,
  output logic   instr_ready,
  output logic   busy,
  output actl_t  ctl
);

  typedef enum logic [4:0] {
    S_IDLE, S_ZERO, S_ONES, S_COPY, S_MOVE, S_ADD, S_STC,
    S_MZERO, S_MLDT, S_MADD, S_MSTC,
    S_XINV, S_XSETC, S_XADD, S_XSTC, S_XLDT, S_XCOPY,
    S_RLDT, S_RWR
  } state_e;

  state_e           st;
  instr_t           ir;
  logic [ROW_W-1:0] i, j;
  logic [ROW_W-1:0] n, nb, last;
  logic             is_max;

  assign n      = ROW_W'(ir.n);
  assign nb     = ROW_W'(ir.nb);
  assign last   = n - 1'b1;
  assign is_max = (ir.op == OP_MAX);
  assign instr_ready = (st == S_IDLE);
  assign busy        = (st != S_IDLE);

  // ------------------------------------------------ control word per step
  always_comb begin
    ctl = ACTL_IDLE;
    unique case (st)
      S_ZERO, S_MZERO: begin            // no row active: Sum = Cin = 0
        ctl.wen = 1'b1; ctl.row_w = ir.d + i; ctl.wsel = WS_SUM;
      end
      S_ONES: begin                     // no row active: Carry_out = 1
        ctl.wen = 1'b1; ctl.row_w = ir.d + i; ctl.wsel = WS_COUT;
      end
      S_COPY: begin                     // one row: Carry_out = A
        ctl.ren_a = 1'b1; ctl.row_a = ir.a + i;
        ctl.wen = 1'b1; ctl.row_w = ir.d + i; ctl.wsel = WS_COUT;
      end
      S_MOVE: begin
        ctl.ren_a = 1'b1; ctl.row_a = ir.a + i;
        ctl.wen = 1'b1; ctl.row_w = ir.d + i; ctl.wsel = WS_DIN;
        ctl.din_shift = 1'b1; ctl.shift = ir.shift;
      end
      S_ADD: begin
        ctl.ren_a = 1'b1; ctl.row_a = ir.a + i;
        ctl.ren_b = 1'b1; ctl.row_b = (i < nb) ? ir.b + i : ZERO_ROW;
        ctl.c_en = 1'b1;
        ctl.wen = 1'b1; ctl.row_w = ir.d + i; ctl.wsel = WS_SUM;
      end
      S_STC: begin                      // store carry, then clear latches
        ctl.wen = 1'b1; ctl.row_w = ir.d + n; ctl.wsel = WS_SUM;
        ctl.lat_rst = 1'b1;
      end
      S_MLDT: begin                     // tag <= multiplier bit j
        ctl.ren_a = 1'b1; ctl.row_a = ir.b + j; ctl.t_en = 1'b1;
      end
      S_MADD: begin                     // d[j+i] += a[i] where tag = 1
        ctl.ren_a = 1'b1; ctl.row_a = ir.a + i;
        ctl.ren_b = 1'b1; ctl.row_b = ir.d + j + i;
        ctl.c_en = 1'b1; ctl.pred = 1'b1;
        ctl.wen = 1'b1; ctl.row_w = ir.d + j + i; ctl.wsel = WS_SUM;
      end
      S_MSTC: begin                     // d[j+n] <= carry where tag = 1
        ctl.wen = 1'b1; ctl.row_w = ir.d + j + n; ctl.wsel = WS_SUM;
        ctl.pred = 1'b1; ctl.lat_rst = 1'b1;
      end
      S_XINV: begin                     // d[i] <= ~x[i]
        ctl.ren_a = 1'b1; ctl.row_a = (is_max ? ir.a : ir.b) + i;
        ctl.ren_b = 1'b1; ctl.row_b = ONES_ROW;
        ctl.wen = 1'b1; ctl.row_w = ir.d + i; ctl.wsel = WS_SUM;
      end
      S_XSETC: begin                    // no row active: carry <= 1
        ctl.c_en = 1'b1;
      end
      S_XADD: begin                     // d[i] <= y[i] + d[i] + carry
        ctl.ren_a = 1'b1; ctl.row_a = (is_max ? ir.b : ir.a) + i;
        ctl.ren_b = 1'b1; ctl.row_b = ir.d + i;
        ctl.c_en = 1'b1;
        ctl.wen = 1'b1; ctl.row_w = ir.d + i; ctl.wsel = WS_SUM;
      end
      S_XSTC: begin
        ctl.wen = 1'b1; ctl.row_w = ir.d + n; ctl.wsel = WS_SUM;
        ctl.lat_rst = 1'b1;
      end
      S_XLDT: begin                     // tag <= no-borrow bit
        ctl.ren_a = 1'b1; ctl.row_a = ir.d + n; ctl.t_en = 1'b1;
      end
      S_XCOPY: begin                    // a[i] <= b[i] where tag = 1
        ctl.ren_a = 1'b1; ctl.row_a = ir.b + i;
        ctl.wen = 1'b1; ctl.row_w = ir.a + i; ctl.wsel = WS_COUT;
        ctl.pred = 1'b1;
      end
      S_RLDT: begin                     // tag <= sign bit
        ctl.ren_a = 1'b1; ctl.row_a = ir.a + last; ctl.t_en = 1'b1;
      end
      S_RWR: begin                      // a[i] <= 0 where negative
        ctl.wen = 1'b1; ctl.row_w = ir.a + i; ctl.wsel = WS_SUM;
        ctl.pred = 1'b1;
      end
      default: ;
    endcase
  end

  // ------------------------------------------------------------ sequencing
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE;
      ir <= '0;
      i  <= '0;
      j  <= '0;
    end else begin
      unique case (st)
        S_IDLE: if (instr_valid) begin
          ir <= instr;
          i  <= '0;
          j  <= '0;
          unique case (instr.op)
            OP_ZERO:            st <= S_ZERO;
            OP_ONES:            st <= S_ONES;
            OP_COPY:            st <= S_COPY;
            OP_ADD:             st <= S_ADD;
            OP_MUL:             st <= S_MZERO;
            OP_MOVE, OP_REDUCE: st <= S_MOVE;
            OP_MAX, OP_MIN:     st <= S_XINV;
            OP_RELU:            st <= S_RLDT;
            default:            st <= S_IDLE;
          endcase
        end
        S_ZERO, S_ONES, S_COPY, S_RWR: begin
          i <= i + 1'b1;
          if (i == last) st <= S_IDLE;
        end
        S_MOVE: begin
          i <= i + 1'b1;
          if (i == last) begin
            if (ir.op == OP_REDUCE) begin  // second half: a <= a + moved
              ir.b  <= ir.d;
              ir.d  <= ir.a;
              ir.nb <= ir.n;
              i     <= '0;
              st    <= S_ADD;
            end else begin
              st <= S_IDLE;
            end
          end
        end
        S_ADD: begin
          i <= i + 1'b1;
          if (i == last) st <= S_STC;
        end
        S_STC: st <= S_IDLE;
        S_MZERO: begin
          i <= i + 1'b1;
          if (i == ROW_W'(2 * n - 1)) st <= S_MLDT;
        end
        S_MLDT: begin
          i  <= '0;
          st <= S_MADD;
        end
        S_MADD: begin
          i <= i + 1'b1;
          if (i == last) begin
            if (j == 0) begin           // first bit adds into zeros: no carry
              if (j == last) st <= S_IDLE;
              else begin j <= j + 1'b1; st <= S_MLDT; end
            end else begin
              st <= S_MSTC;
            end
          end
        end
        S_MSTC: begin
          if (j == last) st <= S_IDLE;
          else begin j <= j + 1'b1; st <= S_MLDT; end
        end
        S_XINV: begin
          i <= i + 1'b1;
          if (i == last) st <= S_XSETC;
        end
        S_XSETC: begin
          i  <= '0;
          st <= S_XADD;
        end
        S_XADD: begin
          i <= i + 1'b1;
          if (i == last) st <= S_XSTC;
        end
        S_XSTC: st <= S_XLDT;
        S_XLDT: begin
          i  <= '0;
          st <= S_XCOPY;
        end
        S_XCOPY: begin
          i <= i + 1'b1;
          if (i == last) st <= S_IDLE;
        end
        S_RLDT: begin
          i  <= '0;
          st <= S_RWR;
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  // An instruction needs at least one bit.
  a_width: assert property (@(posedge clk) disable iff (!rst_n)
    (instr_valid && instr_ready && instr.op != OP_NOP) |-> instr.n != 0);

endmodule
