// matrix_engine: the post-QRD part of a training engine.  From R_new (P x P,
// upper triangular) it computes M = R^-1 (R^-1)^T, the matrix the host
// multiplies with X^T Y to obtain the model parameters beta.
//
// R^-1 is computed with Heller's recursive-doubling scheme, which turns the
// triangular inverse into matrix-matrix products:
//   seed   Inv = diag(1/R[d][d])   (P sequential divisions)
//   level  for b = 1, 2, 4, ... < P: with B_b = the entries of R that lie in
//          the upper-right b x b block of each aligned 2b x 2b diagonal block,
//              T1  = Inv x B_b           (GEMM on the systolic array)
//              T2  = T1 x Inv            (GEMM)
//              Inv = Inv - T2            (one row per cycle)
//          which applies [A B; 0 C]^-1 = [A^-1, -A^-1 B C^-1; 0, C^-1] to all
//          blocks of size 2b at once.
//   final  M = Inv x Inv^T; the transpose unit is the operand path that
//          feeds Inv[c][k] in place of B[k][c].
// Each GEMM is tiled into S x S output tiles; a tile streams PP + 2S - 2
// skewed operand vectors through the systolic array (PP = P rounded up to a
// multiple of S) and is then written back in one cycle.
// Interface: rows of R are written with ld_valid/ld_idx/ld_row while idle;
// `start` runs the computation; `done` pulses when M can be read through the
// combinational port rd_idx/rd_row.  A zero diagonal entry gives a saturated
// reciprocal (R is then singular and the result meaningless).
// Follows the paper: Heller's algorithm, a systolic array with a transpose
// unit, R^-1 (R^-1)^T as the output.  Own choices: the doubling schedule,
// tile size, fixed point, and the transpose realised as swapped addressing.
// Lint notes: the divider's remainder dv_r is not needed; opA/opB take full
// int indices of which only the low bits address the arrays; rst_n feeds both
// the asynchronous flop reset and the assertions' `disable iff`
// (SYNCASYNCNET, harmless).
module matrix_engine
  import sia_pkg::*;
#(
  parameter int P = 96,
  parameter int S = 8,
  localparam int NT = (P + S - 1) / S,
  localparam int PP = NT * S,
  localparam int PA = $clog2(P)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            ld_valid,
  input  logic [PA-1:0]   ld_idx,
  input  fx_t  [P-1:0]    ld_row,
  input  logic            start,
  output logic            busy,
  output logic            done,
  input  logic [PA-1:0]   rd_idx,
  output fx_t  [P-1:0]    rd_row
);

  typedef enum logic [1:0] {OP_INV_R, OP_T1_INV, OP_INV_INVT} gemm_op_e;
  typedef enum logic [3:0] {S_IDLE, S_CLR, S_DIAG, S_DIAGW, S_GEMM, S_GWB, S_UPD, S_DONE} state_e;

  state_e   state;
  gemm_op_e op;

  fx_t Rb  [PP][PP];
  fx_t Inv [PP][PP];
  fx_t T1  [PP][PP];
  fx_t T2  [PP][PP];
  fx_t Mo  [PP][PP];

  int unsigned d, b, ti, tj, t, row;

  // diagonal reciprocal
  logic         dv_start, dv_busy, dv_done;
  logic [64:0]  dv_q;
  logic [63:0]  dv_r, dv_den;
  fx_t          diag_v, diag_r;

  always_comb begin
    diag_v = Rb[d][d];
    dv_den = (diag_v < 0) ? 64'(-diag_v) : 64'(diag_v);
    // 1/|r| saturates when |r| <= 2^-32 (one LSB) or r = 0
    diag_r = (dv_q[64:63] != 2'b00) ? fx_t'({1'b0, {63{1'b1}}}) : fx_t'(dv_q[63:0]);
  end

  udiv #(.NW(65), .DW(64)) u_div (
    .clk, .rst_n, .start(dv_start), .n(65'(1) << 64), .d(dv_den),
    .busy(dv_busy), .done(dv_done), .q(dv_q), .r(dv_r));

  assign dv_start = (state == S_DIAG);

  // operand fetch for the GEMMs (includes the masked R and the transpose)
  function automatic fx_t opA(gemm_op_e o, int unsigned x, int unsigned y);
    if (o == OP_T1_INV) return T1[x][y];
    return Inv[x][y];
  endfunction

  function automatic fx_t opB(gemm_op_e o, int unsigned x, int unsigned y, int unsigned bb);
    case (o)
      OP_INV_R:   return ((x / (2 * bb) == y / (2 * bb)) && (x / bb != y / bb)) ? Rb[x][y] : '0;
      OP_T1_INV:  return Inv[x][y];
      default:    return Inv[y][x];   // transpose unit
    endcase
  endfunction

  fx_t [S-1:0] a_in, b_in;
  acc_t        sa_acc [S][S];
  logic        sa_en, sa_clear;

  always_comb begin
    for (int r = 0; r < S; r++) begin
      int k;
      k = int'(t) - r;
      a_in[r] = (k >= 0 && k < PP) ? opA(op, ti * S + r, k) : '0;
    end
    for (int c = 0; c < S; c++) begin
      int k;
      k = int'(t) - c;
      b_in[c] = (k >= 0 && k < PP) ? opB(op, k, tj * S + c, b) : '0;
    end
    sa_en    = (state == S_GEMM);
    sa_clear = (state == S_GEMM) && (t == 0);
  end

  systolic_array #(.S(S)) u_sa (
    .clk, .rst_n, .clear(sa_clear), .en(sa_en), .a_in(a_in), .b_in(b_in), .acc(sa_acc));

  always_comb begin
    for (int c = 0; c < P; c++) rd_row[c] = Mo[rd_idx][c];
  end

  // datapath storage
  always_ff @(posedge clk) begin
    if (state == S_IDLE && ld_valid)
      for (int c = 0; c < PP; c++) Rb[ld_idx][c] <= (c < P) ? ld_row[c] : '0;
    if (state == S_CLR)
      for (int x = 0; x < PP; x++)
        for (int y = 0; y < PP; y++) begin
          Inv[x][y] <= '0;
          if (x >= P) Rb[x][y] <= '0;
        end
    if (state == S_DIAGW && dv_done)
      Inv[d][d] <= (diag_v < 0) ? -diag_r : diag_r;
    if (state == S_GWB)
      for (int r = 0; r < S; r++)
        for (int c = 0; c < S; c++) begin
          fx_t v;
          v = fx_t'(sa_acc[r][c] >>> FRAC);
          case (op)
            OP_INV_R:  T1[ti * S + r][tj * S + c] <= v;
            OP_T1_INV: T2[ti * S + r][tj * S + c] <= v;
            default:   Mo[ti * S + r][tj * S + c] <= v;
          endcase
        end
    if (state == S_UPD)
      for (int y = 0; y < PP; y++) Inv[row][y] <= Inv[row][y] - T2[row][y];
  end

  // control
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; op <= OP_INV_R; d <= 0; b <= 1; ti <= 0; tj <= 0; t <= 0; row <= 0;
      done <= 1'b0;
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          d <= 0;
          state <= S_CLR;
        end
        S_CLR:  state <= S_DIAG;
        S_DIAG: state <= S_DIAGW;
        S_DIAGW: if (dv_done) begin
          if (d + 1 < P) begin
            d <= d + 1;
            state <= S_DIAG;
          end else begin
            b <= 1;
            ti <= 0; tj <= 0; t <= 0;
            op <= (P > 1) ? OP_INV_R : OP_INV_INVT;
            state <= S_GEMM;
          end
        end
        S_GEMM: begin
          if (t == PP + 2 * S - 2) state <= S_GWB;
          t <= t + 1;
        end
        S_GWB: begin
          t <= 0;
          if (tj + 1 < NT) begin
            tj <= tj + 1;
            state <= S_GEMM;
          end else if (ti + 1 < NT) begin
            tj <= 0; ti <= ti + 1;
            state <= S_GEMM;
          end else begin
            ti <= 0; tj <= 0;
            case (op)
              OP_INV_R:  begin op <= OP_T1_INV; state <= S_GEMM; end
              OP_T1_INV: begin row <= 0; state <= S_UPD; end
              default:   begin done <= 1'b1; state <= S_IDLE; end
            endcase
          end
        end
        S_UPD: begin
          if (row + 1 < PP) row <= row + 1;
          else begin
            row <= 0;
            b   <= 2 * b;
            op  <= (2 * b < P) ? OP_INV_R : OP_INV_INVT;
            state <= S_GEMM;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);

  // The divider is only started when idle.
  assert property (@(posedge clk) disable iff (!rst_n) dv_start |-> !dv_busy);

endmodule
