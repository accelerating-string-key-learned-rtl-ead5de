// training_engine: one Training Engine (TE).  It takes the new key rows
// X_delta of one model and the model's memoized R_old from its scratchpad and
// produces (a) R_new, left in the scratchpad for the DMA to write back as the
// next R_old, and (b) M = R_new^-1 R_new^-T, readable by the host.
//
// Flow: QRD (qrd_unit: tiles of X_delta -> R_delta -> memoized fold with
// R_old, or plain R in cold mode) -> load R_new into the matrix engine, one
// row per cycle from scratchpad port A -> matrix engine (Heller inverse and
// GEMMs) -> `done` pulse.
// Interface: `start` with `mode` and `n_rows`; the DMA side reaches the
// scratchpad through the ext_* port (synchronous read, data next cycle;
// X_delta at word 0.., R_old/R_new at word XROWS..XROWS+P-1); M is read
// combinationally through m_rd_idx/m_rd_row once `done` has pulsed.
// Follows the paper's TE (scratchpad, QRD unit, systolic array, transpose
// unit).  Own choices: the port split of the scratchpad and the sequencing.
// Lint note: rst_n feeds both the asynchronous flop reset and the
// assertions' `disable iff` (SYNCASYNCNET, harmless).
module training_engine
  import sia_pkg::*;
#(
  parameter int P       = 96,
  parameter int NUM_PU  = 2,
  parameter int LANES   = 4,
  parameter int N_INNER = 8,
  parameter int SA_DIM  = 8,
  parameter int XROWS   = 768,
  localparam int ROWS   = 2 * P,
  localparam int NSLOT  = (XROWS + ROWS - 1) / ROWS,
  localparam int DEPTH  = XROWS + P + NSLOT * P,
  localparam int AA     = $clog2(DEPTH),
  localparam int PA     = $clog2(P),
  localparam int NA     = $clog2(XROWS + 1)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  train_mode_e     mode,
  input  logic [NA-1:0]   n_rows,
  output logic            busy,
  output logic            done,
  input  logic            ext_re,
  input  logic            ext_we,
  input  logic [AA-1:0]   ext_addr,
  input  fx_t  [P-1:0]    ext_wdata,
  output fx_t  [P-1:0]    ext_rdata,
  input  logic [PA-1:0]   m_rd_idx,
  output fx_t  [P-1:0]    m_rd_row
);

  typedef enum logic [2:0] {S_IDLE, S_QRD, S_LOAD, S_LTAIL, S_ME, S_MEW} state_e;
  state_e state;

  logic            q_start, q_busy, q_done;
  logic            q_re, q_we;
  logic [AA-1:0]   q_addr;
  fx_t  [P-1:0]    q_wdata;
  logic            a_re, a_we;
  logic [AA-1:0]   a_addr;
  fx_t  [P-1:0]    a_wdata, a_rdata;
  logic            me_ld, me_start, me_busy, me_done;
  logic [PA-1:0]   me_ld_idx;
  int unsigned     r;

  qrd_unit #(.P(P), .NUM_PU(NUM_PU), .LANES(LANES), .N_INNER(N_INNER), .XROWS(XROWS)) u_qrd (
    .clk, .rst_n, .start(q_start), .mode, .n_rows, .busy(q_busy), .done(q_done),
    .sp_re(q_re), .sp_we(q_we), .sp_addr(q_addr), .sp_wdata(q_wdata), .sp_rdata(a_rdata));

  scratchpad #(.P(P), .XROWS(XROWS), .NSLOT(NSLOT)) u_sp (
    .clk, .a_re, .a_we, .a_addr, .a_wdata, .a_rdata,
    .b_re(ext_re), .b_we(ext_we), .b_addr(ext_addr), .b_wdata(ext_wdata), .b_rdata(ext_rdata));

  matrix_engine #(.P(P), .S(SA_DIM)) u_me (
    .clk, .rst_n, .ld_valid(me_ld), .ld_idx(me_ld_idx), .ld_row(a_rdata),
    .start(me_start), .busy(me_busy), .done(me_done), .rd_idx(m_rd_idx), .rd_row(m_rd_row));

  always_comb begin
    q_start  = (state == S_IDLE) && start;
    me_start = (state == S_ME);
    if (state == S_LOAD) begin
      a_re = 1'b1; a_we = 1'b0; a_addr = AA'(XROWS + r); a_wdata = '0;
    end else begin
      a_re = q_re; a_we = q_we; a_addr = q_addr; a_wdata = q_wdata;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; r <= 0; me_ld <= 1'b0; me_ld_idx <= '0; done <= 1'b0;
    end else begin
      done      <= 1'b0;
      me_ld     <= (state == S_LOAD);
      me_ld_idx <= PA'(r);
      case (state)
        S_IDLE:  if (start) state <= S_QRD;
        S_QRD:   if (q_done) begin r <= 0; state <= S_LOAD; end
        S_LOAD:  if (r + 1 == P) begin r <= 0; state <= S_LTAIL; end else r <= r + 1;
        S_LTAIL: state <= S_ME;
        S_ME:    state <= S_MEW;
        S_MEW:   if (me_done) begin done <= 1'b1; state <= S_IDLE; end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);

  // The QRD unit must be idle whenever the engine accepts a new job.
  assert property (@(posedge clk) disable iff (!rst_n) (state == S_IDLE && start) |-> !q_busy);

  assert property (@(posedge clk) disable iff (!rst_n) me_start |-> !me_busy);

endmodule
