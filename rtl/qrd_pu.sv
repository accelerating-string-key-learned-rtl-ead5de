// qrd_pu: one Processing Unit of the QRD unit.  It holds one tile of up to
// ROWS x P elements in its matrix buffer and computes the P x P upper
// triangular factor R of that tile with Householder reflections.
//
// Structure (one PU of the QRD unit figure): matrix buffer (column-banked,
// LANES rows per word), one outer loop PE, N_INNER inner loop PEs, a
// reflector buffer, a scalar register (gamma as recip/lz/skip) and an R
// matrix buffer.  For every i in 0 .. min(P,m)-1 the outer loop PE builds
// ref_i and gamma, then the inner loop PEs update columns i..P-1 in groups of
// N_INNER columns in parallel, each returning R[i][j].  Entries of R below the
// diagonal, and rows at or beyond m, read as zero.
//
// Interface: rows are written with ld_valid/ld_idx/ld_row while idle; a
// `start` pulse with the row count m (1..ROWS) runs the factorisation; `done`
// pulses when R is complete and R can be read, one row per address, through
// the combinational port rd_idx/rd_row.
// Timing per i: outer PE (about (m-i)/LANES + 260 cycles) plus
// ceil((P-i)/N_INNER) inner passes of about 2*(m-i)/LANES + 3 cycles.
// Follows the paper: PU organisation and the Householder loop order.  Own
// choices: loop runs to min(P,m)-1 (the paper's listing stops at n-2, which
// is only complete for square inputs), column grouping, number format.
module qrd_pu
  import sia_pkg::*;
#(
  parameter int P       = 96,
  parameter int ROWS    = 2 * P,
  parameter int LANES   = 4,
  parameter int N_INNER = 8,
  localparam int NWD    = ROWS / LANES,
  localparam int WA     = $clog2(NWD),
  localparam int RA     = $clog2(ROWS + 1),
  localparam int PA     = $clog2(P)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               ld_valid,
  input  logic [RA-1:0]      ld_idx,
  input  fx_t  [P-1:0]       ld_row,
  input  logic               start,
  input  logic [RA-1:0]      m,
  output logic               busy,
  output logic               done,
  input  logic [PA-1:0]      rd_idx,
  output fx_t  [P-1:0]       rd_row
);

  typedef enum logic [2:0] {S_IDLE, S_CLR, S_OUTER, S_OUTER_W, S_INNER, S_INNER_W} state_e;
  state_e state;

  fx_t mbuf [P][ROWS];
  fx_t refb [ROWS];
  fx_t rbuf [P][P];

  logic [RA-1:0]  i, m_q, n_steps;
  logic [PA:0]    jbase;

  // outer loop PE
  logic              o_start, o_done, o_ref_we, o_ref_e_we, g_skip;
  logic [WA-1:0]     o_col_addr, o_ref_addr;
  fx_t  [LANES-1:0]  o_col_word, o_ref_wdata;
  logic [RA-1:0]     o_ref_e_idx;
  fx_t               o_ref_e_data;
  logic [64:0]       g_recip;
  logic [7:0]        g_lz;

  // inner loop PEs
  logic [N_INNER-1:0]              in_done, in_we, in_pending, in_act;
  logic                            in_start;
  logic [WA-1:0]                   in_addr   [N_INNER];
  fx_t  [LANES-1:0]                in_col    [N_INNER];
  fx_t  [LANES-1:0]                in_ref    [N_INNER];
  fx_t  [LANES-1:0]                in_wdata  [N_INNER];
  fx_t                             in_rval   [N_INNER];
  logic [PA:0]                     in_col_j  [N_INNER];

  always_comb begin
    for (int l = 0; l < LANES; l++)
      o_col_word[l] = mbuf[i[PA-1:0]][int'(o_col_addr) * LANES + l];
    for (int k = 0; k < N_INNER; k++) begin
      in_col_j[k] = jbase + (PA+1)'(k);
      in_act[k]   = (int'(in_col_j[k]) < P);
      for (int l = 0; l < LANES; l++) begin
        in_col[k][l] = in_act[k] ? mbuf[in_col_j[k][PA-1:0]][int'(in_addr[k]) * LANES + l] : '0;
        in_ref[k][l] = refb[int'(in_addr[k]) * LANES + l];
      end
    end
  end

  always_comb begin
    for (int c = 0; c < P; c++) rd_row[c] = rbuf[rd_idx][c];
  end

  assign o_start  = (state == S_OUTER);
  assign in_start = (state == S_INNER);

  outer_loop_pe #(.LANES(LANES), .ROWS(ROWS)) u_outer (
    .clk, .rst_n, .start(o_start), .i(i), .m(m_q),
    .col_addr(o_col_addr), .col_word(o_col_word),
    .ref_we(o_ref_we), .ref_addr(o_ref_addr), .ref_wdata(o_ref_wdata),
    .ref_e_we(o_ref_e_we), .ref_e_idx(o_ref_e_idx), .ref_e_data(o_ref_e_data),
    .g_recip(g_recip), .g_lz(g_lz), .g_skip(g_skip), .done(o_done));

  for (genvar k = 0; k < N_INNER; k++) begin : g_inner
    inner_loop_pe #(.LANES(LANES), .ROWS(ROWS)) u_inner (
      .clk, .rst_n, .start(in_start && in_act[k]), .i(i), .m(m_q),
      .g_recip(g_recip), .g_lz(g_lz), .g_skip(g_skip),
      .addr(in_addr[k]), .col_word(in_col[k]), .ref_word(in_ref[k]),
      .col_we(in_we[k]), .col_wdata(in_wdata[k]), .r_val(in_rval[k]), .done(in_done[k]));
  end

  // buffers
  always_ff @(posedge clk) begin
    if (state == S_IDLE && ld_valid)
      for (int c = 0; c < P; c++) mbuf[c][ld_idx] <= ld_row[c];
    for (int k = 0; k < N_INNER; k++)
      if (in_we[k] && in_act[k])
        for (int l = 0; l < LANES; l++)
          mbuf[in_col_j[k][PA-1:0]][int'(in_addr[k]) * LANES + l] <= in_wdata[k][l];
    if (o_ref_we)
      for (int l = 0; l < LANES; l++) refb[int'(o_ref_addr) * LANES + l] <= o_ref_wdata[l];
    if (o_ref_e_we) refb[o_ref_e_idx] <= o_ref_e_data;
    if (state == S_CLR)
      for (int r = 0; r < P; r++)
        for (int c = 0; c < P; c++) rbuf[r][c] <= '0;
    for (int k = 0; k < N_INNER; k++)
      if (in_done[k] && in_act[k]) rbuf[i[PA-1:0]][in_col_j[k][PA-1:0]] <= in_rval[k];
  end

  // control
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; i <= '0; m_q <= '0; n_steps <= '0; jbase <= '0;
      in_pending <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          m_q     <= m;
          n_steps <= (int'(m) < P) ? m : RA'(P);
          i       <= '0;
          state   <= S_CLR;
        end
        S_CLR: state <= S_OUTER;
        S_OUTER: state <= S_OUTER_W;
        S_OUTER_W: if (o_done) begin
          jbase <= (PA+1)'(i);
          state <= S_INNER;
        end
        S_INNER: begin
          in_pending <= in_act;
          state      <= S_INNER_W;
        end
        S_INNER_W: begin
          if ((in_pending & ~in_done) == '0) begin
            in_pending <= '0;
            if (int'(jbase) + N_INNER < P) begin
              jbase <= jbase + (PA+1)'(N_INNER);
              state <= S_INNER;
            end else if (i + 1'b1 == n_steps) begin
              done  <= 1'b1;
              state <= S_IDLE;
            end else begin
              i     <= i + 1'b1;
              state <= S_OUTER;
            end
          end else begin
            in_pending <= in_pending & ~in_done;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);

endmodule
