// qrd_unit: the QR-decomposition unit of a training engine.  It turns the
// X_delta rows held in the scratchpad into R_delta with a tree of small QR
// decompositions spread over NUM_PU processing units, then (incremental mode)
// folds in the memoized factor: R_new = R of concat(R_old, R_delta).
//
// Algorithm (tall-and-skinny parallel QR, then memoized QR):
//   TILE   X_delta is cut into tiles of ROWS = 2P rows (the last may be
//          shorter); each tile is factorised by one PU and its P x P factor is
//          written to scratchpad slot t.
//   REDUCE while more than one factor remains, factors 2p and 2p+1 are stacked
//          (the "Concat" path, 2P rows) and factorised again into slot p; an
//          odd factor left over is passed through a PU alone.
//   MEMO   incremental mode: concat(R_old, R_delta) is factorised once more
//          and the result overwrites R_old in the scratchpad.
//   COPY   cold mode: R_delta is copied to the R_old/R_new region.
// Each step runs in rounds of up to NUM_PU jobs: the PUs are loaded one row
// per cycle from scratchpad port A (through the input mux), started together,
// and their factors written back one row per cycle.
// Interface: `start` pulse with `mode` and `n_rows` (1..XROWS); `done` pulses
// when the R_old/R_new region holds the result.  All scratchpad traffic uses
// the sp_* port (reads return data the next cycle).
// Follows the paper: parallel tree of QRDs, concat of partial factors, the
// memoized final QRD.  Own choices: tile height 2P, round scheduling,
// scratchpad slots as the concat store, odd-factor pass-through.
// Lint note: rst_n feeds both the asynchronous flop reset and the
// assertions' `disable iff` (SYNCASYNCNET, harmless).
module qrd_unit
  import sia_pkg::*;
#(
  parameter int P       = 96,
  parameter int NUM_PU  = 2,
  parameter int LANES   = 4,
  parameter int N_INNER = 8,
  parameter int XROWS   = 768,
  localparam int ROWS   = 2 * P,
  localparam int NSLOT  = (XROWS + ROWS - 1) / ROWS,
  localparam int DEPTH  = XROWS + P + NSLOT * P,
  localparam int AA     = $clog2(DEPTH),
  localparam int RA     = $clog2(ROWS + 1),
  localparam int PA     = $clog2(P),
  localparam int NA     = $clog2(XROWS + 1),
  localparam int KA     = (NUM_PU > 1) ? $clog2(NUM_PU) : 1,
  localparam int R_BASE = XROWS,
  localparam int S_BASE = XROWS + P
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  train_mode_e     mode,
  input  logic [NA-1:0]   n_rows,
  output logic            busy,
  output logic            done,
  output logic            sp_re,
  output logic            sp_we,
  output logic [AA-1:0]   sp_addr,
  output fx_t  [P-1:0]    sp_wdata,
  input  fx_t  [P-1:0]    sp_rdata
);

  typedef enum logic [1:0] {PH_TILE, PH_RED, PH_MEMO, PH_COPY} phase_e;
  typedef enum logic [2:0] {S_IDLE, S_LOAD, S_LTAIL, S_RUN, S_WAIT, S_WB, S_COPY, S_CTAIL} state_e;

  state_e  state;
  phase_e  phase;
  train_mode_e mode_q;
  logic [NA-1:0] n_q;
  int unsigned   cnt, jobs, base, nact;
  int unsigned   k, part, r;

  // per-PU signals
  logic             pu_ld_valid [NUM_PU];
  logic [RA-1:0]    pu_ld_idx;
  fx_t  [P-1:0]     pu_ld_row;
  logic [NUM_PU-1:0] pu_start, pu_busy, pu_done, pu_pend;
  logic [RA-1:0]    pu_m [NUM_PU];
  logic [PA-1:0]    pu_rd_idx;
  fx_t  [P-1:0]     pu_rd_row [NUM_PU];

  // load pipeline (one cycle of scratchpad read latency)
  logic             ld_v_d;
  logic [KA-1:0]    ld_k_d;
  logic [RA-1:0]    ld_row_d;

  // job description for job t of the current phase
  function automatic int unsigned job_parts(phase_e ph, int unsigned t, int unsigned c);
    if (ph == PH_TILE) return 1;
    if (ph == PH_MEMO) return 2;
    return (2 * t + 1 < c) ? 2 : 1;
  endfunction

  function automatic int unsigned job_len(phase_e ph, int unsigned t, int unsigned n);
    if (ph == PH_TILE) return (n - t * ROWS < ROWS) ? n - t * ROWS : ROWS;
    return P;
  endfunction

  function automatic int unsigned job_src(phase_e ph, int unsigned t, int unsigned pt);
    case (ph)
      PH_TILE: return t * ROWS;
      PH_RED:  return S_BASE + (2 * t + pt) * P;
      default: return (pt == 0) ? R_BASE : S_BASE;
    endcase
  endfunction

  function automatic int unsigned job_dst(phase_e ph, int unsigned t);
    if (ph == PH_MEMO) return R_BASE;
    return S_BASE + t * P;
  endfunction

  int unsigned cur_t, cur_parts, cur_len;
  always_comb begin
    cur_t     = base + k;
    cur_parts = job_parts(phase, cur_t, cnt);
    cur_len   = job_len(phase, cur_t, int'(n_q));
  end

  for (genvar g = 0; g < NUM_PU; g++) begin : g_pu
    qrd_pu #(.P(P), .ROWS(ROWS), .LANES(LANES), .N_INNER(N_INNER)) u_pu (
      .clk, .rst_n,
      .ld_valid(pu_ld_valid[g]), .ld_idx(pu_ld_idx), .ld_row(pu_ld_row),
      .start(pu_start[g]), .m(pu_m[g]), .busy(pu_busy[g]), .done(pu_done[g]),
      .rd_idx(pu_rd_idx), .rd_row(pu_rd_row[g]));
    assert property (@(posedge clk) disable iff (!rst_n) pu_start[g] |-> !pu_busy[g]);
  end

  // Input mux: rows come from the scratchpad, either X_delta or stacked
  // (concatenated) R factors, depending on the phase.
  always_comb begin
    for (int g = 0; g < NUM_PU; g++) pu_ld_valid[g] = ld_v_d && (int'(ld_k_d) == g);
    pu_ld_idx = ld_row_d;
    pu_ld_row = sp_rdata;
    for (int g = 0; g < NUM_PU; g++) pu_start[g] = (state == S_RUN) && (g < int'(nact));
  end

  assign pu_rd_idx = PA'(r);

  always_comb begin

    sp_re    = 1'b0;
    sp_we    = 1'b0;
    sp_addr  = '0;
    sp_wdata = pu_rd_row[0];
    case (state)
      S_LOAD: begin
        sp_re   = 1'b1;
        sp_addr = AA'(job_src(phase, cur_t, part) + r);
      end
      S_WB: begin
        sp_we    = 1'b1;
        sp_addr  = AA'(job_dst(phase, cur_t) + r);
        for (int g = 0; g < NUM_PU; g++) if (g == int'(k)) sp_wdata = pu_rd_row[g];
      end
      S_COPY: begin
        sp_re   = 1'b1;
        sp_addr = AA'(S_BASE + r);
      end
      S_CTAIL: begin
        sp_we    = 1'b1;
        sp_addr  = AA'(R_BASE + r);
        sp_wdata = sp_rdata;
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; phase <= PH_TILE; mode_q <= MODE_COLD; n_q <= '0;
      cnt <= 0; jobs <= 0; base <= 0; nact <= 0; k <= 0; part <= 0; r <= 0;
      ld_v_d <= 1'b0; ld_k_d <= '0; ld_row_d <= '0; pu_pend <= '0; done <= 1'b0;
      for (int g = 0; g < NUM_PU; g++) pu_m[g] <= '0;
    end else begin
      done   <= 1'b0;
      ld_v_d <= (state == S_LOAD);
      ld_k_d <= KA'(k);
      ld_row_d <= RA'(part * P + r);
      case (state)
        S_IDLE: if (start) begin
          mode_q <= mode;
          n_q    <= n_rows;
          phase  <= PH_TILE;
          jobs   <= (int'(n_rows) + ROWS - 1) / ROWS;
          nact   <= ((int'(n_rows) + ROWS - 1) / ROWS < NUM_PU) ? (int'(n_rows) + ROWS - 1) / ROWS : NUM_PU;
          cnt    <= 0;
          base   <= 0;
          k <= 0; part <= 0; r <= 0;
          state  <= S_LOAD;
        end
        S_LOAD: begin
          if (r + 1 < cur_len) r <= r + 1;
          else begin
            r <= 0;
            if (part + 1 < cur_parts) part <= part + 1;
            else begin
              part <= 0;
              pu_m[k] <= RA'(cur_len * cur_parts);
              if (k + 1 < nact) k <= k + 1;
              else begin k <= 0; state <= S_LTAIL; end
            end
          end
        end
        S_LTAIL: state <= S_RUN;
        S_RUN: begin
          pu_pend <= '0;
          for (int g = 0; g < NUM_PU; g++) if (g < int'(nact)) pu_pend[g] <= 1'b1;
          state <= S_WAIT;
        end
        S_WAIT: begin
          if ((pu_pend & ~pu_done) == '0) begin
            pu_pend <= '0;
            k <= 0; r <= 0;
            state <= S_WB;
          end else pu_pend <= pu_pend & ~pu_done;
        end
        S_WB: begin
          if (r + 1 < P) r <= r + 1;
          else begin
            r <= 0;
            if (k + 1 < nact) k <= k + 1;
            else begin
              // round finished
              k <= 0;
              if (base + NUM_PU < jobs) begin
                base  <= base + NUM_PU;
                nact  <= (jobs - base - NUM_PU < NUM_PU) ? jobs - base - NUM_PU : NUM_PU;
                state <= S_LOAD;
              end else begin
                // phase finished: how many factors remain?
                int unsigned left;
                left = jobs;
                base <= 0;
                if (phase == PH_MEMO) begin
                  done  <= 1'b1;
                  state <= S_IDLE;
                end else if (left > 1) begin
                  phase <= PH_RED;
                  cnt   <= left;
                  jobs  <= (left + 1) / 2;
                  nact  <= ((left + 1) / 2 < NUM_PU) ? (left + 1) / 2 : NUM_PU;
                  state <= S_LOAD;
                end else if (mode_q == MODE_INCR) begin
                  phase <= PH_MEMO;
                  cnt   <= 1;
                  jobs  <= 1;
                  nact  <= 1;
                  state <= S_LOAD;
                end else begin
                  phase <= PH_COPY;
                  r     <= 0;
                  state <= S_COPY;
                end
              end
            end
          end
        end
        // copy alternates: read a row of slot 0, then write it to R_new
        S_COPY: state <= S_CTAIL;
        S_CTAIL: begin
          if (r + 1 == P) begin
            r     <= 0;
            done  <= 1'b1;
            state <= S_IDLE;
          end else begin
            r     <= r + 1;
            state <= S_COPY;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);

endmodule
