// inner_loop_pe: the inner-loop step of Householder QR for one column j
// (Algorithm "Householder QR decomposition", lines 7-10).
//
// Given the reflector ref (in the PU's reflector buffer) and gamma (in the
// scalar register, as recip/lz, see outer_loop_pe) it
//   1. DOT   - streams column j and ref, LANES rows per cycle, from the word
//              holding row i to the word holding row m-1: s = dot(ref, col_j);
//   2. ALPHA - alpha = gamma * s = -(recip * s) * 2^(lz-190), rounded to Q31.32
//              (zero when the outer PE flagged `skip`);
//   3. AXPY  - col_j += alpha * ref, one word per cycle, written back in place;
//              the updated element at row i is R[i][j] and is returned in r_val.
// Rows of ref outside [i,m) are zero, so whole words can be processed without
// masks.  Timing: 2*ceil words + 2 cycles, then `done` pulses.  The paper
// gives this split of work; the fixed-point scaling is this design's own.
module inner_loop_pe
  import sia_pkg::*;
#(
  parameter int LANES = 4,
  parameter int ROWS  = 192,
  localparam int NWD  = ROWS / LANES,
  localparam int WA   = $clog2(NWD),
  localparam int RA   = $clog2(ROWS + 1)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic [RA-1:0]        i,
  input  logic [RA-1:0]        m,
  input  logic [64:0]          g_recip,
  input  logic [7:0]           g_lz,
  input  logic                 g_skip,
  output logic [WA-1:0]        addr,
  input  fx_t  [LANES-1:0]     col_word,
  input  fx_t  [LANES-1:0]     ref_word,
  output logic                 col_we,
  output fx_t  [LANES-1:0]     col_wdata,
  output fx_t                  r_val,
  output logic                 done
);

  typedef enum logic [1:0] {S_IDLE, S_DOT, S_ALPHA, S_AXPY} state_e;
  state_e state;

  logic [WA-1:0]        w, w_first, w_last;
  acc_t                 acc;
  fx_t                  alpha;
  logic signed [199:0]  prod;
  logic [7:0]           sh;

  macc_vec #(.LANES(LANES)) u_macc (
    .clk, .rst_n, .clear(state == S_DOT && w == w_first), .en(state == S_DOT),
    .a(ref_word), .b(col_word), .mask({LANES{1'b1}}), .acc(acc));

  always_comb begin
    prod = 200'(signed'({1'b0, g_recip})) * 200'(acc);
    sh   = 8'd158 - g_lz;
    addr = w;
    col_we = (state == S_AXPY);
    for (int l = 0; l < LANES; l++)
      col_wdata[l] = col_word[l] + fx_mul(alpha, ref_word[l]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; w <= '0; w_first <= '0; w_last <= '0;
      alpha <= '0; r_val <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          w       <= WA'(int'(i) / LANES);
          w_first <= WA'(int'(i) / LANES);
          w_last  <= WA'((int'(m) - 1) / LANES);
          state   <= S_DOT;
        end
        S_DOT: begin
          if (w == w_last) state <= S_ALPHA;
          else             w <= w + 1'b1;
        end
        S_ALPHA: begin
          alpha <= g_skip ? '0 : -fx_t'(prod >>> sh);
          w     <= w_first;
          state <= S_AXPY;
        end
        S_AXPY: begin
          for (int l = 0; l < LANES; l++)
            if (int'(w) * LANES + l == int'(i)) r_val <= col_wdata[l];
          if (w == w_last) begin
            done  <= 1'b1;
            state <= S_IDLE;
          end else begin
            w <= w + 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
