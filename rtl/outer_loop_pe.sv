// outer_loop_pe: the outer-loop step of Householder QR (Algorithm "Householder
// QR decomposition", lines 2-5) for column i of the PU's matrix buffer.
//
// Work, in order:
//   1. DOT   - streams column i word by word (LANES rows per cycle) from the
//              matrix buffer, accumulates dot(col,col) over rows i..m-1 in a
//              macc_vec and copies the masked column into the reflector buffer
//              (rows outside [i,m) are written as zero).
//   2. SQRT  - d = sqrt(dot(col,col)).
//   3. REF   - ref[i] = x_i + sign(x_i)*d (written back as one element) and
//              dot(ref,ref) = dot(col,col) - x_i^2 + ref[i]^2.
//   4. DIV   - gamma = -2/dot(ref,ref).  gamma is kept as a normalised
//              reciprocal: with lz = leading zeros of the 128-bit Q63.64 value
//              D and recip = floor(2^191 / (D << lz)),
//              gamma = -recip * 2^(lz-126).
//              recip (65 bits) and lz form the PU's scalar register contents.
// A column whose segment is all zero gives D = 0; `skip` is then raised and
// the inner loop PEs leave their columns untouched.
// Timing: ceil((m - i0)/LANES) + 64 (sqrt) + 192 (divide) + a few cycles,
// where i0 = i rounded down to a LANES boundary; `done` pulses once.
// The split of work follows the paper (reflector and gamma in the outer loop
// PE); the number format, the normalised gamma and the closed form for
// dot(ref,ref) are this design's choices.
// Lint notes: the divider's remainder output dv_r is not needed and stays
// unconnected in use; rst_n feeds both the asynchronous flop reset and the
// `disable iff` of the assertions (reported as SYNCASYNCNET, harmless).
module outer_loop_pe
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
  input  logic [RA-1:0]        i,        // column / first row
  input  logic [RA-1:0]        m,        // rows in use
  // matrix buffer read, column i
  output logic [WA-1:0]        col_addr,
  input  fx_t  [LANES-1:0]     col_word,
  // reflector buffer writes
  output logic                 ref_we,
  output logic [WA-1:0]        ref_addr,
  output fx_t  [LANES-1:0]     ref_wdata,
  output logic                 ref_e_we,
  output logic [RA-1:0]        ref_e_idx,
  output fx_t                  ref_e_data,
  // scalar register contents
  output logic [64:0]          g_recip,
  output logic [7:0]           g_lz,
  output logic                 g_skip,
  output logic                 done
);

  typedef enum logic [2:0] {S_IDLE, S_DOT, S_SQ, S_SQW, S_REF, S_DIVW} state_e;
  state_e state;

  logic [WA-1:0]     w, w_last;
  logic              first;
  logic [LANES-1:0]  mask;
  acc_t              acc;
  fx_t               x0;
  logic              sq_start, sq_busy, sq_done;
  logic [63:0]       root;
  logic              dv_start, dv_busy, dv_done;
  logic [191:0]      dv_q;
  logic [127:0]      dv_r;
  logic [127:0]      dref, dref_n;
  logic [7:0]        lz;
  fx_t               ref0;

  always_comb begin
    for (int l = 0; l < LANES; l++) begin
      int unsigned row;
      row = int'(w) * LANES + l;
      mask[l] = (row >= int'(i)) && (row < int'(m));
    end
  end

  macc_vec #(.LANES(LANES)) u_macc (
    .clk, .rst_n, .clear(state == S_DOT && first), .en(state == S_DOT),
    .a(col_word), .b(col_word), .mask(mask), .acc(acc));

  isqrt #(.RW(64)) u_sqrt (
    .clk, .rst_n, .start(sq_start), .x(acc), .busy(sq_busy), .done(sq_done), .root(root));

  // ref[i] and dot(ref,ref)
  always_comb begin
    ref0 = (x0 >= 0) ? x0 + fx_t'(root) : x0 - fx_t'(root);
    dref = 128'(acc - acc_t'(x0) * acc_t'(x0) + acc_t'(ref0) * acc_t'(ref0));
    lz = 8'd0;
    for (int b = 127; b >= 0; b--) begin
      if (dref[b]) break;
      lz = lz + 8'd1;
    end
    dref_n = dref << lz;
  end

  udiv #(.NW(192), .DW(128)) u_div (
    .clk, .rst_n, .start(dv_start), .n(192'(1) << 191), .d(dref_n),
    .busy(dv_busy), .done(dv_done), .q(dv_q), .r(dv_r));

  always_comb begin
    col_addr  = w;
    ref_we    = (state == S_DOT);
    ref_addr  = w;
    for (int l = 0; l < LANES; l++) ref_wdata[l] = mask[l] ? col_word[l] : '0;
    ref_e_we   = (state == S_REF);
    ref_e_idx  = i;
    ref_e_data = ref0;
    sq_start   = (state == S_SQ);
    dv_start   = (state == S_REF) && (dref != '0);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; w <= '0; w_last <= '0; first <= 1'b0; x0 <= '0;
      g_recip <= '0; g_lz <= '0; g_skip <= 1'b0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          w      <= WA'(int'(i) / LANES);
          w_last <= WA'((int'(m) - 1) / LANES);
          first  <= 1'b1;
          x0     <= '0;
          state  <= S_DOT;
        end
        S_DOT: begin
          first <= 1'b0;
          for (int l = 0; l < LANES; l++)
            if (int'(w) * LANES + l == int'(i)) x0 <= col_word[l];
          if (w == w_last) state <= S_SQ;
          else             w <= w + 1'b1;
        end
        S_SQ:  state <= S_SQW;
        S_SQW: if (sq_done) state <= S_REF;
        S_REF: begin
          g_lz <= lz;
          if (dref == '0) begin
            g_skip  <= 1'b1;
            g_recip <= '0;
            done    <= 1'b1;
            state   <= S_IDLE;
          end else begin
            g_skip <= 1'b0;
            state  <= S_DIVW;
          end
        end
        S_DIVW: if (dv_done) begin
          g_recip <= dv_q[64:0];
          done    <= 1'b1;
          state   <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // Helpers are only started when idle; the normalised quotient fits 65 bits.
  assert property (@(posedge clk) disable iff (!rst_n) sq_start |-> !sq_busy);
  assert property (@(posedge clk) disable iff (!rst_n) dv_start |-> !dv_busy);
  assert property (@(posedge clk) disable iff (!rst_n) dv_done |-> (dv_q[191:65] == '0));

endmodule
