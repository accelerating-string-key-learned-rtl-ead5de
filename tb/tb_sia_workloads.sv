// tb_sia_workloads: key lengths shorter than the built one, at the default
// size (P = 96, four engines), with two models trained at the same time.
//
// Keys shorter than P are zero-padded.  The padding columns are all zero, so
// the outer loop PE skips them and R_new is block diagonal: the leading
// klen x klen block is the R of the real key bytes, the rest is zero, and
// the matching block of M is (X^T X)^-1 of the real columns.  The rest of M
// belongs to the zero columns and is never used by the host (X^T Y is zero
// there).  This bench checks the leading block of M against Gauss-Jordan in
// real arithmetic and the whole stored R against R^T R = X^T X:
//   model 3: key length 12 (Amazon-review-like user ids), cold on 300 keys,
//            then incremental with 50 more keys;
//   model 5: key length 82 (longest Twitter cache-trace key), cold on 200 keys,
//            running concurrently with model 3's cold job on another engine.
// Key bytes are printable characters ('0'..'z'), drawn with $urandom.
module tb_sia_workloads;
  import sia_pkg::*;

  localparam int P = 96, XROWS = 768, DAW = 20, MIDW = 12, NUM_TE = 4;
  localparam int NA = $clog2(XROWS + 1), PA = $clog2(P), TA = 2;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cmd_valid, cmd_ready;
  logic [MIDW-1:0] cmd_mid;
  train_mode_e cmd_mode;
  logic [NA-1:0] cmd_nrows;
  logic [DAW-1:0] cmd_xaddr;
  logic [TA-1:0] cmd_te, hm_te;
  logic [NUM_TE-1:0] te_done_flag, te_active, done_ack;
  logic [PA-1:0] hm_idx;
  fx_t [P-1:0] hm_row, dram_wdata, dram_rdata;
  logic dram_req, dram_we, dram_gnt, dram_rvalid;
  logic [DAW-1:0] dram_addr;

  sia_top dut (.*);

  // behavioural DRAM: sparse, fixed latency
  fx_t [P-1:0] dram [int];
  logic rd_pend = 1'b0;
  logic [DAW-1:0] rq;
  always @(posedge clk) begin
    dram_gnt <= 1'b0;
    dram_rvalid <= 1'b0;
    if (dram_req && !dram_gnt && !rd_pend) begin
      dram_gnt <= 1'b1;
      if (dram_we) dram[int'(dram_addr)] = dram_wdata;
      else begin rd_pend <= 1'b1; rq <= dram_addr; end
    end
    if (rd_pend) begin
      dram_rvalid <= 1'b1;
      dram_rdata <= dram.exists(int'(rq)) ? dram[int'(rq)] : '0;
      rd_pend <= 1'b0;
    end
  end

  int checks = 0, failures = 0, overlap = 0;
  real G [2][P][P];

  always @(posedge clk) if (te_active[0] && te_active[1]) overlap++;

  initial begin
    repeat (20000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic stage(int g, int klen, int n, int base);
    for (int r = 0; r < n; r++) begin
      fx_t [P-1:0] row;
      for (int c = 0; c < P; c++)
        row[c] = (c < klen) ? fx_t'(longint'($urandom_range(122, 48))) <<< FRAC : '0;
      dram[base + r] = row;
      for (int a = 0; a < klen; a++)
        for (int b = 0; b < klen; b++)
          G[g][a][b] += real'(row[a] >>> FRAC) * real'(row[b] >>> FRAC);
    end
  endtask

  task automatic submit(int mid, train_mode_e md, int n, int base, output int te);
    @(negedge clk);
    cmd_valid = 1; cmd_mid = MIDW'(mid); cmd_mode = md; cmd_nrows = NA'(n); cmd_xaddr = DAW'(base);
    #1;
    while (!cmd_ready) begin @(negedge clk); #1; end
    te = int'(cmd_te);
    @(negedge clk); cmd_valid = 0;
  endtask

  // wait for engine te, then check model g (key length klen, DRAM slot mid)
  task automatic finish_check(int te, int g, int klen, int mid);
    real A [P][2*P], f, M, h, tol, mx;
    real R [P][P];
    while (!te_done_flag[te]) @(negedge clk);
    $display("model slot %0d (key length %0d) done at %0t", mid, klen, $time);
    for (int r = 0; r < klen; r++)
      for (int c = 0; c < 2 * klen; c++) A[r][c] = (c < klen) ? G[g][r][c] : ((c - klen == r) ? 1.0 : 0.0);
    for (int p = 0; p < klen; p++) begin
      f = A[p][p];
      for (int c = 0; c < 2 * klen; c++) A[p][c] /= f;
      for (int r = 0; r < klen; r++) if (r != p) begin
        f = A[r][p];
        for (int c = 0; c < 2 * klen; c++) A[r][c] -= f * A[p][c];
      end
    end
    hm_te = TA'(te);
    for (int r = 0; r < klen; r++) begin
      hm_idx = PA'(r); #1;
      mx = 0;
      for (int c = 0; c < klen; c++) mx = (A[r][klen + c] > mx) ? A[r][klen + c] : ((-A[r][klen + c] > mx) ? -A[r][klen + c] : mx);
      for (int c = 0; c < klen; c++) begin
        M = A[r][klen + c];
        h = real'(hm_row[c]) / 4294967296.0;
        tol = 1e-2 * mx + 1e-9;
        checks++;
        if ((h - M) > tol || (M - h) > tol) begin
          failures++;
          if (failures < 10) $display("klen %0d: M[%0d][%0d] = %g expected %g", klen, r, c, h, M);
        end
      end
    end
    for (int r = 0; r < P; r++)
      for (int c = 0; c < P; c++) R[r][c] = real'(dram[mid * P + r][c]) / 4294967296.0;
    for (int a = 0; a < P; a++)
      for (int b = 0; b < P; b++) begin
        real ref_v;
        ref_v = (a < klen && b < klen) ? G[g][a][b] : 0.0;
        h = 0;
        for (int k = 0; k < P; k++) h += R[k][a] * R[k][b];
        tol = 1e-6 * ref_v + 1.0;
        checks++;
        if ((h - ref_v) > tol || (ref_v - h) > tol) begin
          failures++;
          if (failures < 10) $display("klen %0d: stored R Gram[%0d][%0d] = %f expected %f", klen, a, b, h, ref_v);
        end
      end
    @(negedge clk); done_ack = '0; done_ack[te] = 1'b1;
    @(negedge clk); done_ack = '0;
  endtask

  initial begin
    int te_a, te_b;
    cmd_valid = 0; cmd_mid = '0; cmd_mode = MODE_COLD; cmd_nrows = '0; cmd_xaddr = '0;
    done_ack = '0; hm_te = '0; hm_idx = '0;
    for (int g = 0; g < 2; g++) for (int a = 0; a < P; a++) for (int b = 0; b < P; b++) G[g][a][b] = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    stage(0, 12, 300, 4096);
    stage(1, 82, 200, 8192);
    submit(3, MODE_COLD, 300, 4096, te_a);
    submit(5, MODE_COLD, 200, 8192, te_b);
    checks++;
    if (te_a == te_b) begin failures++; $display("both jobs on one engine"); end
    finish_check(te_b, 1, 82, 5);
    finish_check(te_a, 0, 12, 3);
    stage(0, 12, 50, 12288);
    submit(3, MODE_INCR, 50, 12288, te_a);
    finish_check(te_a, 0, 12, 3);
    $display("cycles with both engines busy: %0d", overlap);
    checks++;
    if (overlap == 0) begin failures++; $display("jobs never overlapped"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
