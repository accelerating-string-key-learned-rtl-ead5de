// tb_training_engine: self-checking test of one training engine.  The
// testbench plays the DMA: it writes X_delta rows (and later nothing else -
// R_old stays in the scratchpad from the previous job) through the ext port,
// starts a cold job and then an incremental one, and checks after each that
// M = (X^T X)^-1 over all rows seen so far (Gauss-Jordan in real arithmetic)
// and that the R left in the scratchpad satisfies R^T R = X^T X.
module tb_training_engine;
  import sia_pkg::*;
  localparam int P = 4, NUM_PU = 2, LANES = 2, N_INNER = 2, SA_DIM = 2;
  localparam int ROWS = 2 * P, XROWS = 3 * ROWS, NSLOT = 3, DEPTH = XROWS + P + NSLOT * P;
  localparam int AA = $clog2(DEPTH), PA = $clog2(P), NA = $clog2(XROWS + 1);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, busy, done, ext_re, ext_we;
  train_mode_e mode;
  logic [NA-1:0] n_rows;
  logic [AA-1:0] ext_addr;
  fx_t [P-1:0] ext_wdata, ext_rdata, m_rd_row;
  logic [PA-1:0] m_rd_idx;
  training_engine #(.P(P), .NUM_PU(NUM_PU), .LANES(LANES), .N_INNER(N_INNER), .SA_DIM(SA_DIM), .XROWS(XROWS)) dut (.*);
  int checks = 0, failures = 0;
  real G [P][P];

  initial begin
    repeat (500000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic job(train_mode_e md, int n);
    real A [P][2*P], f, M, h, tol, R [P][P];
    for (int r = 0; r < n; r++) begin
      @(negedge clk); ext_we = 1; ext_addr = AA'(r);
      for (int c = 0; c < P; c++) ext_wdata[c] = fx_t'(longint'($urandom_range(255))) <<< FRAC;
      for (int a = 0; a < P; a++) for (int b = 0; b < P; b++)
        G[a][b] += real'(ext_wdata[a] >>> FRAC) * real'(ext_wdata[b] >>> FRAC);
    end
    @(negedge clk); ext_we = 0; mode = md; n_rows = NA'(n); start = 1;
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    for (int r = 0; r < P; r++) for (int c = 0; c < 2 * P; c++) A[r][c] = (c < P) ? G[r][c] : ((c - P == r) ? 1.0 : 0.0);
    for (int p = 0; p < P; p++) begin
      f = A[p][p];
      for (int c = 0; c < 2 * P; c++) A[p][c] /= f;
      for (int r = 0; r < P; r++) if (r != p) begin
        f = A[r][p];
        for (int c = 0; c < 2 * P; c++) A[r][c] -= f * A[p][c];
      end
    end
    for (int r = 0; r < P; r++) begin
      m_rd_idx = PA'(r); #1;
      for (int c = 0; c < P; c++) begin
        M = A[r][P + c]; h = real'(m_rd_row[c]) / 4294967296.0;
        tol = 2e-3 * (M < 0 ? -M : M) + 1e-8;
        checks++;
        if ((h - M) > tol || (M - h) > tol) begin failures++; $display("M[%0d][%0d] = %g expected %g", r, c, h, M); end
      end
    end
    for (int r = 0; r < P; r++) begin
      @(negedge clk); ext_re = 1; ext_addr = AA'(XROWS + r);
      @(negedge clk); ext_re = 0;
      for (int c = 0; c < P; c++) R[r][c] = real'(ext_rdata[c]) / 4294967296.0;
    end
    for (int a = 0; a < P; a++) for (int b = 0; b < P; b++) begin
      h = 0;
      for (int k = 0; k < P; k++) h += R[k][a] * R[k][b];
      checks++;
      if ((h - G[a][b]) > 1e-6 * G[a][b] + 1e-2 || (G[a][b] - h) > 1e-6 * G[a][b] + 1e-2) begin
        failures++; $display("Gram[%0d][%0d] = %f expected %f", a, b, h, G[a][b]);
      end
    end
  endtask

  initial begin
    start = 0; mode = MODE_COLD; n_rows = '0; ext_re = 0; ext_we = 0; ext_addr = '0; ext_wdata = '0; m_rd_idx = '0;
    for (int a = 0; a < P; a++) for (int b = 0; b < P; b++) G[a][b] = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    job(MODE_COLD, 2 * ROWS + 3);
    job(MODE_INCR, 5);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
