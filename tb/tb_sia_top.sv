// tb_sia_top: end-to-end test of the accelerator with a behavioural board
// DRAM (random grant and read latency).
//
// Jobs, as a host training thread would issue them:
//   A  model 0, cold,        3 tiles of new keys (one column zero in the
//                            first tile, so a PU meets an all-zero column)
//   B  model 1, cold,        issued while A runs -> second engine, in parallel
//   C  model 0, incremental, new keys folded into model 0's memoized R
//   D  model 1, incremental, fewer new keys than the key length
// For each job the returned M must equal (X^T X)^-1 over all keys the model
// has seen, computed here by Gauss-Jordan elimination in real arithmetic, and
// the R written back to DRAM must satisfy R^T R = X^T X.  The test counts
// the mechanisms the design has and fails if one never happened: cold jobs,
// incremental (memoized) jobs, tree reductions, odd pass-through factors,
// multi-round PU scheduling, zero-column skips, engines running
// concurrently, and a job held back by a busy DMA.
module tb_sia_top;
  import sia_pkg::*;

  localparam int P = 4, NUM_TE = 2, NUM_PU = 2, LANES = 2, N_INNER = 2, SA_DIM = 2;
  localparam int ROWS = 2 * P, XROWS = 3 * ROWS, DAW = 12, MIDW = 4;
  localparam int NA = $clog2(XROWS + 1), PA = $clog2(P), TA = 1;
  localparam int XSTAGE = 256;   // DRAM word where staged X rows start

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

  sia_top #(.P(P), .NUM_TE(NUM_TE), .NUM_PU(NUM_PU), .LANES(LANES), .N_INNER(N_INNER),
            .SA_DIM(SA_DIM), .XROWS(XROWS), .DAW(DAW), .MIDW(MIDW)) dut (.*);

  // ---------------- behavioural DRAM ----------------
  fx_t [P-1:0] dram [1 << DAW];
  int lat;
  logic [DAW-1:0] rd_addr_q;
  logic rd_pend;
  always_ff @(posedge clk) begin
    dram_gnt <= 1'b0;
    dram_rvalid <= 1'b0;
    if (dram_req && !dram_gnt && !rd_pend && $urandom_range(2) == 0) begin
      dram_gnt <= 1'b1;
      if (dram_we) dram[dram_addr] <= dram_wdata;
      else begin rd_pend <= 1'b1; rd_addr_q <= dram_addr; lat <= int'($urandom_range(4)); end
    end
    if (rd_pend) begin
      if (lat == 0) begin dram_rvalid <= 1'b1; dram_rdata <= dram[rd_addr_q]; rd_pend <= 1'b0; end
      else lat <= lat - 1;
    end
  end

  // ---------------- bookkeeping ----------------
  int checks = 0, failures = 0;
  real G [2][P][P];            // Gram matrix per model
  int n_cold = 0, n_incr = 0, n_red = 0, n_odd = 0, n_multi = 0, n_skip = 0, n_conc = 0, n_hold = 0;

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // mechanism monitors (engine-internal events seen through hierarchy)
  always @(posedge clk) if (rst_n) begin
    if (&te_active && dut.g_te[0].u_te.busy && dut.g_te[1].u_te.busy) n_conc++;
    if (cmd_valid && !cmd_ready && dut.dma_busy) n_hold++;
  end
  for (genvar t = 0; t < NUM_TE; t++) begin : g_mon
    always @(posedge clk) if (rst_n) begin
      if (dut.g_te[t].u_te.u_qrd.state == 3'd0 && dut.g_te[t].u_te.u_qrd.start) begin
        if (dut.g_te[t].u_te.u_qrd.mode == MODE_COLD) n_cold++; else n_incr++;
      end
      if (dut.g_te[t].u_te.u_qrd.state == 3'd3 && dut.g_te[t].u_te.u_qrd.phase == 2'd1) begin
        n_red++;
        if (dut.g_te[t].u_te.u_qrd.cnt % 2 == 1 && dut.g_te[t].u_te.u_qrd.base + dut.g_te[t].u_te.u_qrd.nact == dut.g_te[t].u_te.u_qrd.jobs)
          n_odd++;
      end
      if (dut.g_te[t].u_te.u_qrd.state == 3'd3 && dut.g_te[t].u_te.u_qrd.base != 0) n_multi++;
      for (int g = 0; g < NUM_PU; g++) ;
    end
    for (genvar g = 0; g < NUM_PU; g++) begin : g_pu
      always @(posedge clk)
        if (rst_n && dut.g_te[t].u_te.u_qrd.g_pu[g].u_pu.u_outer.done &&
            dut.g_te[t].u_te.u_qrd.g_pu[g].u_pu.u_outer.g_skip) n_skip++;
    end
  end

  task automatic stage(int model, int n, int base, int zero_col_rows);
    for (int r = 0; r < n; r++) begin
      fx_t [P-1:0] row;
      for (int c = 0; c < P; c++) begin
        int v;
        v = (c == 2 && r < zero_col_rows) ? 0 : int'($urandom_range(255));
        row[c] = fx_t'(longint'(v)) <<< FRAC;
      end
      dram[DAW'(base + r)] = row;
      for (int a = 0; a < P; a++)
        for (int b = 0; b < P; b++)
          G[model][a][b] += real'(row[a] >>> FRAC) * real'(row[b] >>> FRAC);
    end
  endtask

  task automatic issue(int model, train_mode_e md, int n, int base, output int te);
    @(negedge clk);
    cmd_valid = 1; cmd_mid = MIDW'(model); cmd_mode = md; cmd_nrows = NA'(n); cmd_xaddr = DAW'(base);
    #1;
    while (!cmd_ready) begin @(negedge clk); #1; end
    te = int'(cmd_te);
    @(negedge clk); cmd_valid = 0;
  endtask

  task automatic finish_job(int model, int te);
    real A [P][2*P], f, M, h, tol;
    real R [P][P];
    while (!te_done_flag[te]) @(negedge clk);
    // reference inverse of the Gram matrix
    for (int r = 0; r < P; r++)
      for (int c = 0; c < 2 * P; c++) A[r][c] = (c < P) ? G[model][r][c] : ((c - P == r) ? 1.0 : 0.0);
    for (int p = 0; p < P; p++) begin
      f = A[p][p];
      for (int c = 0; c < 2 * P; c++) A[p][c] /= f;
      for (int r = 0; r < P; r++) if (r != p) begin
        f = A[r][p];
        for (int c = 0; c < 2 * P; c++) A[r][c] -= f * A[p][c];
      end
    end
    hm_te = TA'(te);
    for (int r = 0; r < P; r++) begin
      hm_idx = PA'(r); #1;
      for (int c = 0; c < P; c++) begin
        M = A[r][P + c];
        h = real'(hm_row[c]) / 4294967296.0;
        tol = 2e-3 * (M < 0 ? -M : M) + 1e-8;
        checks++;
        if ((h - M) > tol || (M - h) > tol) begin
          failures++; $display("model %0d M[%0d][%0d] = %g expected %g", model, r, c, h, M);
        end
      end
    end
    // memoized R in DRAM
    for (int r = 0; r < P; r++)
      for (int c = 0; c < P; c++) R[r][c] = real'(dram[DAW'(model * P + r)][c]) / 4294967296.0;
    for (int a = 0; a < P; a++)
      for (int b = 0; b < P; b++) begin
        h = 0;
        for (int k = 0; k < P; k++) h += R[k][a] * R[k][b];
        checks++;
        tol = 1e-6 * G[model][a][b] + 1e-2;
        if ((h - G[model][a][b]) > tol || (G[model][a][b] - h) > tol) begin
          failures++; $display("model %0d stored R: Gram[%0d][%0d] = %f expected %f", model, a, b, h, G[model][a][b]);
        end
      end
    @(negedge clk); done_ack = '0; done_ack[te] = 1'b1;
    @(negedge clk); done_ack = '0;
  endtask

  task automatic expect_seen(string what, int n);
    checks++;
    if (n == 0) begin failures++; $display("mechanism never exercised: %s", what); end
    else $display("%s: %0d", what, n);
  endtask

  initial begin
    int teA, teB, teC, teD;
    cmd_valid = 0; cmd_mid = '0; cmd_mode = MODE_COLD; cmd_nrows = '0; cmd_xaddr = '0;
    done_ack = '0; hm_te = '0; hm_idx = '0; rd_pend = 0; lat = 0;
    for (int m = 0; m < 2; m++) for (int a = 0; a < P; a++) for (int b = 0; b < P; b++) G[m][a][b] = 0;
    repeat (3) @(posedge clk); rst_n = 1;

    stage(0, 2 * ROWS + 5, XSTAGE, ROWS);      // 3 tiles, column 2 zero in tile 0
    stage(1, ROWS + 3, XSTAGE + 64, 0);       // 2 tiles
    issue(0, MODE_COLD, 2 * ROWS + 5, XSTAGE, teA);
    issue(1, MODE_COLD, ROWS + 3, XSTAGE + 64, teB);
    checks++;
    if (teA == teB) begin failures++; $display("both jobs on engine %0d", teA); end
    finish_job(0, teA);
    finish_job(1, teB);

    stage(0, XROWS, XSTAGE + 128, 0);         // full X_delta region
    issue(0, MODE_INCR, XROWS, XSTAGE + 128, teC);
    stage(1, 3, XSTAGE + 192, 0);             // fewer rows than key length
    issue(1, MODE_INCR, 3, XSTAGE + 192, teD);
    finish_job(0, teC);
    finish_job(1, teD);

    expect_seen("cold jobs", n_cold);
    expect_seen("incremental jobs", n_incr);
    expect_seen("tree reduction rounds", n_red);
    expect_seen("odd pass-through factors", n_odd);
    expect_seen("multi-round PU scheduling", n_multi);
    expect_seen("zero-column skips", n_skip);
    expect_seen("concurrent engines (cycles)", n_conc);
    expect_seen("jobs held by busy DMA (cycles)", n_hold);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
