// tb_sia_full: one complete retraining with the accelerator at its default
// size (key length 96, four training engines of two PUs each).
//
// A model is cold-trained on 200 new keys (two tiles, so the two PUs work in
// parallel and one reduction follows), then incrementally retrained with 40
// more keys folded into the memoized R.  After each job M must match
// (X^T X)^-1 over all keys (Gauss-Jordan in real arithmetic here) and the R
// written back to DRAM must satisfy R^T R = X^T X.  Cycle counts are printed.
module tb_sia_full;
  import sia_pkg::*;

  localparam int P = 96, XROWS = 768, DAW = 20, MIDW = 12, NUM_TE = 4;
  localparam int NA = $clog2(XROWS + 1), PA = $clog2(P), TA = 2;
  localparam int XSTAGE = 4096;

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

  int checks = 0, failures = 0;
  real G [P][P];

  initial begin
    repeat (20000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic stage(int n, int base);
    for (int r = 0; r < n; r++) begin
      fx_t [P-1:0] row;
      for (int c = 0; c < P; c++) row[c] = fx_t'(longint'($urandom_range(255))) <<< FRAC;
      dram[base + r] = row;
      for (int a = 0; a < P; a++)
        for (int b = 0; b < P; b++)
          G[a][b] += real'(row[a] >>> FRAC) * real'(row[b] >>> FRAC);
    end
  endtask

  task automatic job(train_mode_e md, int n, int base);
    real A [P][2*P], f, M, h, tol, mx;
    real R [P][P];
    int te, cyc;
    @(negedge clk);
    cmd_valid = 1; cmd_mid = MIDW'(7); cmd_mode = md; cmd_nrows = NA'(n); cmd_xaddr = DAW'(base);
    #1;
    while (!cmd_ready) begin @(negedge clk); #1; end
    te = int'(cmd_te);
    @(negedge clk); cmd_valid = 0; cyc = 1;
    while (!te_done_flag[te]) begin @(negedge clk); cyc++; end
    $display("mode %0d, %0d new keys: %0d cycles", md, n, cyc);
    for (int r = 0; r < P; r++)
      for (int c = 0; c < 2 * P; c++) A[r][c] = (c < P) ? G[r][c] : ((c - P == r) ? 1.0 : 0.0);
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
      mx = 0;
      for (int c = 0; c < P; c++) mx = (A[r][P + c] > mx) ? A[r][P + c] : ((-A[r][P + c] > mx) ? -A[r][P + c] : mx);
      for (int c = 0; c < P; c++) begin
        M = A[r][P + c];
        h = real'(hm_row[c]) / 4294967296.0;
        tol = 1e-2 * mx + 1e-9;
        checks++;
        if ((h - M) > tol || (M - h) > tol) begin
          failures++;
          if (failures < 10) $display("M[%0d][%0d] = %g expected %g", r, c, h, M);
        end
      end
    end
    for (int r = 0; r < P; r++)
      for (int c = 0; c < P; c++) R[r][c] = real'(dram[7 * P + r][c]) / 4294967296.0;
    for (int a = 0; a < P; a++)
      for (int b = 0; b < P; b++) begin
        h = 0;
        for (int k = 0; k < P; k++) h += R[k][a] * R[k][b];
        tol = 1e-6 * G[a][b] + 1.0;
        checks++;
        if ((h - G[a][b]) > tol || (G[a][b] - h) > tol) begin
          failures++;
          if (failures < 10) $display("stored R: Gram[%0d][%0d] = %f expected %f", a, b, h, G[a][b]);
        end
      end
    @(negedge clk); done_ack = '0; done_ack[te] = 1'b1;
    @(negedge clk); done_ack = '0;
  endtask

  initial begin
    cmd_valid = 0; cmd_mid = '0; cmd_mode = MODE_COLD; cmd_nrows = '0; cmd_xaddr = '0;
    done_ack = '0; hm_te = '0; hm_idx = '0;
    for (int a = 0; a < P; a++) for (int b = 0; b < P; b++) G[a][b] = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    stage(200, XSTAGE);
    job(MODE_COLD, 200, XSTAGE);
    stage(40, XSTAGE + 1024);
    job(MODE_INCR, 40, XSTAGE + 1024);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
