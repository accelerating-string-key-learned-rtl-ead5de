// tb_qrd_unit: self-checking test of the QRD unit with its scratchpad.
//
// Step 1 (cold): X1 with 5 tiles of rows (an odd count, so the reduction tree
// has a pass-through factor and several PU rounds) is factorised; R must
// satisfy R^T R = X1^T X1.  Step 2 (incremental): new rows X2 are written
// over the X_delta region and the memoized R is folded in; the result must
// satisfy R^T R = X1^T X1 + X2^T X2, i.e. equal a from-scratch factorisation
// of all keys.  Step 3: a single short tile, incremental.  References are
// computed here in real arithmetic.
module tb_qrd_unit;
  import sia_pkg::*;

  localparam int P = 4, NUM_PU = 2, LANES = 2, N_INNER = 2;
  localparam int ROWS = 2 * P, XROWS = 5 * ROWS;
  localparam int NSLOT = (XROWS + ROWS - 1) / ROWS;
  localparam int DEPTH = XROWS + P + NSLOT * P, AA = $clog2(DEPTH);
  localparam int NA = $clog2(XROWS + 1);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, busy, done;
  train_mode_e mode;
  logic [NA-1:0] n_rows;
  logic sp_re, sp_we, b_re, b_we;
  logic [AA-1:0] sp_addr, b_addr;
  fx_t [P-1:0] sp_wdata, sp_rdata, b_wdata, b_rdata;

  qrd_unit #(.P(P), .NUM_PU(NUM_PU), .LANES(LANES), .N_INNER(N_INNER), .XROWS(XROWS)) dut (
    .clk, .rst_n, .start, .mode, .n_rows, .busy, .done,
    .sp_re, .sp_we, .sp_addr, .sp_wdata, .sp_rdata);

  scratchpad #(.P(P), .XROWS(XROWS), .NSLOT(NSLOT)) u_sp (
    .clk, .a_re(sp_re), .a_we(sp_we), .a_addr(sp_addr), .a_wdata(sp_wdata), .a_rdata(sp_rdata),
    .b_re, .b_we, .b_addr, .b_wdata, .b_rdata);

  int checks = 0, failures = 0;
  real G [P][P];

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic write_x(int n);
    real v;
    for (int r = 0; r < n; r++) begin
      @(negedge clk);
      b_we = 1; b_addr = AA'(r);
      for (int c = 0; c < P; c++) begin
        v = real'($urandom_range(255));
        b_wdata[c] = fx_t'(longint'(v)) <<< FRAC;
      end
      for (int a = 0; a < P; a++)
        for (int b = 0; b < P; b++)
          G[a][b] += real'(b_wdata[a] >>> FRAC) * real'(b_wdata[b] >>> FRAC);
    end
    @(negedge clk); b_we = 0;
  endtask

  task automatic run(train_mode_e md, int n);
    int cyc = 0;
    @(negedge clk); mode = md; n_rows = NA'(n); start = 1;
    @(negedge clk); start = 0;
    while (!done) begin @(negedge clk); cyc++; end
    $display("mode=%0d rows=%0d took %0d cycles", md, n, cyc);
  endtask

  task automatic check_r();
    real R [P][P];
    real h, tol;
    for (int r = 0; r < P; r++) begin
      @(negedge clk); b_re = 1; b_addr = AA'(XROWS + r);
      @(negedge clk); b_re = 0;
      for (int c = 0; c < P; c++) R[r][c] = real'(b_rdata[c]) / 4294967296.0;
    end
    for (int a = 0; a < P; a++)
      for (int b = 0; b < P; b++) begin
        h = 0;
        for (int k = 0; k < P; k++) h += R[k][a] * R[k][b];
        tol = 1e-6 * (G[a][b] < 0 ? -G[a][b] : G[a][b]) + 1e-2;
        checks++;
        if ((h - G[a][b]) > tol || (G[a][b] - h) > tol) begin
          failures++;
          $display("Gram[%0d][%0d]: R^T R = %f expected %f", a, b, h, G[a][b]);
        end
        if (b < a) begin
          checks++;
          if (R[a][b] != 0.0) begin failures++; $display("R[%0d][%0d] not zero", a, b); end
        end
      end
  endtask

  initial begin
    start = 0; mode = MODE_COLD; n_rows = '0; b_re = 0; b_we = 0; b_addr = '0; b_wdata = '0;
    for (int a = 0; a < P; a++) for (int b = 0; b < P; b++) G[a][b] = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    write_x(XROWS - 3);          // 5 tiles, last one short
    run(MODE_COLD, XROWS - 3);
    check_r();
    write_x(2 * ROWS + 1);       // 3 tiles
    run(MODE_INCR, 2 * ROWS + 1);
    check_r();
    write_x(3);                  // fewer rows than key length
    run(MODE_INCR, 3);
    check_r();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
