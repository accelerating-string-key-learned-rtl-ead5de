// tb_qrd_pu: self-checking test of one QRD processing unit.
//
// Loads random key-like matrices (byte values, as a string key matrix would
// hold) into the PU, runs the factorisation and checks, independently of the
// Householder sign convention, that R is upper triangular and that
// R^T R = X^T X (the Gram matrix the regression needs), element by element
// with a relative tolerance, computed here in real arithmetic.  Cases: a full
// tall tile (m = ROWS), a short tile (m < P), and a tile with an all-zero
// column (exercises the skip path of the outer loop PE).
module tb_qrd_pu;
  import sia_pkg::*;

  localparam int P = 8, ROWS = 16, LANES = 4, N_INNER = 3;
  localparam int RA = $clog2(ROWS + 1), PA = $clog2(P);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic ld_valid, start, busy, done;
  logic [RA-1:0] ld_idx, m;
  fx_t [P-1:0] ld_row, rd_row;
  logic [PA-1:0] rd_idx;

  qrd_pu #(.P(P), .ROWS(ROWS), .LANES(LANES), .N_INNER(N_INNER)) dut (.*);

  int checks = 0, failures = 0;
  real X [ROWS][P];
  real R [P][P];

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_case(int rows, int zero_col);
    real g, h, tol;
    for (int r = 0; r < rows; r++)
      for (int c = 0; c < P; c++)
        X[r][c] = (c == zero_col) ? 0.0 : real'($urandom_range(255));
    @(negedge clk);
    for (int r = 0; r < rows; r++) begin
      ld_valid = 1; ld_idx = RA'(r);
      for (int c = 0; c < P; c++) ld_row[c] = fx_t'(longint'(X[r][c])) <<< FRAC;
      @(negedge clk);
    end
    ld_valid = 0; m = RA'(rows); start = 1;
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    $display("rows=%0d done at %0t", rows, $time);
    for (int r = 0; r < P; r++) begin
      rd_idx = PA'(r); #1;
      for (int c = 0; c < P; c++) R[r][c] = real'(rd_row[c]) / 4294967296.0;
    end
    for (int r = 0; r < P; r++)
      for (int c = 0; c < r; c++) begin
        checks++;
        if (R[r][c] != 0.0) begin failures++; $display("R[%0d][%0d] below diagonal = %f", r, c, R[r][c]); end
      end
    for (int a = 0; a < P; a++)
      for (int b = 0; b < P; b++) begin
        g = 0; h = 0;
        for (int r = 0; r < rows; r++) g += X[r][a] * X[r][b];
        for (int k = 0; k < P; k++) h += R[k][a] * R[k][b];
        tol = 1e-6 * (1.0 + (g < 0 ? -g : g)) + 1e-3;
        checks++;
        if ((g - h) > tol || (h - g) > tol) begin
          failures++;
          $display("rows=%0d Gram[%0d][%0d]: R^T R = %f, X^T X = %f", rows, a, b, h, g);
        end
      end
  endtask

  initial begin
    ld_valid = 0; start = 0; ld_idx = '0; m = '0; ld_row = '0; rd_idx = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    run_case(ROWS, -1);
    run_case(5, -1);
    run_case(12, 3);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
