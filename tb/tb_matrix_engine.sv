// tb_matrix_engine: self-checking test of the Heller-inverse / GEMM engine.
//
// Loads random well-conditioned upper-triangular R matrices (P = 6, not a
// multiple of the 4 x 4 array, so padding is exercised; three doubling
// levels) and compares M = R^-1 R^-T element by element with a reference
// computed here by back substitution in real arithmetic.  Also checks the
// cycle count against the schedule: P divisions of 66 cycles plus
// (levels*2 + 1) GEMMs of NT^2 tiles of (PP + 2S) cycles plus PP update
// cycles per level.
module tb_matrix_engine;
  import sia_pkg::*;

  localparam int P = 6, S = 4, NT = (P + S - 1) / S, PP = NT * S, PA = $clog2(P);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic ld_valid, start, busy, done;
  logic [PA-1:0] ld_idx, rd_idx;
  fx_t [P-1:0] ld_row, rd_row;

  matrix_engine #(.P(P), .S(S)) dut (.*);

  int checks = 0, failures = 0;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_case();
    real R [P][P], Ri [P][P], M, h, tol, s;
    int cyc, exp_cyc, levels;
    for (int r = 0; r < P; r++)
      for (int c = 0; c < P; c++)
        R[r][c] = (c < r) ? 0.0 : (c == r) ? real'($urandom_range(250) + 20) * (($urandom_range(1) == 1) ? 1.0 : -1.0)
                                             : real'(int'($urandom_range(200)) - 100) / 4.0;
    // reference inverse by back substitution
    for (int c = 0; c < P; c++)
      for (int r = P - 1; r >= 0; r--) begin
        s = (r == c) ? 1.0 : 0.0;
        for (int k = r + 1; k < P; k++) s -= R[r][k] * Ri[k][c];
        Ri[r][c] = s / R[r][r];
      end
    @(negedge clk);
    for (int r = 0; r < P; r++) begin
      ld_valid = 1; ld_idx = PA'(r);
      for (int c = 0; c < P; c++) ld_row[c] = fx_t'(R[r][c] * 4294967296.0);
      @(negedge clk);
    end
    ld_valid = 0; start = 1;
    @(negedge clk); start = 0; cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    levels = 0;
    for (int b = 1; b < P; b *= 2) levels++;
    exp_cyc = 2 + P * 67 + (2 * levels + 1) * NT * NT * (PP + 2 * S) + levels * PP;
    checks++;
    if (cyc < exp_cyc - 4 || cyc > exp_cyc + 4) begin
      failures++; $display("latency %0d cycles, schedule says %0d", cyc, exp_cyc);
    end
    for (int r = 0; r < P; r++) begin
      rd_idx = PA'(r); #1;
      for (int c = 0; c < P; c++) begin
        M = 0;
        for (int k = 0; k < P; k++) M += Ri[r][k] * Ri[c][k];
        h = real'(rd_row[c]) / 4294967296.0;
        tol = 1e-8 + 1e-4 * (M < 0 ? -M : M);
        checks++;
        if ((h - M) > tol || (M - h) > tol) begin
          failures++; $display("M[%0d][%0d] = %g expected %g", r, c, h, M);
        end
      end
    end
  endtask

  initial begin
    ld_valid = 0; start = 0; ld_idx = '0; rd_idx = '0; ld_row = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    repeat (3) run_case();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
