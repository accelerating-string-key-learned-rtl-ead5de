// tb_systolic_array: self-checking test of the S x S systolic array.  Feeds
// skewed rows of A and columns of B (A[r][t-r], B[t-c][c]) for random
// integer-valued Q31.32 matrices and compares every accumulator with the
// product computed here, after exactly K + 2S - 2 enabled cycles.  Two
// products in a row check that `clear` restarts the sums.
module tb_systolic_array;
  import sia_pkg::*;
  localparam int S = 3, K = 5;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clear, en;
  fx_t [S-1:0] a_in, b_in;
  acc_t acc [S][S];
  systolic_array #(.S(S)) dut (.*);
  int checks = 0, failures = 0;
  longint A [S][K], B [K][S];

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    clear = 0; en = 0; a_in = '0; b_in = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int rep = 0; rep < 2; rep++) begin
      for (int r = 0; r < S; r++) for (int k = 0; k < K; k++) A[r][k] = longint'($urandom_range(200)) - 100;
      for (int k = 0; k < K; k++) for (int c = 0; c < S; c++) B[k][c] = longint'($urandom_range(200)) - 100;
      for (int t = 0; t <= K + 2 * S - 3; t++) begin
        @(negedge clk);
        en = 1; clear = (t == 0);
        for (int r = 0; r < S; r++) a_in[r] = (t - r >= 0 && t - r < K) ? fx_t'(A[r][t - r]) <<< FRAC : '0;
        for (int c = 0; c < S; c++) b_in[c] = (t - c >= 0 && t - c < K) ? fx_t'(B[t - c][c]) <<< FRAC : '0;
      end
      @(negedge clk); en = 0; clear = 0;
      for (int r = 0; r < S; r++)
        for (int c = 0; c < S; c++) begin
          longint e;
          e = 0;
          for (int k = 0; k < K; k++) e += A[r][k] * B[k][c];
          checks++;
          if ((acc[r][c] >>> (2 * FRAC)) != acc_t'(e)) begin
            failures++; $display("C[%0d][%0d] = %0d expected %0d", r, c, acc[r][c] >>> (2 * FRAC), e);
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
