// tb_inner_loop_pe: self-checking test of the inner-loop PE.  The testbench
// plays the matrix buffer column and the reflector buffer, forms gamma's
// recip/lz encoding with the language's own division, and checks the
// updated column col + gamma*dot(ref,col)*ref and R[i][j] = col[i] against
// real arithmetic; with `skip` the column must be left unchanged.  Also
// checks the pass length: 2 * words + 2 cycles.
module tb_inner_loop_pe;
  import sia_pkg::*;
  localparam int LANES = 2, ROWS = 8, NWD = ROWS / LANES, WA = $clog2(NWD), RA = $clog2(ROWS + 1);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, g_skip, col_we, done;
  logic [RA-1:0] i, m;
  logic [64:0] g_recip;
  logic [7:0] g_lz;
  logic [WA-1:0] addr;
  fx_t [LANES-1:0] col_word, ref_word, col_wdata;
  fx_t r_val;
  inner_loop_pe #(.LANES(LANES), .ROWS(ROWS)) dut (.*);
  int checks = 0, failures = 0;
  fx_t col [ROWS], refv [ROWS];

  always_comb for (int l = 0; l < LANES; l++) begin
    col_word[l] = col[int'(addr) * LANES + l];
    ref_word[l] = refv[int'(addr) * LANES + l];
  end
  always @(posedge clk) if (col_we) for (int l = 0; l < LANES; l++) col[int'(addr) * LANES + l] <= col_wdata[l];

  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic run(int ii, int mm, bit skip);
    real x [ROWS], v [ROWS], dd, dt, alpha, e, exp_v;
    logic [127:0] dq, dn;
    logic [191:0] q;
    int lz, cyc, words;
    dq = '0;
    for (int r = 0; r < ROWS; r++) begin
      x[r] = real'(int'($urandom_range(4000)) - 2000) / 8.0;
      v[r] = (r >= ii && r < mm) ? real'(int'($urandom_range(4000)) - 2000) / 8.0 : 0.0;
      col[r] = fx_t'(x[r] * 4294967296.0);
      refv[r] = fx_t'(v[r] * 4294967296.0);
      dq += 128'(acc_t'(refv[r]) * acc_t'(refv[r]));
    end
    lz = 0;
    while (lz < 128 && !dq[127 - lz]) lz++;
    dn = dq << lz;
    q = (192'(1) << 191) / {64'd0, dn};
    g_recip = q[64:0]; g_lz = 8'(lz); g_skip = skip;
    dd = 0; dt = 0;
    for (int r = 0; r < ROWS; r++) begin dd += v[r] * v[r]; dt += v[r] * x[r]; end
    alpha = skip ? 0.0 : -2.0 * dt / dd;
    @(negedge clk); i = RA'(ii); m = RA'(mm); start = 1;
    @(negedge clk); start = 0; cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    words = (mm - 1) / LANES - ii / LANES + 1;
    checks++;
    if (cyc != 2 * words + 2) begin failures++; $display("pass took %0d cycles, expected %0d", cyc, 2 * words + 2); end
    for (int r = 0; r < ROWS; r++) begin
      exp_v = x[r] + alpha * v[r];
      e = real'(col[r]) / 4294967296.0 - exp_v;
      checks++;
      if (e > 1e-5 || e < -1e-5) begin failures++; $display("col[%0d] = %f expected %f", r, real'(col[r]) / 4294967296.0, exp_v); end
    end
    checks++;
    if (r_val !== col[ii]) begin failures++; $display("r_val differs from updated col[i]"); end
  endtask

  initial begin
    start = 0; i = '0; m = '0; g_recip = '0; g_lz = '0; g_skip = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int k = 0; k < 20; k++) begin
      int ii, mm;
      ii = int'($urandom_range(ROWS - 1));
      mm = int'($urandom_range(ROWS, ii + 1));
      run(ii, mm, 0);
    end
    run(2, ROWS, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
