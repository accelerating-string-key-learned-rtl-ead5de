// tb_outer_loop_pe: self-checking test of the outer-loop PE.  The testbench
// plays the matrix buffer (column i) and the reflector buffer.  For random
// columns and start rows it checks the reflector (masked copy of the column,
// ref[i] = x_i + sign(x_i)*||x||) and gamma, decoded from recip/lz as
// -recip*2^(lz-126), against -2/dot(ref,ref) computed here in real
// arithmetic; an all-zero column must raise `skip`.
module tb_outer_loop_pe;
  import sia_pkg::*;
  localparam int LANES = 2, ROWS = 8, NWD = ROWS / LANES, WA = $clog2(NWD), RA = $clog2(ROWS + 1);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, ref_we, ref_e_we, g_skip, done;
  logic [RA-1:0] i, m, ref_e_idx;
  logic [WA-1:0] col_addr, ref_addr;
  fx_t [LANES-1:0] col_word, ref_wdata;
  fx_t ref_e_data;
  logic [64:0] g_recip;
  logic [7:0] g_lz;
  outer_loop_pe #(.LANES(LANES), .ROWS(ROWS)) dut (.*);
  int checks = 0, failures = 0;
  fx_t col [ROWS];
  fx_t refv [ROWS];

  always_comb for (int l = 0; l < LANES; l++) col_word[l] = col[int'(col_addr) * LANES + l];
  always @(posedge clk) begin
    if (ref_we) for (int l = 0; l < LANES; l++) refv[int'(ref_addr) * LANES + l] <= ref_wdata[l];
    if (ref_e_we) refv[ref_e_idx] <= ref_e_data;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic run(int ii, int mm, bit zero);
    real x [ROWS], nrm, dd, g_hw, g_ref, e;
    for (int r = 0; r < ROWS; r++) begin
      x[r] = zero ? 0.0 : real'(int'($urandom_range(4000)) - 2000) / 8.0;
      col[r] = fx_t'(x[r] * 4294967296.0);
      refv[r] = fx_t'(64'hDEAD);
    end
    @(negedge clk); i = RA'(ii); m = RA'(mm); start = 1;
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    nrm = 0;
    for (int r = ii; r < mm; r++) nrm += x[r] * x[r];
    nrm = $sqrt(nrm);
    checks++;
    if (zero) begin
      if (!g_skip) begin failures++; $display("zero column not skipped"); end
      return;
    end
    if (g_skip) begin failures++; $display("skip raised on nonzero column"); end
    dd = 0;
    for (int r = ii; r < mm; r++) begin
      real rv;
      rv = (r == ii) ? x[r] + ((x[r] >= 0) ? nrm : -nrm) : x[r];
      dd += rv * rv;
      e = real'(refv[r]) / 4294967296.0 - rv;
      checks++;
      if (e > 1e-6 || e < -1e-6) begin failures++; $display("ref[%0d] = %f expected %f", r, real'(refv[r]) / 4294967296.0, rv); end
    end
    for (int r = (ii / LANES) * LANES; r < ii; r++) begin
      checks++;
      if (refv[r] != 0) begin failures++; $display("ref[%0d] above i not zero", r); end
    end
    g_ref = -2.0 / dd;
    g_hw = -real'(g_recip) * $pow(2.0, real'(int'(g_lz) - 126));
    checks++;
    if ((g_hw - g_ref) / g_ref > 1e-6 || (g_hw - g_ref) / g_ref < -1e-6) begin
      failures++; $display("gamma %g expected %g", g_hw, g_ref);
    end
  endtask

  initial begin
    start = 0; i = '0; m = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int k = 0; k < 20; k++) begin
      int ii, mm;
      ii = int'($urandom_range(ROWS - 1));
      mm = int'($urandom_range(ROWS, ii + 1));
      run(ii, mm, 0);
    end
    run(1, ROWS, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
