// tb_dma_controller: self-checking test of the DMA controller against a
// behavioural DRAM with random grant/read latency and two model scratchpads.
// A cold LOAD must copy only X_delta, an incremental LOAD X_delta and the
// model's R_old (DRAM words mid*P..) into the selected engine, a STORE the
// engine's R region back to DRAM words mid*P..; every copied word is compared
// with the source.
module tb_dma_controller;
  import sia_pkg::*;
  localparam int P = 3, NUM_TE = 2, XROWS = 6, DAW = 8, MIDW = 3;
  localparam int ROWS = 2 * P, NSLOT = 1, DEPTH = XROWS + P + NSLOT * P, AA = $clog2(DEPTH);
  localparam int NA = $clog2(XROWS + 1), TA = 1;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, store, busy, done, dram_req, dram_we, dram_gnt, dram_rvalid, sp_re, sp_we;
  logic [TA-1:0] te, te_sel;
  logic [MIDW-1:0] mid;
  train_mode_e mode;
  logic [NA-1:0] n_rows;
  logic [DAW-1:0] x_addr, dram_addr;
  fx_t [P-1:0] dram_wdata, dram_rdata, sp_wdata, sp_rdata;
  logic [AA-1:0] sp_addr;
  dma_controller #(.P(P), .NUM_TE(NUM_TE), .XROWS(XROWS), .DAW(DAW), .MIDW(MIDW)) dut (.*);
  int checks = 0, failures = 0;

  fx_t [P-1:0] dram [1 << DAW];
  fx_t [P-1:0] spm [NUM_TE][DEPTH];
  logic rd_pend; int lat; logic [DAW-1:0] rq;
  always @(posedge clk) begin
    dram_gnt <= 0; dram_rvalid <= 0;
    if (dram_req && !dram_gnt && !rd_pend && $urandom_range(1) == 0) begin
      dram_gnt <= 1;
      if (dram_we) dram[dram_addr] <= dram_wdata;
      else begin rd_pend <= 1; rq <= dram_addr; lat <= int'($urandom_range(3)); end
    end
    if (rd_pend) begin
      if (lat == 0) begin dram_rvalid <= 1; dram_rdata <= dram[rq]; rd_pend <= 0; end
      else lat <= lat - 1;
    end
    if (sp_we) spm[te_sel][sp_addr] <= sp_wdata;
    if (sp_re) sp_rdata <= spm[te_sel][sp_addr];
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic go(bit st, int t, int md, train_mode_e mo, int n, int xa);
    @(negedge clk); start = 1; store = st; te = TA'(t); mid = MIDW'(md); mode = mo; n_rows = NA'(n); x_addr = DAW'(xa);
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);
  endtask

  task automatic cmp(fx_t [P-1:0] a, fx_t [P-1:0] b, string what);
    checks++;
    if (a !== b) begin failures++; $display("%s differs", what); end
  endtask

  initial begin
    start = 0; store = 0; te = '0; mid = '0; mode = MODE_COLD; n_rows = '0; x_addr = '0; rd_pend = 0; lat = 0;
    for (int w = 0; w < (1 << DAW); w++) for (int c = 0; c < P; c++) dram[w][c] = fx_t'({$urandom, $urandom});
    for (int t = 0; t < NUM_TE; t++) for (int w = 0; w < DEPTH; w++) spm[t][w] = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    // cold load of 5 rows into engine 1: R region must stay untouched
    go(0, 1, 2, MODE_COLD, 5, 100);
    for (int r = 0; r < 5; r++) cmp(spm[1][r], dram[100 + r], "cold X row");
    for (int r = 0; r < P; r++) cmp(spm[1][XROWS + r], '0, "cold R region");
    // incremental load into engine 0 for model 3
    go(0, 0, 3, MODE_INCR, 4, 150);
    for (int r = 0; r < 4; r++) cmp(spm[0][r], dram[150 + r], "incr X row");
    for (int r = 0; r < P; r++) cmp(spm[0][XROWS + r], dram[3 * P + r], "incr R_old row");
    // store engine 1's R region as model 5's R
    for (int r = 0; r < P; r++) for (int c = 0; c < P; c++) spm[1][XROWS + r][c] = fx_t'({$urandom, $urandom});
    go(1, 1, 5, MODE_COLD, 0, 0);
    for (int r = 0; r < P; r++) cmp(dram[5 * P + r], spm[1][XROWS + r], "stored R_new row");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
