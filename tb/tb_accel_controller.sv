// tb_accel_controller: self-checking test of the job scheduler.  The
// testbench plays the DMA and two engines with fixed latencies and checks
// the job life cycle: a job is given to the lowest free engine, loaded
// (DMA LOAD with the job's fields), started, stored back (DMA STORE for the
// right model) and flagged done; a second job goes to the other engine; no
// job is accepted while both engines are taken; done_ack frees an engine.
module tb_accel_controller;
  import sia_pkg::*;
  localparam int NUM_TE = 2, XROWS = 8, DAW = 8, MIDW = 4, NA = $clog2(XROWS + 1), TA = 1;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic cmd_valid, cmd_ready, dma_start, dma_store, dma_busy, dma_done;
  logic [MIDW-1:0] cmd_mid, dma_mid;
  train_mode_e cmd_mode, dma_mode;
  logic [NA-1:0] cmd_nrows, dma_nrows;
  logic [DAW-1:0] cmd_xaddr, dma_xaddr;
  logic [TA-1:0] cmd_te, dma_te;
  logic [NUM_TE-1:0] te_done_flag, te_active, done_ack, te_start, te_done;
  train_mode_e te_mode [NUM_TE];
  logic [NA-1:0] te_nrows [NUM_TE];
  accel_controller #(.NUM_TE(NUM_TE), .XROWS(XROWS), .DAW(DAW), .MIDW(MIDW)) dut (.*);
  int checks = 0, failures = 0;
  int loads = 0, stores = 0, starts = 0;
  logic [MIDW-1:0] store_mid [$];

  // DMA model: 6 cycles per job
  int dcnt;
  always @(posedge clk) begin
    dma_done <= 0;
    if (dma_start) begin
      dma_busy <= 1; dcnt <= 6;
      if (dma_store) begin stores++; store_mid.push_back(dma_mid); end else loads++;
    end else if (dma_busy) begin
      if (dcnt == 0) begin dma_busy <= 0; dma_done <= 1; end else dcnt <= dcnt - 1;
    end
  end
  // engine model: done 20 cycles after start
  int ecnt [NUM_TE];
  always @(posedge clk) for (int t = 0; t < NUM_TE; t++) begin
    te_done[t] <= 0;
    if (te_start[t]) begin ecnt[t] <= 20; starts++; end
    else if (ecnt[t] > 0) begin if (ecnt[t] == 1) te_done[t] <= 1; ecnt[t] <= ecnt[t] - 1; end
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic chk(bit c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic issue(int m, output int te);
    @(negedge clk); cmd_valid = 1; cmd_mid = MIDW'(m); cmd_mode = MODE_INCR; cmd_nrows = NA'(m + 1); cmd_xaddr = DAW'(10 * m);
    #1; while (!cmd_ready) begin @(negedge clk); #1; end
    chk(dma_start && !dma_store && dma_mid == MIDW'(m) && dma_nrows == NA'(m + 1) && dma_xaddr == DAW'(10 * m), "load job fields");
    te = int'(cmd_te);
    @(negedge clk); cmd_valid = 0;
  endtask

  initial begin
    int ta, tb2;
    cmd_valid = 0; cmd_mid = '0; cmd_mode = MODE_COLD; cmd_nrows = '0; cmd_xaddr = '0; done_ack = '0;
    dma_busy = 0; dma_done = 0; te_done = '0; dcnt = 0; ecnt[0] = 0; ecnt[1] = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    issue(3, ta);
    chk(ta == 0, "first job on engine 0");
    issue(7, tb2);
    chk(tb2 == 1, "second job on engine 1");
    // both engines taken: a third job must wait
    @(negedge clk); cmd_valid = 1; cmd_mid = 1; #1;
    chk(!cmd_ready, "no free engine -> not ready");
    @(negedge clk); cmd_valid = 0;
    while (te_done_flag != 2'b11) @(negedge clk);
    chk(loads == 2 && stores == 2 && starts == 2, "two loads, two starts, two stores");
    chk(store_mid.size() == 2 && store_mid[0] == 3 && store_mid[1] == 7, "stores for models 3 then 7");
    chk(te_mode[0] == MODE_INCR && te_nrows[1] == NA'(8), "engine job registers");
    done_ack = 2'b01; @(negedge clk); done_ack = '0; @(negedge clk);
    chk(te_done_flag == 2'b10 && te_active == 2'b10, "ack frees engine 0 only");
    issue(2, ta);
    chk(ta == 0, "freed engine reused");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
