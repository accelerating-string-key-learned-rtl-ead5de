// accel_controller: the accelerator's control registers and job scheduler.
//
// The host's training thread writes a job (model id, mode, number of new key
// rows, DRAM address of the staged X_delta) with a valid/ready handshake; the
// controller assigns it to the lowest-numbered available training engine
// (reported on cmd_te when the job is accepted) and steps that engine
// through LOAD (DMA copies X_delta and, for incremental jobs, R_old into its
// scratchpad) -> RUN (engine computes) -> STORE (DMA writes R_new back as
// the model's new R_old) -> DONE.  In DONE the engine's completion flag
// te_done_flag is set and M can be read; the host's done_ack pulse frees the
// engine.  Write-backs take priority over new loads on the single DMA.
// Engines run concurrently; only the DMA is shared.
// Follows the paper's control register / completion flag / "available TE"
// scheduling; the per-engine state machine and priorities are this design's.
// Lint note: rst_n feeds both the asynchronous flop reset and the
// assertion's `disable iff` (SYNCASYNCNET, harmless).
// Note: dma_nrows and dma_xaddr are the cmd_* inputs passed straight through;
// the DMA latches them on dma_start, in the cycle the job is accepted.
module accel_controller
  import sia_pkg::*;
#(
  parameter int NUM_TE = 4,
  parameter int XROWS  = 768,
  parameter int DAW    = 20,
  parameter int MIDW   = 12,
  localparam int NA    = $clog2(XROWS + 1),
  localparam int TA    = (NUM_TE > 1) ? $clog2(NUM_TE) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // host control registers
  input  logic                 cmd_valid,
  output logic                 cmd_ready,
  input  logic [MIDW-1:0]      cmd_mid,
  input  train_mode_e          cmd_mode,
  input  logic [NA-1:0]        cmd_nrows,
  input  logic [DAW-1:0]       cmd_xaddr,
  output logic [TA-1:0]        cmd_te,
  output logic [NUM_TE-1:0]    te_done_flag,
  output logic [NUM_TE-1:0]    te_active,
  input  logic [NUM_TE-1:0]    done_ack,
  // training engines
  output logic [NUM_TE-1:0]    te_start,
  output train_mode_e          te_mode  [NUM_TE],
  output logic [NA-1:0]        te_nrows [NUM_TE],
  input  logic [NUM_TE-1:0]    te_done,
  // DMA
  output logic                 dma_start,
  output logic                 dma_store,
  output logic [TA-1:0]        dma_te,
  output logic [MIDW-1:0]      dma_mid,
  output train_mode_e          dma_mode,
  output logic [NA-1:0]        dma_nrows,
  output logic [DAW-1:0]       dma_xaddr,
  input  logic                 dma_busy,
  input  logic                 dma_done
);

  typedef enum logic [2:0] {T_IDLE, T_LOAD, T_RUN, T_STPEND, T_STORE, T_DONE} te_state_e;

  te_state_e     st   [NUM_TE];
  logic [MIDW-1:0] mid_q [NUM_TE];
  logic [TA-1:0] serving;
  logic          any_idle, any_pend;
  logic [TA-1:0] idle_te, pend_te;

  always_comb begin
    any_idle = 1'b0; idle_te = '0;
    any_pend = 1'b0; pend_te = '0;
    for (int t = NUM_TE - 1; t >= 0; t--) begin
      if (st[t] == T_IDLE)   begin any_idle = 1'b1; idle_te = TA'(t); end
      if (st[t] == T_STPEND) begin any_pend = 1'b1; pend_te = TA'(t); end
    end
    cmd_ready = !dma_busy && !dma_done && !any_pend && any_idle;
    cmd_te    = idle_te;
    dma_start = !dma_busy && !dma_done && (any_pend || (cmd_valid && any_idle));
    dma_store = any_pend;
    dma_te    = any_pend ? pend_te : idle_te;
    dma_mid   = any_pend ? mid_q[pend_te] : cmd_mid;
    dma_mode  = cmd_mode;
    dma_nrows = cmd_nrows;
    dma_xaddr = cmd_xaddr;
    for (int t = 0; t < NUM_TE; t++) begin
      te_done_flag[t] = (st[t] == T_DONE);
      te_active[t]    = (st[t] != T_IDLE);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      serving <= '0; te_start <= '0;
      for (int t = 0; t < NUM_TE; t++) begin
        st[t] <= T_IDLE; mid_q[t] <= '0; te_mode[t] <= MODE_COLD; te_nrows[t] <= '0;
      end
    end else begin
      te_start <= '0;
      if (dma_start) begin
        serving <= dma_te;
        if (any_pend) st[pend_te] <= T_STORE;
        else begin
          st[idle_te]       <= T_LOAD;
          mid_q[idle_te]    <= cmd_mid;
          te_mode[idle_te]  <= cmd_mode;
          te_nrows[idle_te] <= cmd_nrows;
        end
      end
      if (dma_done) begin
        if (st[serving] == T_LOAD) begin
          st[serving]       <= T_RUN;
          te_start[serving] <= 1'b1;
        end else if (st[serving] == T_STORE) begin
          st[serving] <= T_DONE;
        end
      end
      for (int t = 0; t < NUM_TE; t++) begin
        if (st[t] == T_RUN && te_done[t]) st[t] <= T_STPEND;
        if (st[t] == T_DONE && done_ack[t]) st[t] <= T_IDLE;
      end
    end
  end

  // A job is only handed to the DMA when the DMA is free.
  assert property (@(posedge clk) disable iff (!rst_n) dma_start |-> !dma_busy);

endmodule
