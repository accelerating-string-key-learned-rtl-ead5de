// sia_top: the FPGA accelerator for memoized incremental training of
// learned-index linear models.  NUM_TE training engines, one accelerator
// controller and one DMA controller; the board DRAM (holding staged X_delta
// rows and the per-model memoized R_old matrices) is outside and reached
// through the dram_* port.
//
// Use: (1) the host stages the new key rows of a model in DRAM (one row of P
// Q31.32 key elements per DRAM word) and (2) writes a job on cmd_*; the
// controller answers with the engine number on cmd_te.  The DMA copies the
// rows and, for an incremental job, the model's R_old (DRAM words mid*P ..)
// into that engine; the engine factorises, folds in R_old, inverts R_new and
// forms M = R_new^-1 R_new^-T; the DMA writes R_new back over R_old; then
// te_done_flag[te] rises.  The host reads M row by row through hm_te/hm_idx/
// hm_row (beta = M X^T Y is formed on the host) and pulses done_ack[te].
// Engines work concurrently; DMA transfers are serialised.
// Lint note: rst_n feeds both the asynchronous flop resets and the
// assertions' `disable iff` (SYNCASYNCNET, harmless).
module sia_top
  import sia_pkg::*;
#(
  parameter int P          = 96,
  parameter int NUM_TE     = 4,
  parameter int NUM_PU     = 2,
  parameter int LANES      = 4,
  parameter int N_INNER    = 3,
  parameter int SA_DIM     = 8,
  parameter int XROWS      = 768,
  parameter int DAW        = 20,
  parameter int MIDW       = 12,
  localparam int ROWS      = 2 * P,
  localparam int NSLOT     = (XROWS + ROWS - 1) / ROWS,
  localparam int DEPTH     = XROWS + P + NSLOT * P,
  localparam int AA        = $clog2(DEPTH),
  localparam int PA        = $clog2(P),
  localparam int NA        = $clog2(XROWS + 1),
  localparam int TA        = (NUM_TE > 1) ? $clog2(NUM_TE) : 1
) (
  input  logic               clk,
  input  logic               rst_n,
  // host job registers
  input  logic               cmd_valid,
  output logic               cmd_ready,
  input  logic [MIDW-1:0]    cmd_mid,
  input  train_mode_e        cmd_mode,
  input  logic [NA-1:0]      cmd_nrows,
  input  logic [DAW-1:0]     cmd_xaddr,
  output logic [TA-1:0]      cmd_te,
  output logic [NUM_TE-1:0]  te_done_flag,
  output logic [NUM_TE-1:0]  te_active,
  input  logic [NUM_TE-1:0]  done_ack,
  // host result read
  input  logic [TA-1:0]      hm_te,
  input  logic [PA-1:0]      hm_idx,
  output fx_t  [P-1:0]       hm_row,
  // board DRAM
  output logic               dram_req,
  output logic               dram_we,
  output logic [DAW-1:0]     dram_addr,
  output fx_t  [P-1:0]       dram_wdata,
  input  logic               dram_gnt,
  input  logic               dram_rvalid,
  input  fx_t  [P-1:0]       dram_rdata
);

  logic [NUM_TE-1:0] te_start, te_busy, te_done;
  train_mode_e       te_mode  [NUM_TE];
  logic [NA-1:0]     te_nrows [NUM_TE];

  logic              dma_start, dma_store, dma_busy, dma_done;
  logic [TA-1:0]     dma_te, te_sel;
  logic [MIDW-1:0]   dma_mid;
  train_mode_e       dma_mode;
  logic [NA-1:0]     dma_nrows;
  logic [DAW-1:0]    dma_xaddr;
  logic              sp_re, sp_we;
  logic [AA-1:0]     sp_addr;
  fx_t  [P-1:0]      sp_wdata;
  fx_t  [P-1:0]      te_rdata [NUM_TE];
  fx_t  [P-1:0]      te_mrow  [NUM_TE];
  fx_t  [P-1:0]      sp_rdata;

  accel_controller #(.NUM_TE(NUM_TE), .XROWS(XROWS), .DAW(DAW), .MIDW(MIDW)) u_ctrl (
    .clk, .rst_n,
    .cmd_valid, .cmd_ready, .cmd_mid, .cmd_mode, .cmd_nrows, .cmd_xaddr, .cmd_te,
    .te_done_flag, .te_active, .done_ack,
    .te_start, .te_mode, .te_nrows, .te_done,
    .dma_start, .dma_store, .dma_te, .dma_mid, .dma_mode, .dma_nrows, .dma_xaddr,
    .dma_busy, .dma_done);

  dma_controller #(.P(P), .NUM_TE(NUM_TE), .XROWS(XROWS), .DAW(DAW), .MIDW(MIDW)) u_dma (
    .clk, .rst_n,
    .start(dma_start), .store(dma_store), .te(dma_te), .mid(dma_mid), .mode(dma_mode),
    .n_rows(dma_nrows), .x_addr(dma_xaddr), .busy(dma_busy), .done(dma_done),
    .dram_req, .dram_we, .dram_addr, .dram_wdata, .dram_gnt, .dram_rvalid, .dram_rdata,
    .te_sel, .sp_re, .sp_we, .sp_addr, .sp_wdata, .sp_rdata);

  for (genvar t = 0; t < NUM_TE; t++) begin : g_te
    training_engine #(.P(P), .NUM_PU(NUM_PU), .LANES(LANES), .N_INNER(N_INNER),
                      .SA_DIM(SA_DIM), .XROWS(XROWS)) u_te (
      .clk, .rst_n,
      .start(te_start[t]), .mode(te_mode[t]), .n_rows(te_nrows[t]),
      .busy(te_busy[t]), .done(te_done[t]),
      .ext_re(sp_re && te_sel == TA'(t)), .ext_we(sp_we && te_sel == TA'(t)),
      .ext_addr(sp_addr), .ext_wdata(sp_wdata), .ext_rdata(te_rdata[t]),
      .m_rd_idx(hm_idx), .m_rd_row(te_mrow[t]));
  end

  always_comb begin
    sp_rdata = te_rdata[0];
    hm_row   = te_mrow[0];
    for (int t = 0; t < NUM_TE; t++) begin
      if (te_sel == TA'(t)) sp_rdata = te_rdata[t];
      if (hm_te == TA'(t))  hm_row   = te_mrow[t];
    end
  end

  // An engine is only started while idle.
  for (genvar t = 0; t < NUM_TE; t++) begin : g_chk
    assert property (@(posedge clk) disable iff (!rst_n) te_start[t] |-> !te_busy[t]);
  end

endmodule
