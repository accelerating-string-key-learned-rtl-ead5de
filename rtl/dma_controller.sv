// dma_controller: moves matrix rows between the board DRAM and the
// scratchpad of one training engine at a time.
//
// LOAD job (before training): copies n_rows rows of X_delta from DRAM words
// x_addr.. into the TE's X_delta region, then, for incremental mode only, the
// model's memoized R_old (DRAM words mid*P ..) into the TE's R region.
// STORE job (after training): copies R_new from the TE's R region back to
// DRAM words mid*P .., where it becomes the R_old of the next retraining.
// DRAM side: request/grant handshake (dram_req held until dram_gnt), one row
// (P elements) per word, read data returned with dram_rvalid; one request
// is outstanding at a time.  TE side: the selected TE's scratchpad port B
// (te_sel, synchronous read with one cycle latency).
// `start` with `store` = 0/1 launches a job; `done` pulses at its end.
// The paper gives the DMA's role (X_delta host->FPGA->scratchpad, R_old and
// R_new between DRAM and scratchpad); the protocol is this design's own.
// Note: sp_wdata is dram_rdata passed straight through; a load row is
// written into the scratchpad in the cycle it arrives (sp_we = rvalid).
module dma_controller
  import sia_pkg::*;
#(
  parameter int P          = 96,
  parameter int NUM_TE     = 4,
  parameter int XROWS      = 768,
  parameter int DAW        = 20,
  parameter int MIDW       = 12,
  localparam int ROWS      = 2 * P,
  localparam int NSLOT     = (XROWS + ROWS - 1) / ROWS,
  localparam int DEPTH     = XROWS + P + NSLOT * P,
  localparam int AA        = $clog2(DEPTH),
  localparam int NA        = $clog2(XROWS + 1),
  localparam int TA        = (NUM_TE > 1) ? $clog2(NUM_TE) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic              store,
  input  logic [TA-1:0]     te,
  input  logic [MIDW-1:0]   mid,
  input  train_mode_e       mode,
  input  logic [NA-1:0]     n_rows,
  input  logic [DAW-1:0]    x_addr,
  output logic              busy,
  output logic              done,
  // DRAM
  output logic              dram_req,
  output logic              dram_we,
  output logic [DAW-1:0]    dram_addr,
  output fx_t  [P-1:0]      dram_wdata,
  input  logic              dram_gnt,
  input  logic              dram_rvalid,
  input  fx_t  [P-1:0]      dram_rdata,
  // training-engine scratchpad port
  output logic [TA-1:0]     te_sel,
  output logic              sp_re,
  output logic              sp_we,
  output logic [AA-1:0]     sp_addr,
  output fx_t  [P-1:0]      sp_wdata,
  input  fx_t  [P-1:0]      sp_rdata
);

  typedef enum logic [2:0] {S_IDLE, S_RREQ, S_RWAIT, S_SRD, S_SHOLD, S_SWR} state_e;
  typedef enum logic {PH_X, PH_R} phase_e;

  state_e        state;
  phase_e        phase;
  logic [TA-1:0] te_q;
  logic [MIDW-1:0] mid_q;
  train_mode_e   mode_q;
  logic [NA-1:0] n_q;
  logic [DAW-1:0] xa_q;
  int unsigned   r;
  fx_t [P-1:0]   hold;

  always_comb begin
    te_sel     = te_q;
    dram_req   = (state == S_RREQ) || (state == S_SWR);
    dram_we    = (state == S_SWR);
    dram_wdata = hold;
    if (state == S_SWR)       dram_addr = DAW'(int'(mid_q) * P + r);
    else if (phase == PH_X)   dram_addr = DAW'(int'(xa_q) + r);
    else                      dram_addr = DAW'(int'(mid_q) * P + r);
    sp_re    = (state == S_SRD);
    sp_we    = (state == S_RWAIT) && dram_rvalid;
    sp_addr  = (state == S_SRD || phase == PH_R) ? AA'(XROWS + r) : AA'(r);
    sp_wdata = dram_rdata;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; phase <= PH_X; te_q <= '0; mid_q <= '0; mode_q <= MODE_COLD;
      n_q <= '0; xa_q <= '0; r <= 0; hold <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          te_q <= te; mid_q <= mid; mode_q <= mode; n_q <= n_rows; xa_q <= x_addr; r <= 0;
          if (store) begin
            phase <= PH_R;
            state <= S_SRD;
          end else if (n_rows != '0) begin
            phase <= PH_X;
            state <= S_RREQ;
          end else if (mode == MODE_INCR) begin
            phase <= PH_R;
            state <= S_RREQ;
          end else begin
            done <= 1'b1;
          end
        end
        S_RREQ: if (dram_gnt) state <= S_RWAIT;
        S_RWAIT: if (dram_rvalid) begin
          if (phase == PH_X && r + 1 < int'(n_q)) begin
            r <= r + 1; state <= S_RREQ;
          end else if (phase == PH_X && mode_q == MODE_INCR) begin
            r <= 0; phase <= PH_R; state <= S_RREQ;
          end else if (phase == PH_R && r + 1 < P) begin
            r <= r + 1; state <= S_RREQ;
          end else begin
            done <= 1'b1; state <= S_IDLE;
          end
        end
        S_SRD:   state <= S_SHOLD;
        S_SHOLD: begin hold <= sp_rdata; state <= S_SWR; end
        S_SWR: if (dram_gnt) begin
          if (r + 1 < P) begin r <= r + 1; state <= S_SRD; end
          else begin done <= 1'b1; state <= S_IDLE; end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);

endmodule
