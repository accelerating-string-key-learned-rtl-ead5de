// scratchpad: a training engine's on-chip matrix store, one matrix row
// (P elements) per word, with two independent ports.
//
// Regions (in words): X_delta rows at [0, XROWS), the memoized R_old /
// freshly computed R_new at [R_BASE, R_BASE+P), and NSLOT slots of P rows for
// the partial R_delta factors the QRD unit produces and reduces
// (slot s at SLOT_BASE + s*P).  Port A serves the engine (QRD unit and the
// matrix-engine loader), port B the DMA controller (X_delta in, R_old in,
// R_new out).  Both ports read synchronously: data appears the cycle after
// the read request.  A write and a read of the same word on different ports
// in one cycle return the old data.  The paper gives the scratchpad's
// contents (X_delta, R_old, R_delta); sizes, ports and layout are this
// design's choices.
module scratchpad
  import sia_pkg::*;
#(
  parameter int P     = 96,
  parameter int XROWS = 768,
  parameter int NSLOT = 4,
  localparam int DEPTH = XROWS + P + NSLOT * P,
  localparam int AA    = $clog2(DEPTH)
) (
  input  logic            clk,
  input  logic            a_re,
  input  logic            a_we,
  input  logic [AA-1:0]   a_addr,
  input  fx_t  [P-1:0]    a_wdata,
  output fx_t  [P-1:0]    a_rdata,
  input  logic            b_re,
  input  logic            b_we,
  input  logic [AA-1:0]   b_addr,
  input  fx_t  [P-1:0]    b_wdata,
  output fx_t  [P-1:0]    b_rdata
);

  fx_t [P-1:0] mem [DEPTH];

  // One process for both ports; if both write the same word, port B wins.
  always_ff @(posedge clk) begin
    if (a_we) mem[a_addr] <= a_wdata;
    if (b_we) mem[b_addr] <= b_wdata;
    if (a_re) a_rdata <= mem[a_addr];
    if (b_re) b_rdata <= mem[b_addr];
  end

endmodule
