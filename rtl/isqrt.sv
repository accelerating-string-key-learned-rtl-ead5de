// isqrt: sequential integer square root, 2*RW-bit radicand -> RW-bit root.
//
// Bit-by-bit (one result bit per cycle, most significant first): a trial bit
// is kept when the square of the trial root does not exceed the radicand.
// Pulse `start` with `x` valid; `done` pulses RW cycles later with
// root = floor(sqrt(x)).  Used by the outer loop PE for d = sqrt(dot(col,col)):
// the square root of a Q63.64 sum is directly a Q31.32 value.  The paper only
// names the square root (Algorithm 2); the bit-serial circuit is this
// design's choice.
module isqrt #(
  parameter int RW = 64
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [2*RW-1:0]   x,
  output logic              busy,
  output logic              done,
  output logic [RW-1:0]     root
);

  logic [2*RW-1:0]        rad;
  logic [$clog2(RW)-1:0]  bitpos;
  logic [RW-1:0]          trial;
  logic [2*RW-1:0]        trial_sq;

  always_comb begin
    trial    = root | (RW'(1) << bitpos);
    trial_sq = (2*RW)'(trial) * (2*RW)'(trial);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; root <= '0; rad <= '0; bitpos <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        busy   <= 1'b1;
        rad    <= x;
        root   <= '0;
        bitpos <= $clog2(RW)'(RW-1);
      end else if (busy) begin
        if (trial_sq <= rad) root <= trial;
        if (bitpos == 0) begin
          busy <= 1'b0;
          done <= 1'b1;
        end else begin
          bitpos <= bitpos - 1'b1;
        end
      end
    end
  end

endmodule
