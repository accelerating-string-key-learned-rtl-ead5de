// udiv: sequential restoring unsigned divider, NW-bit dividend by DW-bit
// divisor, one quotient bit per cycle (NW cycles).
//
// Pulse `start` with operands valid; `done` pulses when q = floor(n/d) and
// r = n mod d are ready.  A zero divisor yields an all-ones quotient.  Used
// for the outer loop PE's reciprocal (gamma) and for the diagonal reciprocals
// that seed the triangular inverse.  The paper names these divisions
// (Algorithm 2 line 5, matrix inverse) but not their circuit.
module udiv #(
  parameter int NW = 192,
  parameter int DW = 128
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  logic [NW-1:0]   n,
  input  logic [DW-1:0]   d,
  output logic            busy,
  output logic            done,
  output logic [NW-1:0]   q,
  output logic [DW-1:0]   r
);

  logic [NW-1:0]           num;
  logic [DW-1:0]           den;
  logic [$clog2(NW+1)-1:0] cnt;
  logic [DW:0]             shifted;

  always_comb shifted = {r, num[NW-1]};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; q <= '0; r <= '0; num <= '0; den <= '0; cnt <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        busy <= 1'b1;
        num  <= n;
        den  <= d;
        q    <= '0;
        r    <= '0;
        cnt  <= ($clog2(NW+1))'(NW);
      end else if (busy) begin
        num <= num << 1;
        if (shifted >= {1'b0, den}) begin
          r <= DW'(shifted - {1'b0, den});
          q <= {q[NW-2:0], 1'b1};
        end else begin
          r <= DW'(shifted);
          q <= {q[NW-2:0], 1'b0};
        end
        cnt <= cnt - 1'b1;
        if (cnt == 1) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

endmodule
