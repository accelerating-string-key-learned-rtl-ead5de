// tb_scratchpad: self-checking test of the two-port scratchpad.  Writes
// random rows through both ports into disjoint regions, reads every written
// word back through the other port and checks the data and the one-cycle
// read latency against a shadow copy kept here.
module tb_scratchpad;
  import sia_pkg::*;
  localparam int P = 3, XROWS = 8, NSLOT = 2, DEPTH = XROWS + P + NSLOT * P, AA = $clog2(DEPTH);
  logic clk = 0;
  always #5 clk = ~clk;
  logic a_re, a_we, b_re, b_we;
  logic [AA-1:0] a_addr, b_addr;
  fx_t [P-1:0] a_wdata, a_rdata, b_wdata, b_rdata;
  scratchpad #(.P(P), .XROWS(XROWS), .NSLOT(NSLOT)) dut (.*);
  int checks = 0, failures = 0;
  fx_t [P-1:0] shadow [DEPTH];

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    a_re = 0; a_we = 0; b_re = 0; b_we = 0; a_addr = '0; b_addr = '0; a_wdata = '0; b_wdata = '0;
    // port A writes the lower half, port B the upper half, in the same cycles
    for (int w = 0; w < DEPTH / 2; w++) begin
      @(negedge clk);
      a_we = 1; a_addr = AA'(w); b_we = 1; b_addr = AA'(w + DEPTH / 2);
      for (int c = 0; c < P; c++) begin a_wdata[c] = fx_t'({$urandom, $urandom}); b_wdata[c] = fx_t'({$urandom, $urandom}); end
      shadow[w] = a_wdata; shadow[w + DEPTH / 2] = b_wdata;
    end
    @(negedge clk); a_we = 0; b_we = 0;
    for (int w = 0; w < DEPTH / 2; w++) begin
      @(negedge clk);
      a_re = 1; a_addr = AA'(w + DEPTH / 2); b_re = 1; b_addr = AA'(w);
      @(negedge clk);
      a_re = 0; b_re = 0;
      checks += 2;
      if (a_rdata !== shadow[w + DEPTH / 2]) begin failures++; $display("port A word %0d", w + DEPTH / 2); end
      if (b_rdata !== shadow[w]) begin failures++; $display("port B word %0d", w); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
