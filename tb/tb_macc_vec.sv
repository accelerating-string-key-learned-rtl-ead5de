// tb_macc_vec: self-checking test of the vector MACC.  Random Q31.32 operand
// vectors and lane masks are accumulated over runs of random length, with the
// expected sum computed here in 128-bit integer arithmetic; also checks that
// `clear` alone zeroes the sum and that the result is ready one cycle after
// the last input.
module tb_macc_vec;
  import sia_pkg::*;
  localparam int LANES = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clear, en;
  fx_t [LANES-1:0] a, b;
  logic [LANES-1:0] mask;
  acc_t acc;
  macc_vec #(.LANES(LANES)) dut (.*);
  int checks = 0, failures = 0;

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    acc_t exp_sum;
    clear = 0; en = 0; a = '0; b = '0; mask = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int run = 0; run < 50; run++) begin
      int len;
      len = int'($urandom_range(1, 12));
      exp_sum = '0;
      for (int s = 0; s < len; s++) begin
        @(negedge clk);
        en = 1; clear = (s == 0);
        for (int l = 0; l < LANES; l++) begin
          a[l] = fx_t'({$urandom, $urandom}) >>> 20;
          b[l] = fx_t'({$urandom, $urandom}) >>> 20;
          mask[l] = ($urandom_range(3) != 0);
          if (mask[l]) exp_sum += acc_t'(a[l]) * acc_t'(b[l]);
        end
      end
      @(negedge clk); en = 0; clear = 0;
      checks++;
      if (acc !== exp_sum) begin failures++; $display("run %0d: acc %h expected %h", run, acc, exp_sum); end
    end
    @(negedge clk); clear = 1;
    @(negedge clk); clear = 0;
    checks++;
    if (acc != '0) begin failures++; $display("clear did not zero the sum"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
