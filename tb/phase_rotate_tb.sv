// phase_rotate_tb: random samples; output k (counted from in_first) must be
// the input multiplied by j^k, exactly.
module phase_rotate_tb;
  import lrfhss_pkg::*;
  logic clk = 0, rst_n = 0, in_valid = 0, in_first = 0, out_valid, out_first;
  cplx_t in_sample = '0, out_sample;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  phase_rotate dut (.*);
  cplx_t exp_q [$];
  always @(posedge clk) if (rst_n && out_valid) begin
    cplx_t e;
    e = exp_q.pop_front();
    checks++; if (out_sample !== e) begin failures++; $display("got %0d,%0d exp %0d,%0d", out_sample.i, out_sample.q, e.i, e.q); end
  end
  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int blk = 0; blk < 5; blk++)
      for (int k = 0; k < 37; k++) begin
        cplx_t x, e;
        x.i = 16'($signed($urandom % 20000) - 10000); x.q = 16'($signed($urandom % 20000) - 10000);
        case (k % 4)
          0: e = x;
          1: begin e.i = -x.q; e.q = x.i; end
          2: begin e.i = -x.i; e.q = -x.q; end
          default: begin e.i = x.q; e.q = -x.i; end
        endcase
        exp_q.push_back(e);
        in_valid = 1; in_first = (k == 0); in_sample = x; @(negedge clk);
        in_valid = 0; if ($urandom % 2) @(negedge clk);
      end
    repeat (3) @(negedge clk);
    checks++; if (exp_q.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (100000) @(posedge clk); $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
endmodule
