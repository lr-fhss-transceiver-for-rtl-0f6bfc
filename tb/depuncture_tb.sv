// depuncture_tb: for every code rate, random soft bits are sent only for the
// positions punct_mask() keeps; each output step must hold them in c0, c1, c2
// order with zeros in the punctured positions.
module depuncture_tb;
  import lrfhss_pkg::*;
  logic clk = 0, rst_n = 0, start = 0, in_valid = 0, out_valid;
  code_rate_e cr = CR_1_3;
  llr_t in_llr = '0, out_llr [3];
  int checks = 0, failures = 0;
  llr_t exp_q [$];
  always #5 clk = ~clk;
  depuncture dut (.*);
  always @(posedge clk) if (rst_n && out_valid) begin
    for (int j = 0; j < 3; j++) begin
      llr_t e;
      e = (exp_q.size() > 0) ? exp_q.pop_front() : llr_t'(99);
      checks++; if (out_llr[j] !== e) begin failures++; if (failures < 6) $display("cr %0d j %0d got %0d exp %0d", cr, j, out_llr[j], e); end
    end
  end
  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int r = 0; r < 8; r++) begin
      cr = code_rate_e'(r % 4);
      start = 1; @(negedge clk); start = 0;
      for (int k = 0; k < 30; k++) begin
        logic [2:0] m;
        llr_t v [3];
        m = punct_mask(cr, k);
        for (int j = 0; j < 3; j++) begin
          v[j] = llr_t'($urandom % 200 - 100);
          if (v[j] == 0) v[j] = 1;
          exp_q.push_back(m[j] ? v[j] : llr_t'(0));
        end
        for (int j = 0; j < 3; j++)
          if (m[j]) begin in_valid = 1; in_llr = v[j]; @(negedge clk); in_valid = 0; if ($urandom % 2) @(negedge clk); end
      end
      repeat (3) @(negedge clk);
      checks++; if (exp_q.size() != 0) begin failures++; exp_q.delete(); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (100000) @(posedge clk); $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
endmodule
