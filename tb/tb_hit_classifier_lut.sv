// tb_hit_classifier_lut: loads random 64-entry tables (entry 63 first) and
// checks, for all 64 {center,left,right} patterns, that hit equals the table
// entry one clock after the pattern is applied.
module tb_hit_classifier_lut;
  import cottri_pkg::*;
  logic clk = 0, cfg_ce = 0, cfg_di = 0, hit;
  ecode_t center = E_NONE, left = E_NONE, right = E_NONE;
  int checks = 0, failures = 0;

  hit_classifier_lut dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [63:0] t;
    for (int n = 0; n < 12; n++) begin
      t = {$urandom, $urandom};
      if (n == 0) t = 64'hFFFF_0000_0000_0001;   // asymmetric halves
      for (int b = 63; b >= 0; b--) begin
        @(negedge clk); cfg_ce = 1; cfg_di = t[b];
      end
      @(negedge clk); cfg_ce = 0;
      for (int a = 0; a < 64; a++) begin
        center = ecode_t'(a[5:4]); left = ecode_t'(a[3:2]); right = ecode_t'(a[1:0]);
        @(negedge clk);
        checks++;
        if (hit != t[a]) begin
          failures++;
          $display("table %h addr %0d hit=%0b", t, a, hit);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
