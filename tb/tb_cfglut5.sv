// tb_cfglut5: loads random 32-bit tables serially and checks o6, o5 and the
// cascade output cdo against the loaded table for every address.
module tb_cfglut5;
  logic clk = 0, ce = 0, cdi = 0, o6, o5, cdo;
  logic [4:0] i = 0;
  int checks = 0, failures = 0;

  cfglut5 dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] t;
    for (int n = 0; n < 20; n++) begin
      t = $urandom;
      for (int b = 31; b >= 0; b--) begin
        @(negedge clk); ce = 1; cdi = t[b];
      end
      @(negedge clk); ce = 0;
      checks++;
      if (cdo != t[31]) begin failures++; $display("cdo"); end
      for (int a = 0; a < 32; a++) begin
        i = 5'(a);
        #1;
        checks++;
        if (o6 != t[a] || o5 != t[a % 16]) begin
          failures++;
          $display("table %h addr %0d o6=%0b o5=%0b", t, a, o6, o5);
        end
      end
      // ce low: table must hold
      @(negedge clk); cdi = ~cdi;
      @(negedge clk);
      i = 5'd7; #1;
      checks++;
      if (o6 != t[7]) begin failures++; $display("table changed without ce"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
