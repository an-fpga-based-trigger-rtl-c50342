// tb_trigger_number_tx: sends random numbers, some starts while busy. The
// line is sampled and decoded independently: start bit one clock after
// start, then the 32 bits MSB first; busy must last exactly 33 clocks and a
// start during busy must be ignored.
module tb_trigger_number_tx;
  logic clk = 0, rst_n = 0, start = 0, busy, ser_out;
  logic [31:0] num = 0;
  int checks = 0, failures = 0;

  trigger_number_tx #(.NUM_BITS(32)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    logic [31:0] sent;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 40; t++) begin
      @(negedge clk);
      check(!busy && !ser_out, "idle line low");
      sent  = $urandom;
      num   = sent;
      start = 1;
      @(negedge clk);
      start = 0;
      check(busy && ser_out, "start bit");
      for (int b = 31; b >= 0; b--) begin
        @(negedge clk);
        check(busy, "busy during frame");
        check(ser_out == sent[b], $sformatf("bit %0d", b));
        // a start during the frame must be ignored
        if (b == 20) begin num = ~sent; start = 1; end else start = 0;
      end
      start = 0;
      @(negedge clk);
      check(!busy, "busy drops after 33 clocks");
      repeat ($urandom_range(0, 3)) @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
