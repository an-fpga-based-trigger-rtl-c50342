// tb_trigger_number_rx: drives frames (start bit + 32 bits MSB first) with
// random idle gaps and checks that trig pulses exactly once, in the clock
// after the last bit, with the sent number, i.e. 33 clocks after the start
// bit (0.8 us for the number itself at 40 MHz).
module tb_trigger_number_rx;
  logic clk = 0, rst_n = 0, ser_in = 0, trig;
  logic [31:0] trig_num;
  int checks = 0, failures = 0;

  trigger_number_rx #(.NUM_BITS(32)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] v;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 50; t++) begin
      v = (t == 0) ? 32'hFFFF_FFFF : (t == 1 ? 32'h0 : $urandom);
      @(negedge clk) ser_in = 1;           // start bit
      for (int b = 31; b >= 0; b--) begin
        @(negedge clk);
        checks++;
        if (trig) begin failures++; $display("early trig"); end
        ser_in = v[b];
      end
      @(negedge clk);                     // last bit sampled at the edge before
      ser_in = 0;
      checks++;
      if (!trig || trig_num != v) begin
        failures++;
        $display("frame %0d: trig=%0b num=%h exp=%h", t, trig, trig_num, v);
      end
      repeat ($urandom_range(0, 4)) begin
        @(negedge clk);
        checks++;
        if (trig) begin failures++; $display("extra trig"); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
