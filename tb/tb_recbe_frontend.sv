// tb_recbe_frontend: one readout board (48 wires). Each wire gets its own
// random samples; three valid samples per 100 ns frame (one idle clock).
// The expected 2-bit code of every wire is recomputed independently and
// checked when frame_valid pulses (one clock after the third sample). A
// serial trigger frame is then sent and trig/trig_num are checked.
module tb_recbe_frontend;
  import cottri_pkg::*;
  localparam int NCH = 48;
  logic clk = 0, rst_n = 0, sample_valid = 0, frame_valid, trig_ser = 0, trig;
  logic [9:0] adc [NCH];
  logic [9:0] pedestal = 10'd16;
  logic [11:0] th [3];
  ecode_t codes [NCH];
  logic [31:0] trig_num;
  int checks = 0, failures = 0;

  recbe_frontend #(.N_CH(NCH)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int acc [NCH];
    int e;
    logic [31:0] num;
    th[0] = 12'd50; th[1] = 12'd250; th[2] = 12'd800;
    for (int c = 0; c < NCH; c++) adc[c] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < 200; f++) begin
      for (int c = 0; c < NCH; c++) acc[c] = 0;
      for (int s = 0; s < 3; s++) begin
        @(negedge clk);
        checks++;
        if (frame_valid) begin failures++; $display("frame_valid timing f %0d s %0d", f, s); end
        sample_valid = 1;
        for (int c = 0; c < NCH; c++) begin
          adc[c] = 10'($urandom_range(0, (c % 4 == 0) ? 1023 : 300));
          acc[c] += (adc[c] > pedestal) ? int'(adc[c] - pedestal) : 0;
        end
      end
      @(negedge clk);
      sample_valid = 0;
      checks++;
      if (!frame_valid) begin failures++; $display("no frame_valid f %0d", f); end
      for (int c = 0; c < NCH; c++) begin
        e = (acc[c] < 50) ? 0 : (acc[c] < 250) ? 1 : (acc[c] < 800) ? 2 : 3;
        checks++;
        if (int'(codes[c]) != e) begin failures++; $display("f %0d ch %0d code %0d exp %0d", f, c, codes[c], e); end
      end
    end
    // serial trigger number
    num = 32'hC0FFEE01;
    @(negedge clk) trig_ser = 1;
    for (int b = 31; b >= 0; b--) @(negedge clk) trig_ser = num[b];
    @(negedge clk) trig_ser = 0;
    checks++;
    if (!trig || trig_num != num) begin failures++; $display("trigger not received"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
