// tb_long_lived_filter: random code streams with random frame spacing and
// several long-lived thresholds. A reference window of the last four frames
// gives the expected integrated code (maximum) and long-lived flag.
module tb_long_lived_filter;
  import cottri_pkg::*;
  logic clk = 0, rst_n = 0, frame_valid = 0, long_lived;
  ecode_t code_in = E_NONE, code_out;
  logic [2:0] ll_min_frames = 3'd3;
  int checks = 0, failures = 0, n_ll = 0;

  long_lived_filter #(.WIN_FRAMES(4)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int w [4];
    int mx, nh;
    bit ll;
    for (int k = 0; k < 4; k++) w[k] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < 2000; f++) begin
      if (f % 500 == 0) ll_min_frames = 3'(2 + f / 500 % 3);
      repeat ($urandom_range(0, 4)) @(negedge clk);
      @(negedge clk);
      // bursty stream: sometimes the wire stays hit for several frames
      code_in = ($urandom_range(0, 2) == 0) ? ecode_t'($urandom_range(1, 3)) : E_NONE;
      frame_valid = 1;
      for (int k = 3; k > 0; k--) w[k] = w[k-1];
      w[0] = int'(code_in);
      mx = 0; nh = 0;
      for (int k = 0; k < 4; k++) begin
        if (w[k] > mx) mx = w[k];
        if (w[k] != 0) nh++;
      end
      ll = (nh >= int'(ll_min_frames));
      @(negedge clk);
      frame_valid = 0;
      checks++;
      if (long_lived != ll || int'(code_out) != (ll ? 0 : mx)) begin
        failures++;
        $display("frame %0d: out=%0d ll=%0b exp %0d/%0b", f, code_out, long_lived, ll ? 0 : mx, ll);
      end
      if (ll) n_ll++;
    end
    checks++;
    if (n_ll == 0) begin failures++; $display("long-lived case never exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
