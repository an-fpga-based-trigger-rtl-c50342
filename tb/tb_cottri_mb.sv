// tb_cottri_mb: full-size merger (10 front ends x 9 boards, 48 CTH IDs).
// Random active-area masks are written, then random counts are applied; the
// expected sum per area and the strict "sum > threshold" trigger are
// computed independently. Sums must appear 1 clock and triggers 2 clocks
// after count_valid. Sums equal to the threshold are forced to appear to
// check that equality does not trigger.
module tb_cottri_mb;
  import cottri_pkg::*;
  localparam int NF = 10, NR = 9, NI = 48, NB = NF * NR;
  logic clk = 0, rst_n = 0, count_valid = 0, mask_we = 0, trig_valid;
  logic [5:0] count [NF][NR];
  logic [5:0] mask_addr = 0;
  logic [NB-1:0] mask_data = '0;
  logic [12:0] threshold = 13'd32;
  logic [12:0] area_sum [NI];
  logic [NI-1:0] cdc_trig;
  int checks = 0, failures = 0, n_trig = 0, n_eq = 0;

  cottri_mb #(.N_FE_P(NF), .N_RECBE(NR), .N_ID(NI)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [NB-1:0] m [NI];

  initial begin
    int s [NI];
    int first, len;
    for (int f = 0; f < NF; f++) for (int r = 0; r < NR; r++) count[f][r] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < NI; i++) begin
      // contiguous block of boards, as an azimuthal sector would be
      first = $urandom_range(0, NB - 1); len = $urandom_range(3, 20);
      m[i] = '0;
      for (int k = 0; k < len; k++) m[i][(first + k) % NB] = 1'b1;
      @(negedge clk);
      mask_we = 1; mask_addr = 6'(i); mask_data = m[i];
    end
    @(negedge clk) mask_we = 0;
    for (int t = 0; t < 200; t++) begin
      @(negedge clk);
      for (int f = 0; f < NF; f++) for (int r = 0; r < NR; r++) count[f][r] = 6'($urandom_range(0, 6));
      threshold = (t % 2) ? 13'd32 : 13'($urandom_range(10, 40));
      for (int i = 0; i < NI; i++) begin
        s[i] = 0;
        for (int b = 0; b < NB; b++) if (m[i][b]) s[i] += int'(count[b / NR][b % NR]);
      end
      // force one area to sit exactly on the threshold now and then
      if (t % 5 == 0 && s[0] > 0) begin
        threshold = 13'(s[0]);
        n_eq++;
      end
      count_valid = 1;
      @(negedge clk) count_valid = 0;
      for (int i = 0; i < NI; i++) begin
        checks++;
        if (int'(area_sum[i]) != s[i]) begin
          failures++; $display("t %0d area %0d sum %0d exp %0d", t, i, area_sum[i], s[i]);
        end
      end
      checks++;
      if (trig_valid) begin failures++; $display("trig_valid early"); end
      @(negedge clk);
      checks++;
      if (!trig_valid) begin failures++; $display("trig_valid late"); end
      for (int i = 0; i < NI; i++) begin
        checks++;
        if (cdc_trig[i] != (s[i] > int'(threshold))) begin
          failures++; $display("t %0d area %0d trig %0b sum %0d th %0d", t, i, cdc_trig[i], s[i], threshold);
        end
        if (cdc_trig[i]) n_trig++;
      end
    end
    checks += 2;
    if (n_trig == 0) begin failures++; $display("no trigger"); end
    if (n_eq == 0) begin failures++; $display("equality never tested"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
