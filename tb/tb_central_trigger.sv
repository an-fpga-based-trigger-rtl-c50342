// tb_central_trigger: directed scenarios with the default parameters
// (48 CTH IDs, window 700-1200 ns = clocks 28..47 after a bunch, CTH delay
// 24 clocks). Checked independently:
//  - win_open every clock against a model built from the last two bunches
//    (bunch spacing 47 clocks = 1170 ns, so the window overlaps the next
//    bunch), including the exact window edges;
//  - a CTH hit inside the window matched with the CDC bit of the same ID
//    gives trig_out exactly CTH_DELAY clocks after the CTH hit was sampled;
//    outside the window, or with the CDC bit of another ID, nothing;
//  - a second match while the number is being sent is vetoed and counted;
//  - self-trigger mode fires once on the rising edge of the CDC trigger;
//  - the serial line, decoded independently, carries each trigger number,
//    starting one clock after trig_out.
module tb_central_trigger;
  import cottri_pkg::*;
  localparam int N = 48, D = 24;
  logic clk = 0, rst_n = 0, bunch = 0, self_trigger = 0;
  logic [N-1:0] cth_trig = '0, cdc_trig = '0, trig_ids;
  logic win_open, trig_out, ser_out;
  logic [31:0] trig_num;
  logic [15:0] n_vetoed;
  int checks = 0, failures = 0;
  int cyc = 0;

  central_trigger #(.N_ID(N), .CTH_DELAY(D)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0d: %s", cyc, what); end
  endtask

  // window model: edges at which a bunch was sampled
  int b_last = -1000, b_prev = -1000;
  function automatic bit model_win(int edge_no);
    int a = edge_no - b_last - 1, p = edge_no - b_prev - 1;
    return (a >= 28 && a < 48) || (p >= 28 && p < 48);
  endfunction

  // trigger and serial monitors
  int trig_cyc [$];
  logic [31:0] trig_val [$];
  logic [N-1:0] trig_id_q [$];
  int ser_cyc [$];
  logic [31:0] ser_val [$];
  int sh_left = 0, sh_start = 0;
  logic [31:0] sh = 0;
  always @(negedge clk) if (rst_n) begin
    // win_open as seen before the next edge (cyc+1)
    checks++;
    if (win_open != model_win(cyc + 1)) begin
      failures++; $display("win_open mismatch before edge %0d: %0b", cyc + 1, win_open);
    end
    if (trig_out) begin trig_cyc.push_back(cyc); trig_val.push_back(trig_num); trig_id_q.push_back(trig_ids); end
    if (sh_left == 0) begin
      if (ser_out) begin sh_left = 32; sh_start = cyc; end
    end else begin
      sh = {sh[30:0], ser_out};
      sh_left--;
      if (sh_left == 0) begin ser_cyc.push_back(sh_start); ser_val.push_back(sh); end
    end
  end

  // drive inputs for sampling at edge e (e > cyc)
  task automatic at_edge(int e);
    while (cyc < e - 1) @(negedge clk);
  endtask

  task automatic pulse_cth(int e, int id);
    at_edge(e);
    cth_trig = '0; cth_trig[id] = 1'b1;
    @(negedge clk) cth_trig = '0;
  endtask

  task automatic do_bunch(int e);
    at_edge(e);
    bunch = 1;
    b_prev = b_last; b_last = e;
    @(negedge clk) bunch = 0;
  endtask

  int exp_cyc [$];
  logic [N-1:0] exp_ids [$];

  initial begin
    int b0, b1;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    // --- physics mode ---
    b0 = 20;  do_bunch(b0);
    cdc_trig = '0; cdc_trig[5] = 1'b1; cdc_trig[9] = 1'b1;
    pulse_cth(b0 + 28, 5);                     // just outside (t_last = 27)
    pulse_cth(b0 + 29, 5);                     // first clock of window
    exp_cyc.push_back(b0 + 29 + D); exp_ids.push_back(48'(1) << 5);
    b1 = b0 + 47;  do_bunch(b1);               // next bunch, 1170 ns later
    pulse_cth(b0 + 70, 9);                     // 1200 ns-window of the first bunch, after b1 -> outside? t_prev = 69
    pulse_cth(b1 + 40, 7);                     // in window but no CDC bit 7
    pulse_cth(b1 + 48, 9);                     // last clock of window
    exp_cyc.push_back(b1 + 48 + D); exp_ids.push_back(48'(1) << 9);
    pulse_cth(b1 + 52, 5);                     // outside again
    // veto: two matches 10 clocks apart
    do_bunch(200);
    pulse_cth(230, 5);
    exp_cyc.push_back(230 + D); exp_ids.push_back(48'(1) << 5);
    pulse_cth(240, 9);                          // vetoed: line still busy
    // window overlap: bunch, next bunch 47 later; CTH at prev+47 (t_prev window)
    do_bunch(300);
    do_bunch(347);
    pulse_cth(348, 5);                          // t_prev = 47 -> inside
    exp_cyc.push_back(348 + D); exp_ids.push_back(48'(1) << 5);
    at_edge(450);
    cdc_trig = '0;
    // --- self-trigger mode ---
    self_trigger = 1;
    at_edge(500);
    cdc_trig[30] = 1'b1;
    exp_cyc.push_back(500); exp_ids.push_back(48'(1) << 30);
    at_edge(520);
    cdc_trig[31] = 1'b1;                        // still high: no new edge
    at_edge(560);
    cdc_trig = '0;
    at_edge(600);
    cdc_trig[2] = 1'b1;
    exp_cyc.push_back(600); exp_ids.push_back(48'(1) << 2);
    at_edge(700);
    // --- checks ---
    check(trig_cyc.size() == exp_cyc.size(), $sformatf("%0d triggers, expected %0d", trig_cyc.size(), exp_cyc.size()));
    for (int k = 0; k < exp_cyc.size() && k < trig_cyc.size(); k++) begin
      check(trig_cyc[k] == exp_cyc[k], $sformatf("trigger %0d at %0d, expected %0d", k, trig_cyc[k], exp_cyc[k]));
      check(trig_val[k] == 32'(k), $sformatf("trigger %0d number %0d", k, trig_val[k]));
      check(trig_id_q[k] == exp_ids[k], $sformatf("trigger %0d ids %h", k, trig_id_q[k]));
    end
    check(n_vetoed == 16'd1, $sformatf("n_vetoed %0d", n_vetoed));
    check(ser_cyc.size() == trig_cyc.size(), "one serial frame per trigger");
    for (int k = 0; k < ser_cyc.size() && k < trig_cyc.size(); k++) begin
      check(ser_cyc[k] == trig_cyc[k] + 1, $sformatf("frame %0d starts %0d", k, ser_cyc[k]));
      check(ser_val[k] == trig_val[k], $sformatf("frame %0d carries %0d", k, ser_val[k]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
