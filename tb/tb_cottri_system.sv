// tb_cottri_system: end-to-end test of the whole trigger chain with every
// parameter at its default (10 front ends x 9 readout boards x 48 wires,
// 48 CTH IDs, threshold 32). ADC samples are generated for every wire, three
// per 100 ns frame. All classifier tables get the same rule: a wire is
// signal-like when its own code is 2 (minimum-ionising) and at least one
// same-layer neighbour also shows 2. The active area of CTH ID i is all
// boards of front end floor(i*10/48).
// Scenarios, each checked against values worked out here:
//  1. a 40-wire track segment in front end 3 (area sum 40 > 32) with a CTH
//     four-fold coincidence at ID 16 inside the bunch window: trigger with
//     ID 16, exactly 25 clocks after the hodoscope hit (1 coincidence + 24
//     delay), and every readout board recognises trigger number 0 at the
//     last bit of the serial number, 34 clocks after trig_out;
//  2. the same outside the bunch window: no trigger (window rejection);
//  3. 20 wires only: sum 20, no CDC trigger (threshold);
//  4. one isolated hit at the end of a layer is signal-like thanks to the
//     dummy neighbour (sum 1); one in the middle of a layer is not (sum 0);
//  5. the 40 wires kept hit for 5 frames: once 3 of 4 frames carry hits the
//     long-lived filter removes them (sum drops to 0);
//  6. two coincidences 2 clocks apart: the second is vetoed;
//  7. self-trigger mode: the track alone triggers.
// Each mechanism's occurrences are counted; one that never happens fails.
module tb_cottri_system;
  import cottri_pkg::*;
  localparam int NF = 10, NR = 9, NCH = 48, NL = 16, WPL = NR * NCH / NL;
  logic clk = 0, rst_n = 0, sample_valid = 0;
  logic [9:0] adc [NF][NR][NCH];
  logic [9:0] pedestal = '0;
  logic [11:0] th [3];
  logic [2:0] ll_min_frames = 3'd3;
  logic lut_cfg_ce = 0;
  logic [NL-1:0] lut_cfg_di [NF];
  logic mask_we = 0;
  logic [5:0] mask_addr = '0;
  logic [NF*NR-1:0] mask_data = '0;
  logic [SUM_BITS-1:0] threshold = SUM_BITS'(DEFAULT_HIT_THRESHOLD);
  logic [N_CTH-1:0] scint_us = '0, cher_us = '0, scint_ds = '0, cher_ds = '0;
  logic bunch = 0, self_trigger = 0;
  logic [SUM_BITS-1:0] area_sum [N_CTH];
  logic [N_CTH-1:0] cdc_trig, cth_trig, trig_ids;
  logic win_open, trig_out, trig_ser;
  logic [31:0] trig_num;
  logic [15:0] n_vetoed;
  logic [NF*NR-1:0] recbe_trig;
  logic [31:0] recbe_trig_num [NF][NR];

  cottri_system dut (.*);

  int checks = 0, failures = 0;
  int cyc = 0;
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (6000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0d: %s", cyc, what); end
  endtask

  // ---------------- hit pattern driver ----------------
  int hold [NF][NR][NCH];   // frames left
  int hcode [NF][NR][NCH];
  function automatic int amp(int code);   // per-sample amplitude for a code
    case (code)
      1: return 30;     // 3x30  = 90  in [50,250)
      2: return 100;    // 3x100 = 300 in [250,800)
      3: return 300;    // 3x300 = 900 >= 800
      default: return 0;
    endcase
  endfunction
  // Takes effect from the next frame boundary (the driver's phase 0).
  task automatic set_hits(int f, int layer, int pos0, int n, int code, int frames);
    do begin
      @(posedge clk);
      #1;
    end while (cyc % 4 != 0);
    for (int k = 0; k < n; k++) begin
      int ch;
      ch = layer * WPL + pos0 + k;
      hold[f][ch / NCH][ch % NCH] = frames;
      hcode[f][ch / NCH][ch % NCH] = code;
    end
  endtask

  int frame_no = 0;
  bit driver_on = 0;
  always @(negedge clk) if (driver_on) begin
    automatic int ph = cyc % 4;
    sample_valid <= (ph != 3);
    for (int f = 0; f < NF; f++) for (int r = 0; r < NR; r++) for (int c = 0; c < NCH; c++)
      adc[f][r][c] <= (hold[f][r][c] > 0 && ph != 3) ? 10'(amp(hcode[f][r][c])) : 10'd0;
    if (ph == 3) begin
      frame_no <= frame_no + 1;
      for (int f = 0; f < NF; f++) for (int r = 0; r < NR; r++) for (int c = 0; c < NCH; c++)
        if (hold[f][r][c] > 0) hold[f][r][c]--;
    end
  end

  // ---------------- monitors ----------------
  int trig_cyc [$];
  logic [N_CTH-1:0] trig_id_q [$];
  logic [31:0] trig_val [$];
  int rx_cyc [$];
  int n_window_reject = 0, n_threshold_block = 0, n_dummy = 0, n_long_lived = 0;
  int n_veto_seen = 0, n_self = 0, n_coinc = 0, n_rx_ok = 0;
  always @(negedge clk) if (rst_n) begin
    if (trig_out) begin
      trig_cyc.push_back(cyc); trig_id_q.push_back(trig_ids); trig_val.push_back(trig_num);
    end
    if (recbe_trig != '0) begin
      rx_cyc.push_back(cyc);
      checks++;
      if (recbe_trig != '1) begin failures++; $display("not all boards recognised the trigger"); end
      for (int f = 0; f < NF; f++) for (int r = 0; r < NR; r++)
        if (recbe_trig_num[f][r] != trig_val[trig_val.size()-1]) begin
          failures++; $display("board %0d/%0d number %0d", f, r, recbe_trig_num[f][r]);
        end
    end
  end

  task automatic wait_edge(int e);
    while (cyc < e - 1) @(negedge clk);
  endtask
  task automatic cth_hit(int id, int e);   // four-fold at id, sampled at edge e
    wait_edge(e);
    scint_us[id] = 1; scint_us[id+1] = 1; cher_us[id] = 1; cher_us[id+1] = 1;
    @(negedge clk);
    scint_us = '0; cher_us = '0;
  endtask
  task automatic do_bunch(int e);
    wait_edge(e);
    bunch = 1;
    @(negedge clk) bunch = 0;
  endtask
  // max of area_sum[id] over the next n clocks
  task automatic max_sum(int id, int n, output int mx, output int trig_seen);
    mx = 0; trig_seen = 0;
    repeat (n) begin
      @(negedge clk);
      if (int'(area_sum[id]) > mx) mx = int'(area_sum[id]);
      if (cdc_trig[id]) trig_seen = 1;
    end
  endtask

  initial begin
    logic [63:0] tbl;
    int mx, ts, ntrig0, t0;
    th[0] = 12'd50; th[1] = 12'd250; th[2] = 12'd800;
    for (int f = 0; f < NF; f++) begin
      lut_cfg_di[f] = '0;
      for (int r = 0; r < NR; r++) for (int c = 0; c < NCH; c++) begin
        adc[f][r][c] = '0; hold[f][r][c] = 0; hcode[f][r][c] = 0;
      end
    end
    // table: centre == 2 and (left == 2 or right == 2); address {c,l,r}
    for (int a = 0; a < 64; a++) tbl[a] = (a[5:4] == 2'd2) && (a[3:2] == 2'd2 || a[1:0] == 2'd2);
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int b = 63; b >= 0; b--) begin
      @(negedge clk);
      lut_cfg_ce = 1;
      for (int f = 0; f < NF; f++) lut_cfg_di[f] = {NL{tbl[b]}};
    end
    @(negedge clk) lut_cfg_ce = 0;
    for (int i = 0; i < N_CTH; i++) begin
      @(negedge clk);
      mask_we = 1; mask_addr = 6'(i);
      mask_data = '0;
      for (int r = 0; r < NR; r++) mask_data[(i * NF / N_CTH) * NR + r] = 1'b1;
    end
    @(negedge clk) mask_we = 0;
    while (cyc % 4 != 3) @(negedge clk);
    driver_on = 1;                         // first driven clock is phase 0
    repeat (40) @(negedge clk);

    // 1. track + CTH in window -> trigger at CTH + 25
    t0 = ((cyc + 8) / 4) * 4 + 100;
    do_bunch(t0);
    cth_hit(16, t0 + 31);
    wait_edge(t0 + 31 + 4);
    set_hits(3, 2, 3, 20, 2, 1);             // layer 2 (CDC layer 3), 20 wires
    set_hits(3, 3, 3, 20, 2, 1);             // layer 3, 20 wires
    max_sum(16, 40, mx, ts);
    check(mx == 40, $sformatf("scenario 1 area sum %0d, expected 40", mx));
    check(trig_cyc.size() == 1, $sformatf("scenario 1: %0d triggers", trig_cyc.size()));
    if (trig_cyc.size() == 1) begin
      check(trig_cyc[0] == t0 + 31 + 25, $sformatf("trigger at %0d, expected %0d", trig_cyc[0], t0 + 56));
      check(trig_id_q[0][16] && trig_id_q[0][15] == 0, "trigger ID 16");
      check(trig_val[0] == 0, "first trigger number 0");
      n_coinc++;
    end
    repeat (20) @(negedge clk);
    check(rx_cyc.size() == 1 && rx_cyc[0] == trig_cyc[0] + 34, "boards recognise trigger 34 clocks after trig_out");
    if (rx_cyc.size() == 1) n_rx_ok++;

    // 2. same track, CTH outside the window (t = 200 ns after bunch)
    ntrig0 = trig_cyc.size();
    t0 = cyc + 100;
    do_bunch(t0);
    cth_hit(16, t0 + 8);
    wait_edge(t0 + 8 + 4);
    set_hits(3, 2, 3, 20, 2, 1);
    set_hits(3, 3, 3, 20, 2, 1);
    max_sum(16, 40, mx, ts);
    check(ts == 1, "scenario 2: CDC trigger present");
    check(trig_cyc.size() == ntrig0, "scenario 2: no trigger outside window");
    if (ts && trig_cyc.size() == ntrig0) n_window_reject++;

    // 3. 20 wires: below threshold
    repeat (30) @(negedge clk);
    set_hits(3, 2, 3, 20, 2, 1);
    max_sum(16, 40, mx, ts);
    check(mx == 20 && ts == 0, $sformatf("scenario 3: sum %0d trig %0d", mx, ts));
    if (mx == 20 && ts == 0) n_threshold_block++;

    // 4. dummy neighbour at a layer end vs isolated hit inside a layer
    repeat (30) @(negedge clk);
    set_hits(3, 5, 0, 1, 2, 1);              // position 0: left neighbour is dummy 2
    max_sum(16, 40, mx, ts);
    check(mx == 1, $sformatf("scenario 4a: edge hit sum %0d, expected 1", mx));
    if (mx == 1) n_dummy++;
    set_hits(3, 5, 10, 1, 2, 1);             // isolated, real neighbours are 0
    max_sum(16, 40, mx, ts);
    check(mx == 0, $sformatf("scenario 4b: isolated hit sum %0d, expected 0", mx));

    // 5. long-lived: hits persist for 5 frames
    repeat (30) @(negedge clk);
    set_hits(3, 2, 3, 20, 2, 6);
    set_hits(3, 3, 3, 20, 2, 6);
    max_sum(16, 12, mx, ts);                 // first two frames still counted
    check(mx == 40, $sformatf("scenario 5: early sum %0d", mx));
    repeat (8) @(negedge clk);               // third hit frame in window -> filtered
    check(area_sum[16] == 0, $sformatf("scenario 5: sum %0d after long-lived veto", area_sum[16]));
    if (area_sum[16] == 0) n_long_lived++;
    repeat (60) @(negedge clk);

    // 6. veto: two coincidences 2 clocks apart
    ntrig0 = trig_cyc.size();
    t0 = cyc + 100;
    do_bunch(t0);
    cth_hit(16, t0 + 31);
    cth_hit(17, t0 + 33);                    // ID 17 is front end 3 as well
    wait_edge(t0 + 31 + 4);
    set_hits(3, 2, 3, 20, 2, 1);
    set_hits(3, 3, 3, 20, 2, 1);
    repeat (60) @(negedge clk);
    check(trig_cyc.size() == ntrig0 + 1, $sformatf("scenario 6: %0d triggers", trig_cyc.size() - ntrig0));
    check(n_vetoed == 16'd1, $sformatf("scenario 6: n_vetoed %0d", n_vetoed));
    if (n_vetoed == 16'd1) n_veto_seen++;

    // 7. self-trigger: the track alone
    repeat (40) @(negedge clk);
    self_trigger = 1;
    ntrig0 = trig_cyc.size();
    set_hits(3, 2, 3, 20, 2, 1);
    set_hits(3, 3, 3, 20, 2, 1);
    repeat (60) @(negedge clk);
    check(trig_cyc.size() == ntrig0 + 1, $sformatf("scenario 7: %0d triggers", trig_cyc.size() - ntrig0));
    if (trig_cyc.size() == ntrig0 + 1) begin
      n_self++;
      check(trig_id_q[ntrig0][19:15] == 5'h1F && trig_id_q[ntrig0][14] == 0 && trig_id_q[ntrig0][20] == 0,
            $sformatf("scenario 7 ids %h", trig_id_q[ntrig0]));
    end
    repeat (60) @(negedge clk);
    check(rx_cyc.size() == trig_cyc.size(), "every trigger reached the boards");

    $display("coincidence %0d, window-reject %0d, threshold-block %0d, dummy %0d, long-lived %0d, veto %0d, self %0d, rx %0d",
             n_coinc, n_window_reject, n_threshold_block, n_dummy, n_long_lived, n_veto_seen, n_self, n_rx_ok);
    checks += 8;
    if (n_coinc == 0)           begin failures++; $display("coincidence trigger never happened"); end
    if (n_window_reject == 0)   begin failures++; $display("window rejection never happened"); end
    if (n_threshold_block == 0) begin failures++; $display("threshold block never happened"); end
    if (n_dummy == 0)           begin failures++; $display("dummy neighbour never mattered"); end
    if (n_long_lived == 0)      begin failures++; $display("long-lived veto never happened"); end
    if (n_veto_seen == 0)       begin failures++; $display("busy veto never happened"); end
    if (n_self == 0)            begin failures++; $display("self trigger never happened"); end
    if (n_rx_ok == 0)           begin failures++; $display("trigger reception never happened"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
