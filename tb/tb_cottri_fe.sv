// tb_cottri_fe: one front end at full size (9 readout boards x 48 wires,
// 16 layers of 27 wires). Random per-layer tables are loaded, then random
// sparse frames (with some wires kept hit for long stretches) are applied
// every 100 ns. An independent model of the window filter, neighbour
// assembly with dummy code 2 at the layer ends, table lookup and per-board
// count gives the expected counts and per-wire flags; count_valid must come
// exactly 3 clocks after frame_valid. The test also counts how often the
// long-lived veto and the dummy neighbour changed a result.
module tb_cottri_fe;
  import cottri_pkg::*;
  localparam int NR = 9, NCH = 48, NL = 16, NW = NR * NCH, WPL = NW / NL;
  logic clk = 0, rst_n = 0, frame_valid = 0, lut_cfg_ce = 0, count_valid;
  ecode_t codes [NR][NCH];
  logic [2:0] ll_min_frames = 3'd3;
  logic [NL-1:0] lut_cfg_di = '0;
  logic [5:0] count [NR];
  logic [NW-1:0] sig_hits, long_lived;
  int checks = 0, failures = 0, n_ll = 0, n_dummy = 0, n_sig = 0;

  cottri_fe #(.N_RECBE(NR), .N_CH(NCH), .N_LAYER(NL)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [63:0] tbl [NL];
  int win [NW][4];
  int filt [NW];
  int sticky [NW];

  function automatic int lookup(int l, int c, int lf, int rt);
    return int'(tbl[l][c*16 + lf*4 + rt]);
  endfunction

  initial begin
    int exp_cnt [NR];
    int c, mx, nh, l, p, lf, rt, lf0, rt0;
    bit exp_hit [NW];
    for (int r = 0; r < NR; r++) for (int k = 0; k < NCH; k++) codes[r][k] = E_NONE;
    for (int w = 0; w < NW; w++) begin
      for (int k = 0; k < 4; k++) win[w][k] = 0;
      sticky[w] = 0;
    end
    for (int l = 0; l < NL; l++) begin
      tbl[l] = {$urandom, $urandom};
      tbl[l][15:0] = '0;        // centre code 0: never signal-like
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    // load the tables: entry 63 first
    for (int b = 63; b >= 0; b--) begin
      @(negedge clk);
      lut_cfg_ce = 1;
      for (int l = 0; l < NL; l++) lut_cfg_di[l] = tbl[l][b];
    end
    @(negedge clk) lut_cfg_ce = 0;

    for (int f = 0; f < 300; f++) begin
      @(negedge clk);
      for (int w = 0; w < NW; w++) begin
        if (sticky[w] > 0) begin
          sticky[w]--;
          c = $urandom_range(1, 3);
        end else begin
          c = ($urandom_range(0, 9) == 0) ? $urandom_range(1, 3) : 0;
          if ($urandom_range(0, 199) == 0) sticky[w] = 5;
        end
        codes[w / NCH][w % NCH] = ecode_t'(c);
        for (int k = 3; k > 0; k--) win[w][k] = win[w][k-1];
        win[w][0] = c;
      end
      frame_valid = 1;
      // reference model
      for (int w = 0; w < NW; w++) begin
        mx = 0; nh = 0;
        for (int k = 0; k < 4; k++) begin
          if (win[w][k] > mx) mx = win[w][k];
          if (win[w][k] != 0) nh++;
        end
        filt[w] = (nh >= 3) ? 0 : mx;
        if (nh >= 3 && mx != 0) n_ll++;
      end
      for (int r = 0; r < NR; r++) exp_cnt[r] = 0;
      for (int w = 0; w < NW; w++) begin
        l = w / WPL; p = w % WPL;
        lf = (p == 0) ? 2 : filt[w-1];
        rt = (p == WPL-1) ? 2 : filt[w+1];
        exp_hit[w] = lookup(l, filt[w], lf, rt) != 0;
        if ((p == 0 || p == WPL-1) && filt[w] != 0) begin
          lf0 = (p == 0) ? 0 : lf; rt0 = (p == WPL-1) ? 0 : rt;
          if (lookup(l, filt[w], lf0, rt0) != int'(exp_hit[w])) n_dummy++;
        end
        if (exp_hit[w]) begin exp_cnt[w / NCH]++; n_sig++; end
      end
      @(negedge clk) frame_valid = 0;
      @(negedge clk);
      checks++;
      if (count_valid) begin failures++; $display("count_valid early"); end
      @(negedge clk);
      checks++;
      if (!count_valid) begin failures++; $display("count_valid not 3 clocks after frame"); end
      for (int r = 0; r < NR; r++) begin
        checks++;
        if (int'(count[r]) != exp_cnt[r]) begin
          failures++;
          $display("frame %0d board %0d count %0d exp %0d", f, r, count[r], exp_cnt[r]);
        end
      end
      for (int w = 0; w < NW; w++)
        if (sig_hits[w] != exp_hit[w]) begin
          failures++;
          $display("frame %0d wire %0d hit %0b exp %0b", f, w, sig_hits[w], exp_hit[w]);
        end
      checks++;
    end
    $display("long-lived vetoes %0d, dummy-neighbour decisions %0d, signal-like %0d", n_ll, n_dummy, n_sig);
    checks += 3;
    if (n_ll == 0)    begin failures++; $display("no long-lived veto seen"); end
    if (n_dummy == 0) begin failures++; $display("dummy neighbour never mattered"); end
    if (n_sig == 0)   begin failures++; $display("no signal-like hits"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
