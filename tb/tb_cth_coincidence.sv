// tb_cth_coincidence: random hodoscope hits (dense enough to make
// coincidences) on 48 counters per ring; the expected four-fold coincidence
// (counters i and i+1 of both layers at one end, wrapping at 47) is computed
// independently and compared one clock later.
module tb_cth_coincidence;
  localparam int N = 48;
  logic clk = 0, rst_n = 0;
  logic [N-1:0] scint_us = '0, cher_us = '0, scint_ds = '0, cher_ds = '0, cth_trig;
  int checks = 0, failures = 0, n_fire = 0, n_wrap = 0, n_three = 0;

  cth_coincidence #(.N_ID(N), .STRETCH(1)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [N-1:0] rnd(int pct);
    logic [N-1:0] v;
    for (int i = 0; i < N; i++) v[i] = ($urandom_range(0, 99) < pct);
    return v;
  endfunction

  initial begin
    logic [N-1:0] e;
    int j;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      scint_us = rnd(45); cher_us = rnd(45); scint_ds = rnd(45); cher_ds = rnd(45);
      for (int i = 0; i < N; i++) begin
        j = (i + 1) % N;
        e[i] = (scint_us[i] & scint_us[j] & cher_us[i] & cher_us[j]) |
               (scint_ds[i] & scint_ds[j] & cher_ds[i] & cher_ds[j]);
        if (e[i]) n_fire++;
        if (e[i] && i == N-1) n_wrap++;
        if (!e[i] && (scint_us[i] & scint_us[j] & cher_us[i])) n_three++;
      end
      @(negedge clk);
      checks++;
      if (cth_trig != e) begin failures++; $display("t %0d got %h exp %h", t, cth_trig, e); end
      scint_us = '0; cher_us = '0; scint_ds = '0; cher_ds = '0;
    end
    checks += 2;
    if (n_fire == 0 || n_wrap == 0) begin failures++; $display("coincidence or wrap never seen"); end
    if (n_three == 0) begin failures++; $display("three-fold case never seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
