// cottri_system: the CDC trigger chain of the COMET Phase-I detector.
//
// Data flow (all in one 40 MHz clock domain):
//   readout boards (recbe_frontend, N_FE x N_RECBE, 48 wires each)
//     -> 2-bit energy code per wire every 100 ns
//   COTTRI front ends (cottri_fe, N_FE)
//     -> long-lived filter, GBDT LUT classification, hits per readout board
//   COTTRI merger (cottri_mb)
//     -> sum over each CTH counter's active area, CDC trigger per CTH ID
//   CTH trigger (cth_coincidence) -> four-fold coincidence per CTH ID
//   central trigger (central_trigger)
//     -> bunch window, CTH/CDC coincidence or CDC self-trigger,
//        trigger number sent serially back to every readout board.
// The serial links between the boards and the clock/trigger distributor
// boards are replaced by direct connections, so the latency here is that of
// the logic only (a few clocks per stage); the published system, links
// included, measured 1.9-2.0 us.
//
// Configuration: lut_cfg_ce/lut_cfg_di load the classifier tables (64 clocks,
// one bit per front end and layer); mask_* writes the active areas;
// threshold, ll_min_frames, pedestal, th and self_trigger are static
// settings. Each readout board's trigger recognition is visible on
// recbe_trig/recbe_trig_num.
module cottri_system
  import cottri_pkg::*;
#(
  parameter int unsigned NF        = N_FE,
  parameter int unsigned NR        = RECBE_PER_FE,
  parameter int unsigned CTH_DELAY = INTEG_NS / CLK_NS + 8
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // readout-board inputs
  input  logic                     sample_valid,
  input  logic [ADC_BITS-1:0]      adc [NF][NR][CH_PER_RECBE],
  input  logic [ADC_BITS-1:0]      pedestal,
  input  logic [ADC_BITS+1:0]      th [3],
  // front-end configuration
  input  logic [2:0]               ll_min_frames,
  input  logic                     lut_cfg_ce,
  input  logic [N_LAYER_USED-1:0]  lut_cfg_di [NF],
  // merger configuration
  input  logic                     mask_we,
  input  logic [$clog2(N_CTH)-1:0] mask_addr,
  input  logic [NF*NR-1:0]         mask_data,
  input  logic [SUM_BITS-1:0]      threshold,
  // hodoscope and beam
  input  logic [N_CTH-1:0]         scint_us,
  input  logic [N_CTH-1:0]         cher_us,
  input  logic [N_CTH-1:0]         scint_ds,
  input  logic [N_CTH-1:0]         cher_ds,
  input  logic                     bunch,
  input  logic                     self_trigger,
  // results
  output logic [SUM_BITS-1:0]      area_sum [N_CTH],
  output logic [N_CTH-1:0]         cdc_trig,
  output logic [N_CTH-1:0]         cth_trig,
  output logic                     win_open,
  output logic                     trig_out,
  output logic [TRIG_NUM_BITS-1:0] trig_num,
  output logic [N_CTH-1:0]         trig_ids,
  output logic [15:0]              n_vetoed,
  output logic                     trig_ser,
  output logic [NF*NR-1:0]         recbe_trig,
  output logic [TRIG_NUM_BITS-1:0] recbe_trig_num [NF][NR]
);
  ecode_t          codes     [NF][NR][CH_PER_RECBE];
  logic [NF*NR-1:0] fv;
  logic [NF-1:0]   fe_valid;
  logic [CNT_BITS-1:0] count [NF][NR];

  for (genvar f = 0; f < NF; f++) begin : g_fe
    for (genvar r = 0; r < NR; r++) begin : g_recbe
      recbe_frontend u_recbe (
        .clk, .rst_n, .sample_valid,
        .adc         (adc[f][r]),
        .pedestal, .th,
        .frame_valid (fv[f*NR + r]),
        .codes       (codes[f][r]),
        .trig_ser,
        .trig        (recbe_trig[f*NR + r]),
        .trig_num    (recbe_trig_num[f][r])
      );
    end

    logic [NR*CH_PER_RECBE-1:0] unused_sig, unused_ll;
    cottri_fe #(.N_RECBE(NR)) u_fe (
      .clk, .rst_n,
      .frame_valid   (fv[f*NR]),
      .codes         (codes[f]),
      .ll_min_frames,
      .lut_cfg_ce,
      .lut_cfg_di    (lut_cfg_di[f]),
      .count_valid   (fe_valid[f]),
      .count         (count[f]),
      .sig_hits      (unused_sig),
      .long_lived    (unused_ll)
    );
  end

  // All front ends run on the same frame strobe; use front end 0's valid.
  cottri_mb #(.N_FE_P(NF), .N_RECBE(NR)) u_mb (
    .clk, .rst_n,
    .count_valid (fe_valid[0]),
    .count,
    .mask_we, .mask_addr, .mask_data, .threshold,
    .area_sum,
    .trig_valid  (),
    .cdc_trig
  );

  cth_coincidence u_cth (
    .clk, .rst_n, .scint_us, .cher_us, .scint_ds, .cher_ds, .cth_trig
  );

  central_trigger #(.CTH_DELAY(CTH_DELAY)) u_central (
    .clk, .rst_n, .bunch, .cth_trig, .cdc_trig, .self_trigger,
    .win_open, .trig_out, .trig_num, .trig_ids, .n_vetoed,
    .ser_out (trig_ser)
  );

  // Every board and front end shares the frame strobe.
  assert property (@(posedge clk) disable iff (!rst_n) (fv == '0) || (fv == '1));
  assert property (@(posedge clk) disable iff (!rst_n) (fe_valid == '0) || (fe_valid == '1));
endmodule
