// cottri_fe: COTTRI front-end board logic (hit classification).
//
// One front end receives the 2-bit energy codes of the wires read by its
// N_RECBE readout boards (48 wires each) every 100 ns and counts, per
// readout board, the wires whose hit pattern is signal-like. Per wire:
//   1. long_lived_filter integrates the codes over 400 ns and removes wires
//      with long-lived hits (low-energy electrons spiralling along a wire);
//   2. hit_classifier_lut looks up the 6-bit pattern {wire, left neighbour,
//      right neighbour} in a GBDT-optimised table; every wire has its own
//      table and all wires of one layer share the same contents, so the
//      classification depends on the radial position;
//   3. the signal-like flags of each readout board's 48 wires are summed.
// Where a neighbour is not read by this front end (both ends of each layer's
// sector) the dummy code 2 (signal-like) is used in its place.
//
// Geometry (this design's choice; the real wire map is irregular): the
// N_RECBE*48 channels are ordered layer by layer, N_LAYER layers (CDC layers
// FIRST_LAYER.., the innermost and three outermost being excluded from the
// classification) of WPL = N_RECBE*48/N_LAYER contiguous wires. Channel c is
// wire c%WPL of layer FIRST_LAYER + c/WPL and belongs to readout board c/48.
//
// Configuration: lut_cfg_ce high for 64 clocks loads every table; layer l's
// tables take their bits from lut_cfg_di[l] (entry 63 first).
// Timing: codes are sampled on frame_valid (every 100 ns). Filter output is
// registered (+1 clock), LUT output registered (+1), counts registered (+1):
// count_valid pulses 3 clocks after frame_valid.
module cottri_fe
  import cottri_pkg::*;
#(
  parameter int unsigned N_RECBE = RECBE_PER_FE,
  parameter int unsigned N_CH    = CH_PER_RECBE,
  parameter int unsigned N_LAYER = N_LAYER_USED
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                frame_valid,
  input  ecode_t              codes [N_RECBE][N_CH],
  input  logic [2:0]          ll_min_frames,
  input  logic                lut_cfg_ce,
  input  logic [N_LAYER-1:0]  lut_cfg_di,
  output logic                count_valid,
  output logic [$clog2(N_CH+1)-1:0] count [N_RECBE],
  output logic [N_RECBE*N_CH-1:0]   sig_hits,
  output logic [N_RECBE*N_CH-1:0]   long_lived
);
  localparam int unsigned NW  = N_RECBE * N_CH;
  localparam int unsigned WPL = NW / N_LAYER;
  localparam int unsigned CBW = $clog2(N_CH + 1);

  // The channel count must split evenly into layers.
  if (WPL * N_LAYER != NW) begin : g_bad_geometry
    $error("cottri_fe: N_RECBE*N_CH must be a multiple of N_LAYER");
  end

  ecode_t filt [NW];
  logic   v1, v2;

  for (genvar c = 0; c < NW; c++) begin : g_wire
    localparam int unsigned L   = c / WPL;   // layer index inside this FE
    localparam int unsigned POS = c % WPL;   // position along the layer
    ecode_t left_c, right_c;

    long_lived_filter u_filt (
      .clk, .rst_n, .frame_valid,
      .code_in       (codes[c / N_CH][c % N_CH]),
      .ll_min_frames,
      .code_out      (filt[c]),
      .long_lived    (long_lived[c])
    );

    if (POS == 0) begin : g_left_dummy
      assign left_c = DUMMY_NEIGHBOR;
    end else begin : g_left
      assign left_c = filt[c-1];
    end
    if (POS == WPL - 1) begin : g_right_dummy
      assign right_c = DUMMY_NEIGHBOR;
    end else begin : g_right
      assign right_c = filt[c+1];
    end

    hit_classifier_lut u_lut (
      .clk,
      .cfg_ce (lut_cfg_ce),
      .cfg_di (lut_cfg_di[L]),
      .center (filt[c]),
      .left   (left_c),
      .right  (right_c),
      .hit    (sig_hits[c])
    );
  end

  // Stage valids: filter updates on frame_valid, LUT one clock later.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0;
      v2 <= 1'b0;
      count_valid <= 1'b0;
    end else begin
      v1 <= frame_valid;
      v2 <= v1;
      count_valid <= v2;
    end
  end

  // Per-readout-board count of signal-like wires.
  for (genvar r = 0; r < N_RECBE; r++) begin : g_count
    logic [CBW-1:0] n;
    always_comb begin
      n = '0;
      for (int k = 0; k < N_CH; k++) n = n + CBW'(sig_hits[r*N_CH + k]);
    end
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)  count[r] <= '0;
      else if (v2) count[r] <= n;
    end
  end
endmodule
