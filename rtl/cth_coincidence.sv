// cth_coincidence: CTH trigger from the trigger hodoscope counters.
//
// The hodoscope has, at each end of the drift chamber, a ring of N_ID
// scintillators and a ring of N_ID Cherenkov radiators in front of them. A
// charged particle fast enough to be a conversion electron fires a
// geometrically neighbouring four-fold coincidence: two adjacent
// scintillators and the two Cherenkov counters in front of them. CTH ID i
// fires when counters i and i+1 (mod N_ID) of both layers at one end are hit
// (the pairing with i+1 is this design's choice); the two ends are ORed.
//
// The published coincidence window is 10 ns. Here the inputs are discriminator
// flags already sampled by the 40 MHz clock, so coincidence is taken within
// one 25 ns clock; each flag is stretched over STRETCH clocks first (1 = no
// stretch). cth_trig is registered: it follows the inputs by one clock.
module cth_coincidence
  import cottri_pkg::*;
#(
  parameter int unsigned N_ID    = N_CTH,
  parameter int unsigned STRETCH = 1
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic [N_ID-1:0] scint_us,
  input  logic [N_ID-1:0] cher_us,
  input  logic [N_ID-1:0] scint_ds,
  input  logic [N_ID-1:0] cher_ds,
  output logic [N_ID-1:0] cth_trig
);
  localparam int unsigned NIN = 4;   // scint_us, cher_us, scint_ds, cher_ds
  logic [N_ID-1:0] raw [NIN];
  logic [N_ID-1:0] held [NIN];

  assign raw[0] = scint_us;
  assign raw[1] = cher_us;
  assign raw[2] = scint_ds;
  assign raw[3] = cher_ds;

  // Optional pulse stretching: flag stays active for STRETCH clocks.
  if (STRETCH > 1) begin : g_stretch
    logic [N_ID-1:0] hist [NIN][STRETCH-1];
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        for (int s = 0; s < NIN; s++)
          for (int d = 0; d < STRETCH-1; d++) hist[s][d] <= '0;
      end else begin
        for (int s = 0; s < NIN; s++) begin
          hist[s][0] <= raw[s];
          for (int d = 1; d < STRETCH-1; d++) hist[s][d] <= hist[s][d-1];
        end
      end
    end
    always_comb
      for (int s = 0; s < NIN; s++) begin
        held[s] = raw[s];
        for (int d = 0; d < STRETCH-1; d++) held[s] = held[s] | hist[s][d];
      end
  end else begin : g_nostretch
    always_comb for (int s = 0; s < NIN; s++) held[s] = raw[s];
  end

  for (genvar i = 0; i < N_ID; i++) begin : g_id
    localparam int unsigned J = (i + 1) % N_ID;
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) cth_trig[i] <= 1'b0;
      else        cth_trig[i] <= (held[0][i] & held[0][J] & held[1][i] & held[1][J]) |
                                 (held[2][i] & held[2][J] & held[3][i] & held[3][J]);
    end
  end
endmodule
