// hit_classifier_lut: GBDT-optimised 6-input hit classifier for one wire.
//
// The 2-bit codes of the wire of interest and of its two neighbours in the
// same layer form a 6-bit address. The truth table, computed offline from a
// gradient-boosted decision tree with its output threshold applied, says
// whether that pattern is signal-like (1) or not (0). As in the published
// system, the 6-input table is two reconfigurable 5-input LUTs (cfglut5),
// selected by address bit 5, so it can be reloaded during a run.
//
// Address = {center, left, right} (bit order is this design's choice).
// Loading: hold cfg_ce high for 64 clocks and present the table on cfg_di,
// entry 63 first and entry 0 last; the bits pass through the low LUT into
// the high one. Classification: hit is registered, valid one clock after the
// codes are presented (one-clock LUT stage).
module hit_classifier_lut
  import cottri_pkg::*;
(
  input  logic   clk,
  input  logic   cfg_ce,
  input  logic   cfg_di,
  input  ecode_t center,
  input  ecode_t left,
  input  ecode_t right,
  output logic   hit
);
  logic [5:0] addr;
  logic       o_lo, o_hi, chain, unused_lo5, unused_hi5, unused_cdo;

  assign addr = {center, left, right};

  cfglut5 u_lo (.clk, .ce(cfg_ce), .cdi(cfg_di), .i(addr[4:0]), .o6(o_lo), .o5(unused_lo5), .cdo(chain));
  cfglut5 u_hi (.clk, .ce(cfg_ce), .cdi(chain),  .i(addr[4:0]), .o6(o_hi), .o5(unused_hi5), .cdo(unused_cdo));

  always_ff @(posedge clk)
    hit <= addr[5] ? o_hi : o_lo;
endmodule
