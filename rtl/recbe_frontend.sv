// recbe_frontend: trigger-related logic of one RECBE readout board.
//
// The readout board digitises N_CH drift-chamber wires. For the trigger it
// turns every wire's three 30 MHz samples per 100 ns into a 2-bit energy
// code (recbe_compressor, one per wire) and sends the codes to its COTTRI
// front end; it also receives the serial trigger number from the central
// system (trigger_number_rx) and recognises the trigger at its last bit.
// The board's waveform buffer and data-acquisition path are not part of
// this RTL.
// Interface: sample_valid marks ADC samples (three per 100 ns frame); all
// wires share pedestal and thresholds. frame_valid pulses with new codes one
// clock after each third sample. trig/trig_num as in trigger_number_rx.
module recbe_frontend
  import cottri_pkg::*;
#(
  parameter int unsigned N_CH = CH_PER_RECBE
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     sample_valid,
  input  logic [ADC_BITS-1:0]      adc [N_CH],
  input  logic [ADC_BITS-1:0]      pedestal,
  input  logic [ADC_BITS+1:0]      th [3],
  output logic                     frame_valid,
  output ecode_t                   codes [N_CH],
  input  logic                     trig_ser,
  output logic                     trig,
  output logic [TRIG_NUM_BITS-1:0] trig_num
);
  logic [N_CH-1:0] cv;

  for (genvar c = 0; c < N_CH; c++) begin : g_ch
    recbe_compressor u_cmp (
      .clk, .rst_n, .sample_valid,
      .adc        (adc[c]),
      .pedestal,
      .th,
      .code_valid (cv[c]),
      .code       (codes[c])
    );
  end

  // All channels see the same strobes, so channel 0's valid stands for all.
  assign frame_valid = cv[0];

  trigger_number_rx #(.NUM_BITS(TRIG_NUM_BITS)) u_rx (
    .clk, .rst_n, .ser_in(trig_ser), .trig, .trig_num
  );
endmodule
