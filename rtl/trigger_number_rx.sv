// trigger_number_rx: trigger-number receiver on a RECBE readout board.
//
// The line idles low. A '1' seen while idle is the start bit; the next
// NUM_BITS bits are shifted in, most significant first. The trigger is
// recognised only at the last bit of the number, as on the real readout
// board: trig pulses for one clock, registered, in the cycle after the last
// bit was sampled, with trig_num holding the number. With 32 bits at 40 MHz
// the number itself takes 0.8 us; trig comes NUM_BITS+1 clocks after the
// start bit was sampled. Framing (start bit, MSB first) is this design's
// choice and matches trigger_number_tx.
module trigger_number_rx #(
  parameter int unsigned NUM_BITS = 32
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                ser_in,
  output logic                trig,
  output logic [NUM_BITS-1:0] trig_num
);
  localparam int unsigned CW = $clog2(NUM_BITS + 1);
  logic [NUM_BITS-2:0] shreg;    // all but the last bit
  logic [CW-1:0]       left;      // bits still to receive; 0 = idle

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      shreg    <= '0;
      left     <= '0;
      trig     <= 1'b0;
      trig_num <= '0;
    end else begin
      trig <= 1'b0;
      if (left == '0) begin
        if (ser_in) left <= CW'(NUM_BITS);
      end else begin
        shreg <= {shreg[NUM_BITS-3:0], ser_in};
        left  <= left - 1'b1;
        if (left == CW'(1)) begin
          trig     <= 1'b1;
          trig_num <= {shreg, ser_in};
        end
      end
    end
  end
endmodule
