// trigger_number_tx: serial trigger-number transmitter of the central system.
//
// Each accepted trigger is announced to the readout boards by sending its
// 32-bit trigger number over one line, one bit per 40 MHz clock, so the
// number takes 0.8 us. The line idles low; a frame is one start bit '1'
// followed by the NUM_BITS number bits, most significant first (the framing
// is this design's choice). start is accepted only when busy is low; the
// first bit (start bit) appears on ser_out in the cycle after start, and busy
// stays high for the NUM_BITS+1 frame cycles.
module trigger_number_tx #(
  parameter int unsigned NUM_BITS = 32
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  input  logic [NUM_BITS-1:0] num,
  output logic                busy,
  output logic                ser_out
);
  localparam int unsigned CW = $clog2(NUM_BITS + 2);
  logic [NUM_BITS:0] shreg;    // start bit + number
  logic [CW-1:0]     remaining;

  assign busy    = (remaining != '0);
  assign ser_out = busy & shreg[NUM_BITS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      shreg     <= '0;
      remaining <= '0;
    end else if (!busy) begin
      if (start) begin
        shreg     <= {1'b1, num};
        remaining <= CW'(NUM_BITS + 1);
      end
    end else begin
      shreg     <= {shreg[NUM_BITS-1:0], 1'b0};
      remaining <= remaining - 1'b1;
    end
  end
endmodule
