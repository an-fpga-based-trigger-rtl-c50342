// recbe_compressor: 2-bit energy-deposition code for one CDC wire.
//
// The RECBE digitises each wire with a 10-bit ADC at 30 MHz. For the trigger,
// three consecutive samples (100 ns) are aggregated and reduced to a 2-bit
// code that separates noise, minimum-ionising (signal-like) deposits and
// large deposits. Here the aggregate is the sum of the three samples after
// pedestal subtraction (negative values clamp to zero); it is compared with
// three ascending thresholds: sum < th[0] -> 0, < th[1] -> 1, < th[2] -> 2,
// otherwise 3. The thresholds are run-time inputs because their tuned values
// are not published. Sum-then-threshold is this design's choice; the
// three-sample aggregation and the 2-bit result follow the published system.
//
// Interface: one sample per cycle with sample_valid high (the 30 MHz ADC rate
// is expressed as three strobes per 100 ns in the 40 MHz domain). After every
// third valid sample, code/code_valid are registered: code_valid is a
// one-cycle pulse in the clock after the third sample.
module recbe_compressor
  import cottri_pkg::*;
#(
  parameter int unsigned ADC_W   = ADC_BITS,
  parameter int unsigned NSAMPLE = 3
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     sample_valid,
  input  logic [ADC_W-1:0]         adc,
  input  logic [ADC_W-1:0]         pedestal,
  input  logic [ADC_W+1:0]         th [3],
  output logic                     code_valid,
  output ecode_t                   code
);
  localparam int unsigned SW = ADC_W + 2;   // holds 3 x (2^ADC_W - 1)

  logic [SW-1:0]           acc;
  logic [1:0]              nsamp;
  logic [ADC_W-1:0]        above_ped;
  logic [SW-1:0]           sum;

  always_comb begin
    above_ped = (adc > pedestal) ? adc - pedestal : '0;
    sum       = acc + SW'(above_ped);
  end

  function automatic ecode_t quantise(input logic [SW-1:0] s, input logic [SW-1:0] t0,
                                      input logic [SW-1:0] t1, input logic [SW-1:0] t2);
    if (s < t0)      return E_NONE;
    else if (s < t1) return E_LOW;
    else if (s < t2) return E_MIP;
    else             return E_LARGE;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc        <= '0;
      nsamp      <= '0;
      code_valid <= 1'b0;
      code       <= E_NONE;
    end else begin
      code_valid <= 1'b0;
      if (sample_valid) begin
        if (nsamp == 2'(NSAMPLE - 1)) begin
          nsamp      <= '0;
          acc        <= '0;
          code       <= quantise(sum, th[0], th[1], th[2]);
          code_valid <= 1'b1;
        end else begin
          nsamp <= nsamp + 2'd1;
          acc   <= sum;
        end
      end
    end
  end
endmodule
