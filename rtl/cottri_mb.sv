// cottri_mb: COTTRI merger board logic (event classification, CDC trigger).
//
// The merger collects the per-readout-board counts of signal-like hits from
// all N_FE front ends. For each CTH counter (CTH ID) an "active area" of the
// drift chamber is defined - the part where a conversion electron that fired
// that counter leaves its hits - and the counts of the readout boards inside
// it are summed. If the sum exceeds the threshold (strictly greater; the
// published operating point is 32), the CDC trigger bit of that CTH ID is set.
//
// The active areas are stored as one mask bit per readout board and CTH ID,
// written at run time through mask_we/mask_addr/mask_data (this storage
// scheme is this design's choice). Readout board r of front end f is mask bit
// f*N_RECBE + r. The threshold is a run-time input.
// Timing: area_sum is registered 1 clock after count_valid, cdc_trig and
// trig_valid 1 clock after that.
module cottri_mb
  import cottri_pkg::*;
#(
  parameter int unsigned N_FE_P  = N_FE,
  parameter int unsigned N_RECBE = RECBE_PER_FE,
  parameter int unsigned N_ID    = N_CTH,
  parameter int unsigned CBW     = CNT_BITS,
  parameter int unsigned SW      = SUM_BITS
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        count_valid,
  input  logic [CBW-1:0]              count [N_FE_P][N_RECBE],
  input  logic                        mask_we,
  input  logic [$clog2(N_ID)-1:0]     mask_addr,
  input  logic [N_FE_P*N_RECBE-1:0]   mask_data,
  input  logic [SW-1:0]               threshold,
  output logic [SW-1:0]               area_sum [N_ID],
  output logic                        trig_valid,
  output logic [N_ID-1:0]             cdc_trig
);
  localparam int unsigned NB = N_FE_P * N_RECBE;

  logic [NB-1:0] mask [N_ID];
  logic          sum_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N_ID; i++) mask[i] <= '0;
    end else if (mask_we && 32'(mask_addr) < N_ID) begin
      mask[mask_addr] <= mask_data;
    end
  end

  // One masked adder per active area.
  for (genvar i = 0; i < N_ID; i++) begin : g_area
    logic [SW-1:0] s;
    always_comb begin
      s = '0;
      for (int b = 0; b < NB; b++)
        if (mask[i][b]) s = s + SW'(count[b / N_RECBE][b % N_RECBE]);
    end
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)           area_sum[i] <= '0;
      else if (count_valid) area_sum[i] <= s;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) sum_valid <= 1'b0;
    else        sum_valid <= count_valid;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cdc_trig   <= '0;
      trig_valid <= 1'b0;
    end else begin
      trig_valid <= sum_valid;
      if (sum_valid)
        for (int i = 0; i < N_ID; i++) cdc_trig[i] <= (area_sum[i] > threshold);
    end
  end
endmodule
