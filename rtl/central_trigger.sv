// central_trigger: final trigger decision of the central trigger system.
//
// Normal (physics) mode: a CTH trigger counts only inside the measurement
// window [WIN_START_NS, WIN_END_NS) after a proton bunch (700-1200 ns, the
// low-background part of the 1170 ns bunch cycle). Because the window ends
// after the next bunch has already arrived, it is measured from both the
// latest and the previous bunch marker. The drift-chamber hits that belong
// to a CTH hit arrive during the 400 ns integration time after it, so the
// gated CTH bits are delayed by CTH_DELAY clocks (400 ns plus the front-end
// and merger pipeline and up to one frame of phase; this design's choice)
// and then ANDed, CTH ID by CTH ID, with the CDC trigger bits. Any match is a
// trigger.
// Self-trigger mode (self_trigger = 1, used for cosmic-ray tests): the CDC
// trigger alone decides, on the rising edge of "any CDC trigger bit set",
// without bunch window or CTH.
//
// Each accepted trigger gets the next 32-bit trigger number and is sent to
// the readout boards by trigger_number_tx. A trigger that comes while the
// previous number is still being sent is vetoed and counted in n_vetoed
// (this design's choice). trig_out is a registered one-clock pulse with
// trig_num and trig_ids (the matching CTH IDs); the serial frame starts on
// ser_out the clock after trig_out.
module central_trigger
  import cottri_pkg::*;
#(
  parameter int unsigned N_ID         = N_CTH,
  parameter int unsigned CLK_PERIOD   = CLK_NS,
  parameter int unsigned WIN_START_NS = 700,
  parameter int unsigned WIN_END_NS   = 1200,
  parameter int unsigned CTH_DELAY    = INTEG_NS / CLK_NS + 8,
  parameter int unsigned NUM_BITS     = TRIG_NUM_BITS
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                bunch,
  input  logic [N_ID-1:0]     cth_trig,
  input  logic [N_ID-1:0]     cdc_trig,
  input  logic                self_trigger,
  output logic                win_open,
  output logic                trig_out,
  output logic [NUM_BITS-1:0] trig_num,
  output logic [N_ID-1:0]     trig_ids,
  output logic [15:0]         n_vetoed,
  output logic                ser_out
);
  localparam int unsigned WS = WIN_START_NS / CLK_PERIOD;
  localparam int unsigned WE = WIN_END_NS / CLK_PERIOD;
  localparam int unsigned TW = $clog2(WE + 2);
  localparam logic [TW-1:0] TMAX = '1;

  // Time since the latest and the previous bunch marker, saturating.
  logic [TW-1:0] t_last, t_prev;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      t_last <= TMAX;
      t_prev <= TMAX;
    end else if (bunch) begin
      t_prev <= (t_last == TMAX) ? TMAX : t_last + 1'b1;
      t_last <= '0;
    end else begin
      if (t_last != TMAX) t_last <= t_last + 1'b1;
      if (t_prev != TMAX) t_prev <= t_prev + 1'b1;
    end
  end

  function automatic logic in_window(input logic [TW-1:0] t);
    return (32'(t) >= WS) && (32'(t) < WE);
  endfunction

  assign win_open = in_window(t_last) || in_window(t_prev);

  // Gated CTH trigger bits delayed by the integration time.
  logic [N_ID-1:0] cth_dly [CTH_DELAY];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int d = 0; d < CTH_DELAY; d++) cth_dly[d] <= '0;
    end else begin
      cth_dly[0] <= win_open ? cth_trig : '0;
      for (int d = 1; d < CTH_DELAY; d++) cth_dly[d] <= cth_dly[d-1];
    end
  end

  logic            any_cdc_q;
  logic [N_ID-1:0] match;
  logic            want;
  logic            tx_busy;
  logic [NUM_BITS-1:0] next_num;

  always_comb begin
    if (self_trigger) begin
      match = cdc_trig;
      want  = (|cdc_trig) && !any_cdc_q;
    end else begin
      match = cdc_trig & cth_dly[CTH_DELAY-1];
      want  = |match;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      any_cdc_q <= 1'b0;
      trig_out  <= 1'b0;
      trig_num  <= '0;
      trig_ids  <= '0;
      next_num  <= '0;
      n_vetoed  <= '0;
    end else begin
      any_cdc_q <= |cdc_trig;
      trig_out  <= 1'b0;
      if (want) begin
        if (!tx_busy && !trig_out) begin
          trig_out <= 1'b1;
          trig_num <= next_num;
          trig_ids <= match;
          next_num <= next_num + 1'b1;
        end else if (n_vetoed != '1) begin
          n_vetoed <= n_vetoed + 1'b1;
        end
      end
    end
  end

  trigger_number_tx #(.NUM_BITS(NUM_BITS)) u_tx (
    .clk, .rst_n,
    .start   (trig_out),
    .num     (trig_num),
    .busy    (tx_busy),
    .ser_out
  );

  // A trigger is never issued while a number is still being sent.
  assert property (@(posedge clk) disable iff (!rst_n) trig_out |-> !tx_busy);
endmodule
