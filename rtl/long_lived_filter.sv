// long_lived_filter: integration window and long-lived-hit veto for one wire.
//
// Hits on a wire can arrive up to the maximal drift time (~400 ns) after the
// particle, so the trigger integrates each wire over WIN_FRAMES 100 ns frames
// (400 ns). Low-energy electrons spiralling along a wire instead leave the
// same wire hit frame after frame; such "long-lived" wires are removed before
// classification. On every frame_valid the new 2-bit code enters a sliding
// window of the last WIN_FRAMES codes. The integrated code is the largest
// code in the window; if ll_min_frames or more of the window's frames carry a
// hit (non-zero code), the wire is long-lived and code_out is 0. The window
// is sliding (the trigger runs as a pipeline, not started by the CTH
// trigger); the max/count rule is this design's choice.
//
// Timing: code_out and long_lived are registered and change in the clock
// after frame_valid.
module long_lived_filter
  import cottri_pkg::*;
#(
  parameter int unsigned WIN_FRAMES = INTEG_FRAMES
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       frame_valid,
  input  ecode_t     code_in,
  input  logic [2:0] ll_min_frames,
  output ecode_t     code_out,
  output logic       long_lived
);
  ecode_t win [WIN_FRAMES];   // win[0] is the newest frame
  ecode_t nxt [WIN_FRAMES];
  ecode_t max_code;
  logic [$clog2(WIN_FRAMES+1)-1:0] nhit;
  logic ll;

  always_comb begin
    nxt[0] = code_in;
    for (int k = 1; k < WIN_FRAMES; k++) nxt[k] = win[k-1];
    max_code = E_NONE;
    nhit     = '0;
    for (int k = 0; k < WIN_FRAMES; k++) begin
      if (nxt[k] > max_code) max_code = nxt[k];
      if (nxt[k] != E_NONE)  nhit = nhit + 1'b1;
    end
    ll = (ll_min_frames != 3'd0) && (32'(nhit) >= 32'(ll_min_frames));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < WIN_FRAMES; k++) win[k] <= E_NONE;
      code_out   <= E_NONE;
      long_lived <= 1'b0;
    end else if (frame_valid) begin
      for (int k = 0; k < WIN_FRAMES; k++) win[k] <= nxt[k];
      code_out   <= ll ? E_NONE : max_code;
      long_lived <= ll;
    end
  end
endmodule
