// cfglut5: run-time reconfigurable 5-input look-up table.
//
// Behaves like the CFGLUT5 primitive of 7-series FPGAs, written as plain RTL:
// a 32-bit truth table INIT that is shifted left by one bit (new bit from
// cdi into INIT[0]) on every clock with ce high; cdo = INIT[31] lets several
// tables be loaded from one serial chain. o6 = INIT[i] (5-input function),
// o5 = INIT[i[3:0]] (4-input function). Outputs are combinational in i.
// The table has no reset and no power-up value: it must be loaded before use.
module cfglut5 (
  input  logic       clk,
  input  logic       ce,
  input  logic       cdi,
  input  logic [4:0] i,
  output logic       o6,
  output logic       o5,
  output logic       cdo
);
  logic [31:0] table_q;   // not reset: loaded through cdi before use

  always_ff @(posedge clk)
    if (ce) table_q <= {table_q[30:0], cdi};

  assign o6  = table_q[i];
  assign o5  = table_q[{1'b0, i[3:0]}];
  assign cdo = table_q[31];
endmodule
