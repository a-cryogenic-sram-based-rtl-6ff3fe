// quad_div2: the DIV2 stage of the transmitter clock path. It divides the
// half-rate clock C2 by two into two quarter-rate clocks in quadrature:
// C4I toggles on the rising and C4Q on the falling edge of C2, so C4Q lags C4I
// by one full-rate unit interval (a quarter of the C4 period).
// That the divider makes the quadrature clocks follows the published clock
// path; using one toggle flip-flop per edge is this design's choice. Duty-cycle
// correction ahead of and behind the divider is analog and not modelled.
module quad_div2 (
  input  logic c2,
  input  logic rst_n,
  output logic c4i,
  output logic c4q
);
  always_ff @(posedge c2 or negedge rst_n)
    if (!rst_n) c4i <= 1'b0;
    else        c4i <= ~c4i;

  // C4Q follows C4I half a C2 period later
  always_ff @(negedge c2 or negedge rst_n)
    if (!rst_n) c4q <= 1'b0;
    else        c4q <= c4i;
endmodule
