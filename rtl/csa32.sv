// csa32: [3:2] carry-save adder, one row of full adders.
//
// Adds the selector output a_i to the residual pair ws_i, wc_i. The carry vector is
// shifted up one position and its free least-significant bit takes cx_i, the "+1" that
// completes a negation done by the selector.
//   vs_o + vc_o = a_i + ws_i + wc_i + cx_i  (mod 2^W).
// Combinational; the delay is one full adder.
//
// Lint note: the majority (carry) of the top position has no place to go and is
// dropped (the sum is modulo 2^W), so its bit of 'maj' is reported unused.
module csa32 #(
  parameter int unsigned W = 8
) (
  input  logic [W-1:0] a_i,
  input  logic [W-1:0] ws_i,
  input  logic [W-1:0] wc_i,
  input  logic         cx_i,
  output logic [W-1:0] vs_o,
  output logic [W-1:0] vc_o
);

  logic [W-1:0] maj;

  always_comb begin
    vs_o = a_i ^ ws_i ^ wc_i;
    maj  = (a_i & ws_i) | (a_i & wc_i) | (ws_i & wc_i);
    vc_o = {maj[W-2:0], cx_i};
  end

endmodule
