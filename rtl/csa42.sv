// csa42: [4:2] carry-save adder built from two rows of full adders.
//
// Row 1 adds the first selector output a_i to the residual pair ws_i, wc_i and gives
// the intermediate sum VS and carry VC; row 2 adds VS, VC and the second selector
// output b_i and gives the final pair vs_o, vc_o. Each carry vector is shifted up one
// position, which frees its least-significant bit: cy_i goes into the free bit of VC and
// cx_i into the free bit of vc, completing the two's complement negations done by the
// selectors. The delay is that of two full adders whatever W is.
//
// All vectors are W bits wide and share one binary point; the sum is exact modulo 2^W:
//   vs_o + vc_o = a_i + b_i + ws_i + wc_i + cy_i + cx_i  (mod 2^W).
// Combinational.
//
// Lint note: the carries out of the top position of both rows are dropped (the sum is
// modulo 2^W), so the top bits of 'maj1' and 'maj2' are reported unused.
module csa42 #(
  parameter int unsigned W = 8
) (
  input  logic [W-1:0] a_i,
  input  logic [W-1:0] b_i,
  input  logic [W-1:0] ws_i,
  input  logic [W-1:0] wc_i,
  input  logic         cy_i,
  input  logic         cx_i,
  output logic [W-1:0] vs_o,
  output logic [W-1:0] vc_o
);

  logic [W-1:0] vs1, maj1, vc1, maj2;

  always_comb begin
    vs1  = a_i ^ ws_i ^ wc_i;
    maj1 = (a_i & ws_i) | (a_i & wc_i) | (ws_i & wc_i);
    vc1  = {maj1[W-2:0], cy_i};
    vs_o = vs1 ^ vc1 ^ b_i;
    maj2 = (vs1 & vc1) | (vs1 & b_i) | (vc1 & b_i);
    vc_o = {maj2[W-2:0], cx_i};
  end

endmodule
