// sel_slice: the digit-selection slice at the most-significant end of a recurrence
// stage: V block, SELM and M block.
//
// V is a 4-bit carry-propagate adder over the two integer and two leading fraction
// bits of the carry-save residual v = vs + vc; it gives the estimate v_-1 v_0 . v_1 v_2
// (carries from the lower bits are ignored, so the estimate is at most v and less than
// 1/2 below it). SELM picks the result digit z from v_-1 v_0 v_1. M subtracts z from the
// estimate: since z only changes the integer part and v - z lies in [-1, 3/4], the
// new sign bit is v_0* = v_0 XOR |z| and v_-1 is dropped.
// The next scaled residual 2w[j+1] is then formed by re-wiring only:
//   ws2 = v_0* v_1 . v_2 vs_3 vs_4 ...   wc2 = 0 0 . 0 vc_3 vc_4 ...
// i.e. the estimate bits move into the sum vector, whose three top carry bits become 0.
//
// Interface: vs_i, vc_i carry W+2 bits (2 integer, W fraction); ws2_o, wc2_o carry
// W+1 bits (2 integer, W-1 fraction) of 2w[j+1]. Requires W >= 3. Combinational.
module sel_slice
  import olm_pkg::*;
#(
  parameter int unsigned W = 8
) (
  input  logic [W+1:0] vs_i,
  input  logic [W+1:0] vc_i,
  output sd_t          z_o,
  output logic [W:0]   ws2_o,
  output logic [W:0]   wc2_o
);

  localparam int unsigned VW = W + 2;

  logic [3:0] vhat;   // {v_-1, v_0, v_1, v_2}
  logic       v0s;    // v_0*

  always_comb vhat = vs_i[VW-1 -: 4] + vc_i[VW-1 -: 4];

  selm u_selm (.v_i(vhat[3:1]), .z_o(z_o));

  always_comb begin
    v0s   = vhat[2] ^ sd_is_nz(z_o);
    ws2_o = {v0s, vhat[1], vhat[0], vs_i[VW-5:0]};
    wc2_o = {3'b000, vc_i[VW-5:0]};
  end

  if (W < 3) begin : g_chk
    $error("sel_slice needs at least 3 fraction bits");
  end

endmodule
