// sd_selector: multiplies a two's complement word by one signed digit.
//
// A 4-to-1 multiplexer steered by the digit bits {plus, minus}: 10 passes the word,
// 01 passes its bitwise complement, 00 passes zero. The fourth code, 11, is not a
// legal digit; this implementation gives zero for it. The "+1" that completes the
// negation (~a + 1 = -a) is not added here: it is handed to the carry-save adder as a
// carry into its least-significant position (neg_o).
//
// Interface: a_i is W bits, d_i one digit; o_i is W bits, neg_o = 1 when d_i = -1.
// Combinational.
module sd_selector
  import olm_pkg::*;
#(
  parameter int unsigned W = 8
) (
  input  logic [W-1:0] a_i,
  input  sd_t          d_i,
  output logic [W-1:0] o_o,
  output logic         neg_o
);

  always_comb begin
    unique case ({d_i.p, d_i.m})
      2'b10:   o_o = a_i;
      2'b01:   o_o = ~a_i;
      default: o_o = '0;
    endcase
    neg_o = sd_is_neg(d_i);
  end

endmodule
