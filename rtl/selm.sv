// selm: result-digit selection function of the radix-2 online multipliers.
//
// Input is the three leading bits v_-1 v_0 . v_1 of the residual estimate (two integer
// bits and one fraction bit, two's complement); the estimate's second fraction bit does
// not affect the choice. The selection constants are m0 = -1/2 and m1 = +1/2:
//   estimate >= 1/2          -> +1   (01.1, 01.0, 00.1)
//   -1/2 <= estimate <= 1/4  ->  0   (00.0, 11.1)
//   estimate <= -1           -> -1   (11.0, 10.1, 10.0)
// The table is the design's own; the digit is returned as {plus, minus}.
// Combinational.
module selm
  import olm_pkg::*;
(
  input  logic [2:0] v_i,  // {v_-1, v_0, v_1}
  output sd_t        z_o
);

  always_comb begin
    unique case (v_i)
      3'b011, 3'b010, 3'b001: z_o = '{p: 1'b1, m: 1'b0};
      3'b000, 3'b111:         z_o = '{p: 1'b0, m: 1'b0};
      default:                z_o = '{p: 1'b0, m: 1'b1};  // 110, 101, 100
    endcase
  end

endmodule
