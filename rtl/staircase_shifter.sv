// staircase_shifter: skews a digit vector that arrives in parallel into the staircase
// order a digit-level pipeline consumes, or, with REVERSE set, undoes that skew.
//
// Digit i of the vector passes through a shift register of i flip-flops (REVERSE = 0),
// so digit 0 leaves at once, digit 1 one cycle later and so on: a pipeline whose stage i
// consumes digit i then sees every digit of a vector exactly when that vector reaches
// the stage. With REVERSE = 1 digit i is delayed by NDIG-1-i cycles instead, which lines
// up a result that leaves a pipeline most-significant digit first into one parallel word.
// The forward form is the input skew network of the design; the reverse form, which
// re-aligns the output, is this implementation's choice (the design only says the
// output is latched).
//
// Interface: din[i] / dout[i] are digit i (DW bits each). Timing: dout[i] equals din[i]
// of d(i) cycles earlier, d(i) = i or NDIG-1-i. Registers reset to zero (active-low,
// asynchronous), so a reset pipeline is fed zero digits.
module staircase_shifter #(
  parameter int unsigned NDIG    = 16,
  parameter int unsigned DW      = 2,
  parameter bit          REVERSE = 1'b0
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [DW-1:0] din  [NDIG],
  output logic [DW-1:0] dout [NDIG]
);

  for (genvar i = 0; i < NDIG; i++) begin : g_dig
    localparam int unsigned D = REVERSE ? (NDIG - 1 - i) : i;
    if (D == 0) begin : g_pass
      assign dout[i] = din[i];
    end else begin : g_shift
      logic [DW-1:0] sr [D];
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          for (int k = 0; k < int'(D); k++) sr[k] <= '0;
        end else begin
          sr[0] <= din[i];
          for (int k = 1; k < int'(D); k++) sr[k] <= sr[k-1];
        end
      end
      assign dout[i] = sr[D-1];
    end
  end

endmodule
