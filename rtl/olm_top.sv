// olm_top: the two pipelined online multipliers of the design side by side.
//
//   * ss: serial-serial multiplier with reduced working precision (N-digit operands,
//     P working-precision bits, online delay 3): z_ss = x_ss * y_ss, one product per
//     clock, result N+3 clock edges after the operands.
//   * sp: serial-parallel multiplier (online delay 2): z_sp = x_sp * Y_sp with Y_sp a
//     parallel coefficient, one product per clock, result N+2 clock edges after x.
// Operands and results are radix-2 signed-digit vectors ({plus, minus} per digit,
// element 0 = most significant digit, weight 1/2); the MSDF digit streams the stages
// produce are also brought out (z_*_skew_o), as an online consumer such as an online
// adder of an inner-product array would take them. The two multipliers share only the
// clock and reset (asynchronous, active low).
module olm_top
  import olm_pkg::*;
#(
  parameter int N = 16,
  parameter int P = 13
) (
  input  logic       clk,
  input  logic       rst_n,
  // serial-serial
  input  logic       ss_in_valid_i,
  input  sd_t        ss_x_i [N],
  input  sd_t        ss_y_i [N],
  output logic       ss_out_valid_o,
  output sd_t        ss_z_o [N],
  output sd_t        ss_z_skew_o [N],
  output logic       ss_z_skew_valid_o [N],
  // serial-parallel
  input  logic       sp_in_valid_i,
  input  sd_t        sp_x_i [N],
  input  logic [N:0] sp_y_i,
  output logic       sp_out_valid_o,
  output sd_t        sp_z_o [N],
  output sd_t        sp_z_skew_o [N],
  output logic       sp_z_skew_valid_o [N]
);

  olm_ss_pipelined #(.N(N), .P(P)) u_ss (
    .clk(clk), .rst_n(rst_n), .in_valid_i(ss_in_valid_i), .x_i(ss_x_i), .y_i(ss_y_i),
    .out_valid_o(ss_out_valid_o), .z_o(ss_z_o),
    .z_skew_o(ss_z_skew_o), .z_skew_valid_o(ss_z_skew_valid_o)
  );

  olm_sp_pipelined #(.N(N)) u_sp (
    .clk(clk), .rst_n(rst_n), .in_valid_i(sp_in_valid_i), .x_i(sp_x_i), .y_i(sp_y_i),
    .out_valid_o(sp_out_valid_o), .z_o(sp_z_o),
    .z_skew_o(sp_z_skew_o), .z_skew_valid_o(sp_z_skew_valid_o)
  );

endmodule
