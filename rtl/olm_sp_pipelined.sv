// olm_sp_pipelined: digit-level pipelined radix-2 serial-parallel online multiplier.
// One operand, x, streams in most-significant digit first; the other, Y, is a parallel
// two's complement word (a coefficient fixed for the duration of a stream).
//
// The N+2 iterations (2 initialization, N-2 recurrence, 2 with zero input) are unrolled
// into N+2 stages (olm_sp_stage); each stage has a single [3:2] carry-save row, and only
// the recurrence and final stages have the selection slice. A new x enters every clock
// cycle; once the pipeline is full one N-digit product x*Y leaves every clock cycle.
//
// x_i is a parallel signed-digit vector (x_i[0] = x_1, weight 1/2), skewed by a
// staircase so that digit i meets its operation in stage i. Result digit z_{k+1} is
// produced and latched by stage k+2; z_skew_o gives the latched MSDF digits, and a
// reverse staircase re-aligns them into z_o.
//
// Timing: an x presented with in_valid_i at edge t appears on z_o with out_valid_o after
// edge t + N + 2. y_i must be held stable while any operation is in the pipeline (the
// design feeds the same Y to every stage; it is not pipelined). The result satisfies
// |x*Y - z| < 2^-N.
module olm_sp_pipelined
  import olm_pkg::*;
#(
  parameter int N = 16
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       in_valid_i,
  input  sd_t        x_i [N],
  input  logic [N:0] y_i,
  output logic       out_valid_o,
  output sd_t        z_o [N],
  output sd_t        z_skew_o [N],
  output logic       z_skew_valid_o [N]
);

  localparam int unsigned DELTA_SP = 2;   // online delay of the serial-parallel multiplier
  localparam int NS = N + DELTA_SP;

  logic [1:0] xin [N], xsk [N];
  for (genvar i = 0; i < N; i++) begin : g_inmap
    assign xin[i] = in_valid_i ? x_i[i] : 2'b00;
  end
  staircase_shifter #(.NDIG(N), .DW(2), .REVERSE(1'b0)) u_skew_x (
    .clk(clk), .rst_n(rst_n), .din(xin), .dout(xsk)
  );

  logic         vld  [NS+1];
  logic [N+3:0] ws   [NS+1];
  logic [N+3:0] wc   [NS+1];
  sd_t          zst  [NS];
  logic         zvld [NS];

  assign vld[0] = in_valid_i;
  assign ws[0]  = '0;
  assign wc[0]  = '0;

  for (genvar s = 0; s < NS; s++) begin : g_stage
    sd_t xd;
    if (s < N) begin : g_d
      assign xd = xsk[s];
    end else begin : g_nod
      assign xd = '0;
    end
    olm_sp_stage #(.N(N), .J(s - int'(DELTA_SP))) u_stage (
      .clk(clk), .rst_n(rst_n), .valid_i(vld[s]), .x_d_i(xd), .y_i(y_i),
      .ws_i(ws[s]), .wc_i(wc[s]),
      .valid_o(vld[s+1]), .ws_o(ws[s+1]), .wc_o(wc[s+1]),
      .z_o(zst[s]), .z_valid_o(zvld[s])
    );
  end

  logic [1:0] zsk [N], zal [N];
  for (genvar k = 0; k < N; k++) begin : g_out
    assign zsk[k]            = zst[k + DELTA_SP];
    assign z_skew_o[k]       = zst[k + DELTA_SP];
    assign z_skew_valid_o[k] = zvld[k + DELTA_SP];
    assign z_o[k]            = zal[k];
  end
  staircase_shifter #(.NDIG(N), .DW(2), .REVERSE(1'b1)) u_align (
    .clk(clk), .rst_n(rst_n), .din(zsk), .dout(zal)
  );
  assign out_valid_o = zvld[NS-1];

endmodule
