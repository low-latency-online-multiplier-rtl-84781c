// olm_ss_pipelined: digit-level pipelined radix-2 online multiplier with both operands
// in serial (most-significant digit first) and reduced working precision.
//
// The N+3 iterations of the online multiplication algorithm (3 initialization, N-3
// recurrence, 3 with zero inputs) are unrolled into N+3 stages (olm_ss_stage), each with
// only the digit slices its iteration needs: the slice count grows with the precision
// of the incoming operands up to P+3 fraction bits and shrinks again after iteration
// P-3 (see olm_pkg::ss_width). Each stage works on a different operation, so a new pair
// of N-digit operands can enter every clock cycle and one N-digit product leaves every
// clock cycle once the pipeline is full.
//
// Operands arrive as parallel signed-digit vectors (x_i[0] = x_1, the most significant
// digit, weight 1/2) and pass a staircase skew network: digit i is delayed i cycles so
// that it meets its operation in stage i. Result digit z_{k+1} is produced by stage k+3
// and latched there; z_skew_o gives these latched digits (the MSDF result stream, each
// digit belonging to a different operation), and a reverse staircase re-aligns them
// into the parallel result z_o.
//
// Timing: an operation presented with in_valid_i at clock edge t appears on z_o with
// out_valid_o after edge t + N + 3 (n + delta + 1 cycles counting the input cycle).
// x_i and y_i are sampled on the cycle in_valid_i is high; a cycle without in_valid_i is
// a bubble. The result satisfies |x*y - z| < 2^-N at the default N = 16, P = 13 (and at
// N = 8, P = 7). P must be large enough for the truncation: the width profile needs
// roughly 4P >= 3N - 1, and for N = 24 the bound needs P = 19 (P = 18 misses it by
// 2^-48 for the largest operands).
// The stage structure follows the design; the valid bits, the output re-alignment and
// the reset (asynchronous, active low) are this implementation's.
module olm_ss_pipelined
  import olm_pkg::*;
#(
  parameter int N = 16,
  parameter int P = 13
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid_i,
  input  sd_t  x_i [N],
  input  sd_t  y_i [N],
  output logic out_valid_o,
  output sd_t  z_o [N],
  output sd_t  z_skew_o [N],
  output logic z_skew_valid_o [N]
);

  localparam int unsigned DELTA_SS = 3;   // online delay of the serial-serial multiplier
  localparam int NS = N + DELTA_SS;   // stages

  // ---------------------------------------------------------------- input skew
  logic [1:0] xin [N], yin [N], xsk [N], ysk [N];
  for (genvar i = 0; i < N; i++) begin : g_inmap
    // digits of a bubble are forced to zero so that no activity enters the array
    assign xin[i] = in_valid_i ? x_i[i] : 2'b00;
    assign yin[i] = in_valid_i ? y_i[i] : 2'b00;
  end
  staircase_shifter #(.NDIG(N), .DW(2), .REVERSE(1'b0)) u_skew_x (
    .clk(clk), .rst_n(rst_n), .din(xin), .dout(xsk)
  );
  staircase_shifter #(.NDIG(N), .DW(2), .REVERSE(1'b0)) u_skew_y (
    .clk(clk), .rst_n(rst_n), .din(yin), .dout(ysk)
  );

  // ---------------------------------------------------------------- stage array
  logic         vld   [NS+1];
  logic [N+1:0] xq    [NS+1];
  logic [N+1:0] xqm   [NS+1];
  logic [N+1:0] yq    [NS+1];
  logic [N+1:0] yqm   [NS+1];
  logic [N+4:0] ws    [NS+1];
  logic [N+4:0] wc    [NS+1];
  sd_t          zst   [NS];
  logic         zvld  [NS];

  // iteration -3 starts from x[-3] = y[-3] = 0 (QM = -1) and w[-3] = 0
  assign vld[0] = in_valid_i;
  assign xq[0]  = '0;
  assign xqm[0] = {2'b11, {N{1'b0}}};
  assign yq[0]  = '0;
  assign yqm[0] = {2'b11, {N{1'b0}}};
  assign ws[0]  = '0;
  assign wc[0]  = '0;

  for (genvar s = 0; s < NS; s++) begin : g_stage
    sd_t xd, yd;
    if (s < N) begin : g_d
      assign xd = xsk[s];
      assign yd = ysk[s];
    end else begin : g_nod
      assign xd = '0;
      assign yd = '0;
    end
    olm_ss_stage #(.N(N), .P(P), .J(s - int'(DELTA_SS))) u_stage (
      .clk(clk), .rst_n(rst_n), .valid_i(vld[s]),
      .x_d_i(xd), .y_d_i(yd),
      .xq_i(xq[s]), .xqm_i(xqm[s]), .yq_i(yq[s]), .yqm_i(yqm[s]),
      .ws_i(ws[s]), .wc_i(wc[s]),
      .valid_o(vld[s+1]),
      .xq_o(xq[s+1]), .xqm_o(xqm[s+1]), .yq_o(yq[s+1]), .yqm_o(yqm[s+1]),
      .ws_o(ws[s+1]), .wc_o(wc[s+1]),
      .z_o(zst[s]), .z_valid_o(zvld[s])
    );
  end

  // ---------------------------------------------------------------- output
  logic [1:0] zsk [N], zal [N];
  for (genvar k = 0; k < N; k++) begin : g_out
    assign zsk[k]            = zst[k + DELTA_SS];
    assign z_skew_o[k]       = zst[k + DELTA_SS];
    assign z_skew_valid_o[k] = zvld[k + DELTA_SS];
    assign z_o[k]            = zal[k];
  end
  staircase_shifter #(.NDIG(N), .DW(2), .REVERSE(1'b1)) u_align (
    .clk(clk), .rst_n(rst_n), .din(zsk), .dout(zal)
  );
  assign out_valid_o = zvld[NS-1];

endmodule
