// olm_sp_stage: one iteration j of the unrolled, digit-level pipelined serial-parallel
// online multiplier (online delay 2): x arrives digit by digit, Y is a parallel
// two's complement constant.
//
//   j = -2, -1   initialization: selector and [3:2] adder give
//                v[j] = 2w[j] + x_{j+2} * Y / 4; no digit is selected and
//                2w[j+1] = 2 v[j] (re-wiring, top bit dropped).
//   j = 0..N-3   recurrence: as above plus the selection slice (V, SELM, M), which
//                produces z_{j+1} and 2w[j+1] = 2(v[j] - z_{j+1}).
//   j = N-2, N-1 last delta iterations: no input, v[j] = 2w[j] feeds the selection
//                slice directly.
// No working-precision reduction is applied to this multiplier: v keeps N+2 fraction
// bits in every input iteration, and the last two iterations lose one bit each as the
// residual is shifted.
//
// Interface: ws_i/wc_i are the previous stage's registered residual, N+4 bits
// (2 integer, N+2 fraction), MSB aligned; x_d_i is x_{j+2} of the operation in this
// stage; y_i is Y = -y_0 + sum y_i 2^-i (N+1 bits, shared by all stages). All outputs
// are registered; one clock per stage. Valid bit and reset are this implementation's.
//
// Lint note: one module serves all stage types, so some instances leave inputs or
// internal words unused, and this is reported as unused signals: the last two stages
// have no x digit and no Y; the initialization stages have no selection, so the
// selection outputs are unused; the top bit of v is dropped by the left shift; and the
// last stages drop the bottom residual bit that falls out of the reduced width.
module olm_sp_stage
  import olm_pkg::*;
#(
  parameter int N = 16,
  parameter int J = -2
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         valid_i,
  input  sd_t          x_d_i,
  input  logic [N:0]   y_i,
  input  logic [N+3:0] ws_i,
  input  logic [N+3:0] wc_i,
  output logic         valid_o,
  output logic [N+3:0] ws_o,
  output logic [N+3:0] wc_o,
  output sd_t          z_o,
  output logic         z_valid_o
);

  localparam int C  = N + 4;
  localparam bit HAS_INPUT = (J <= N - 3);
  localparam bit HAS_SEL   = (J >= 0);
  localparam bit HAS_NEXT  = (J < N - 1);
  localparam int W  = HAS_INPUT ? N + 2 : N + 2 - (J - (N - 3));
  localparam int VW = W + 2;

  logic [VW-1:0] vs, vc;

  if (HAS_INPUT) begin : g_in
    logic [C-1:0] yt;     // Y / 4, sign extended
    logic [C-1:0] a;
    logic         cx;
    assign yt = {{3{y_i[N]}}, y_i};
    sd_selector #(.W(C)) u_sel (.a_i(yt), .d_i(x_d_i), .o_o(a), .neg_o(cx));
    csa32 #(.W(C)) u_add (
      .a_i(a), .ws_i(ws_i), .wc_i(wc_i), .cx_i(cx), .vs_o(vs), .vc_o(vc)
    );
  end else begin : g_noin
    assign vs = ws_i[C-1 -: VW];
    assign vc = wc_i[C-1 -: VW];
  end

  logic [VW-2:0] ws2, wc2;
  sd_t           z;

  if (HAS_SEL) begin : g_sel
    sel_slice #(.W(W)) u_sel (.vs_i(vs), .vc_i(vc), .z_o(z), .ws2_o(ws2), .wc2_o(wc2));
  end else begin : g_nosel
    assign z   = '0;
    assign ws2 = vs[VW-2:0];
    assign wc2 = vc[VW-2:0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid_o   <= 1'b0;
      z_o       <= '0;
      z_valid_o <= 1'b0;
    end else begin
      valid_o   <= valid_i;
      z_o       <= HAS_SEL ? z : '0;
      z_valid_o <= HAS_SEL && valid_i;
    end
  end

  if (HAS_NEXT) begin : g_wreg
    logic [VW-2:0] ws_q, wc_q;
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        ws_q <= '0;
        wc_q <= '0;
      end else begin
        ws_q <= ws2;
        wc_q <= wc2;
      end
    end
    assign ws_o = {ws_q, {(C - VW + 1){1'b0}}};
    assign wc_o = {wc_q, {(C - VW + 1){1'b0}}};
  end else begin : g_nowreg
    assign ws_o = '0;
    assign wc_o = '0;
  end

endmodule
