// olm_ss_stage: one iteration j of the unrolled, digit-level pipelined serial-serial
// online multiplier (online delay 3), with the reduced working precision of the design.
//
// What the stage holds depends on j (N = precision, P = working precision):
//   j = -3..-1   initialization: two on-the-fly converters (x, y), two selectors and the
//                [4:2] adder compute v[j] = 2w[j] + (x[j]*y_{j+4} + y[j+1]*x_{j+4})/8;
//                no digit is selected and 2w[j+1] is v[j] shifted left (re-wiring).
//   j = 0..N-4   recurrence: as above plus the selection slice (V, SELM, M), which
//                produces z_{j+1} and 2w[j+1] = 2(v[j] - z_{j+1}).
//   j = N-3..N-1 last delta iterations: the input digits are zero, so converters,
//                selectors and adder are absent; v[j] = 2w[j] goes straight to the
//                selection slice.
// v[j] is kept to W = ss_width(j) fraction bits (see olm_pkg): the incoming residual and
// operand words are cut to that precision (rounded down) and the slices below it do not
// exist. Operand x[j] is used to W-4 fraction bits and y[j+1] to W-3 bits, so that after
// the 3-bit arithmetic right shift (the /8) both fit in W bits. y is converted one
// digit ahead of x: this stage appends y_{j+4} to y[j] before using it, and appends
// x_{j+4} to x[j] only for the next stage.
//
// Interface: the incoming words (x/y converter pair, ws/wc residual pair, valid) come
// from the previous stage's registers; x_d_i / y_d_i are the digits x_{j+4}, y_{j+4} of
// the operation now in this stage (from the input staircase). Residual words are N+5
// bits (2 integer, N+3 fraction), converter words N+2 bits (2 integer, N fraction), MSB
// aligned; bits below the kept precision are zero. Timing: one clock per stage; all
// outputs are registered (z_o with z_valid_o, like the Zout latch of the design).
// The word widths and the slice order follow the design; the widths of the operand
// registers after truncation, the valid bit and the reset are this implementation's.
//
// Lint note: one module serves all stage types and all widths, so each instance leaves
// some inputs or internal bits unused, and this is reported as unused signals. These are
// the residual, operand and converter bits below the kept precision W (the truncation
// above); the top bit of v, dropped by the left shift 2v; the converter and digit inputs
// of the last delta stages, which have no input; the selection outputs of the
// initialization stages; and the converter outputs of the last stage that takes input,
// whose successors need no operands.
module olm_ss_stage
  import olm_pkg::*;
#(
  parameter int N = 16,
  parameter int P = 13,
  parameter int J = -3
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         valid_i,
  input  sd_t          x_d_i,
  input  sd_t          y_d_i,
  input  logic [N+1:0] xq_i,
  input  logic [N+1:0] xqm_i,
  input  logic [N+1:0] yq_i,
  input  logic [N+1:0] yqm_i,
  input  logic [N+4:0] ws_i,
  input  logic [N+4:0] wc_i,
  output logic         valid_o,
  output logic [N+1:0] xq_o,
  output logic [N+1:0] xqm_o,
  output logic [N+1:0] yq_o,
  output logic [N+1:0] yqm_o,
  output logic [N+4:0] ws_o,
  output logic [N+4:0] wc_o,
  output sd_t          z_o,
  output logic         z_valid_o
);

  localparam int C   = N + 5;                // residual container
  localparam int XC  = N + 2;                // operand container
  localparam int W   = ss_width(J, N, P);    // fraction bits of v[j]
  localparam int VW  = W + 2;
  localparam bit HAS_INPUT = (J <= N - 4);
  localparam bit HAS_SEL   = (J >= 0);
  localparam bit HAS_NEXT  = (J < N - 1);
  localparam bit NEXT_IN   = (J + 1 <= N - 4);    // next stage still takes digits
  localparam int WN  = HAS_NEXT ? ss_width(J + 1, N, P) : 0;
  localparam int KX  = W - 4;                     // fraction bits of x[j] used
  localparam int KY  = W - 3;                     // fraction bits of y[j+1] used
  localparam int POS = J + 4;                     // position of the new digits
  localparam int RX  = imin(WN - 4, J + 4);       // x[j+1] bits kept for next stage
  localparam int RY  = imin(WN - 3, J + 4);       // y[j+1] bits kept for next stage

  // keep the two integer bits and k fraction bits of an operand word
  function automatic logic [XC-1:0] keep_mask(int k);
    logic [XC-1:0] m;
    m = '1;
    if (k < N) m = m << (N - k);
    return m;
  endfunction

  localparam logic [XC-1:0] MASK_KX = keep_mask(KX);
  localparam logic [XC-1:0] MASK_RY = keep_mask(NEXT_IN ? RY : 0);

  // ------------------------------------------------------------------ v[j]
  logic [VW-1:0] vs, vc;
  logic [XC-1:0] xq_n, xqm_n, yq_n, yqm_n;   // x[j+1] (next stage), y[j+1]

  if (HAS_INPUT) begin : g_in
    logic [XC-1:0] y1_q, y1_qm;                 // y[j+1] to KY bits
    logic [C-1:0]  xt, yt;
    logic [VW-1:0] a, b;
    logic          cy, cx;

    // y[j+1] = CA(y[j], y_{j+4}), used now
    otfc_append #(.NFRAC(N), .POS(POS), .K(KY)) u_ca_y (
      .q_i(yq_i), .qm_i(yqm_i), .d_i(y_d_i), .q_o(y1_q), .qm_o(y1_qm)
    );
    // x[j+1] = CA(x[j], x_{j+4}), for the next stage
    otfc_append #(.NFRAC(N), .POS(POS), .K(NEXT_IN ? RX : 0)) u_ca_x (
      .q_i(xq_i), .qm_i(xqm_i), .d_i(x_d_i), .q_o(xq_n), .qm_o(xqm_n)
    );
    // y[j+1] cut to what the next stage needs
    assign yq_n  = y1_q  & MASK_RY;
    assign yqm_n = y1_qm & MASK_RY;

    // x[j] cut to KX bits, /8 (arithmetic shift right by 3), then to W fraction bits
    logic [XC-1:0] x_use;
    always_comb begin
      x_use = xq_i & MASK_KX;
      xt    = {{3{x_use[XC-1]}}, x_use};
      yt    = {{3{y1_q[XC-1]}}, y1_q};
    end

    sd_selector #(.W(VW)) u_sel_x (.a_i(xt[C-1 -: VW]), .d_i(y_d_i), .o_o(a), .neg_o(cy));
    sd_selector #(.W(VW)) u_sel_y (.a_i(yt[C-1 -: VW]), .d_i(x_d_i), .o_o(b), .neg_o(cx));

    csa42 #(.W(VW)) u_add (
      .a_i(a), .b_i(b), .ws_i(ws_i[C-1 -: VW]), .wc_i(wc_i[C-1 -: VW]),
      .cy_i(cy), .cx_i(cx), .vs_o(vs), .vc_o(vc)
    );
  end else begin : g_noin
    assign vs    = ws_i[C-1 -: VW];
    assign vc    = wc_i[C-1 -: VW];
    assign xq_n  = '0;
    assign xqm_n = '0;
    assign yq_n  = '0;
    assign yqm_n = '0;
  end

  // ------------------------------------------------------------------ 2w[j+1], z
  logic [VW-2:0] ws2, wc2;
  sd_t           z;

  if (HAS_SEL) begin : g_sel
    sel_slice #(.W(W)) u_sel (.vs_i(vs), .vc_i(vc), .z_o(z), .ws2_o(ws2), .wc2_o(wc2));
  end else begin : g_nosel
    // initialization: 2w[j+1] = 2 v[j], the top integer bit is dropped
    assign z   = '0;
    assign ws2 = vs[VW-2:0];
    assign wc2 = vc[VW-2:0];
  end

  // ------------------------------------------------------------------ registers
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

  if (NEXT_IN) begin : g_xreg
    // converter registers (CA-Reg); bits below the kept precision stay zero
    logic [XC-1:0] xq_q, xqm_q, yq_q, yqm_q;
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        xq_q  <= '0;
        xqm_q <= '0;
        yq_q  <= '0;
        yqm_q <= '0;
      end else begin
        xq_q  <= xq_n;
        xqm_q <= xqm_n;
        yq_q  <= yq_n;
        yqm_q <= yqm_n;
      end
    end
    assign xq_o  = xq_q;
    assign xqm_o = xqm_q;
    assign yq_o  = yq_q;
    assign yqm_o = yqm_q;
  end else begin : g_noxreg
    assign xq_o  = '0;
    assign xqm_o = '0;
    assign yq_o  = '0;
    assign yqm_o = '0;
  end

  if (W < 3 || W > N + 3) begin : g_chk
    $error("olm_ss_stage: working precision out of range");
  end

endmodule
