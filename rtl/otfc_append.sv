// otfc_append: one step of on-the-fly conversion (the CA, "convert and append", function)
// of a radix-2 signed-digit stream into two's complement.
//
// Two words are kept: Q = the value of the digits received so far, and QM = Q - ulp.
// A new digit q at fraction position POS gives
//   q = +1 : Q' = Q  & 1,  QM' = Q  & 0
//   q =  0 : Q' = Q  & 0,  QM' = QM & 1
//   q = -1 : Q' = QM & 1,  QM' = QM & 0       ("&" = append one bit)
// i.e. two 2-to-1 multiplexers choose the prefix and the appended bit is |q| for Q
// (an OR of the two digit bits) and NOT|q| for QM (an AND of the inverted bits), as in
// the converter slice of the design. Starting values are Q = 00, QM = 11 (0 and -1),
// so a first digit of -1 yields 11.1 = -1/2.
//
// Reduced working precision: only K fraction bits of the results are kept (the lower
// bits of Q and QM are cleared); if POS > K the new digit falls below the kept
// precision and only the prefix multiplexers act. This keeps Q' and QM' equal to the
// exact converted values rounded down to K bits.
//
// Words are XC = 2 + NFRAC bits, two integer bits, MSB aligned. Purely combinational;
// the registers are in the pipeline stage.
module otfc_append
  import olm_pkg::*;
#(
  parameter int unsigned NFRAC = 16,
  parameter int unsigned POS   = 1,
  parameter int unsigned K     = NFRAC
) (
  input  logic [NFRAC+1:0] q_i,
  input  logic [NFRAC+1:0] qm_i,
  input  sd_t              d_i,
  output logic [NFRAC+1:0] q_o,
  output logic [NFRAC+1:0] qm_o
);

  localparam int unsigned XC = NFRAC + 2;

  function automatic logic [XC-1:0] keep_mask(int unsigned k);
    logic [XC-1:0] m;
    m = '1;
    if (k < NFRAC) m = m << (NFRAC - k);
    return m;
  endfunction

  localparam logic [XC-1:0] MASK = keep_mask(K);
  localparam logic [XC-1:0] LSD  = (POS <= K && POS >= 1 && POS <= NFRAC)
                                   ? (XC'(1) << (NFRAC - POS)) : '0;

  always_comb begin
    q_o  = ((sd_is_neg(d_i) ? qm_i : q_i) | (sd_is_nz(d_i) ? LSD : '0)) & MASK;
    qm_o = ((sd_is_pos(d_i) ? q_i : qm_i) | (!sd_is_nz(d_i) ? LSD : '0)) & MASK;
  end

endmodule
