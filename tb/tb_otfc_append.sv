// tb_otfc_append: a chain of NFRAC converter steps turns random signed-digit strings
// into two's complement; after each step Q must equal the exact value of the digits so
// far and QM must equal Q - ulp. Two further steps check the reduced-precision forms:
// the converted value rounded down to K bits, for a digit inside and a digit below the
// kept precision.
module tb_otfc_append;
  import olm_pkg::*;
  localparam int NF = 8;
  localparam int XC = NF + 2;
  localparam int NTEST = 3000;

  sd_t           d [NF];
  logic [XC-1:0] q [NF+1], qm [NF+1];
  logic [XC-1:0] tq_a, tqm_a, tq_b, tqm_b;

  assign q[0]  = '0;
  assign qm[0] = {2'b11, {NF{1'b0}}};
  for (genvar i = 1; i <= NF; i++) begin : g_chain
    otfc_append #(.NFRAC(NF), .POS(i), .K(NF)) u_ca (
      .q_i(q[i-1]), .qm_i(qm[i-1]), .d_i(d[i-1]), .q_o(q[i]), .qm_o(qm[i]));
  end
  // step 6 with only 4 bits kept (digit below the kept precision)
  otfc_append #(.NFRAC(NF), .POS(6), .K(4)) u_tr_b (
    .q_i(q[5]), .qm_i(qm[5]), .d_i(d[5]), .q_o(tq_b), .qm_o(tqm_b));
  // step 4 with 4 bits kept (digit at the last kept position)
  otfc_append #(.NFRAC(NF), .POS(4), .K(4)) u_tr_a (
    .q_i(q[3]), .qm_i(qm[3]), .d_i(d[3]), .q_o(tq_a), .qm_o(tqm_a));

  int checks = 0, failures = 0;

  function automatic longint sx(logic [XC-1:0] v);
    return longint'($signed(v));
  endfunction

  function automatic longint fl4(longint v);   // round down to 4 fraction bits
    return (v >>> (NF - 4)) <<< (NF - 4);
  endfunction

  initial begin
    for (int t = 0; t < NTEST; t++) begin
      longint val, vals [NF+1];
      val = 0;
      vals[0] = 0;
      for (int i = 0; i < NF; i++) begin
        case ($urandom_range(2))
          0: d[i] = sd_t'(2'b10);
          1: d[i] = sd_t'(2'b01);
          default: d[i] = sd_t'(2'b00);
        endcase
        val += longint'(d[i].p) - longint'(d[i].m) <<< (NF - 1 - i);
        vals[i+1] = val;
      end
      #1;
      for (int i = 1; i <= NF; i++) begin
        checks += 2;
        if (sx(q[i]) != vals[i]) begin
          failures++;
          $display("FAIL Q step %0d: %0d vs %0d", i, sx(q[i]), vals[i]);
        end
        if (sx(qm[i]) != vals[i] - (longint'(1) <<< (NF - i))) begin
          failures++;
          $display("FAIL QM step %0d", i);
        end
      end
      checks += 4;
      if (sx(tq_b) != fl4(vals[6])) begin failures++; $display("FAIL trunc Q (below)"); end
      if (sx(tqm_b) != fl4(vals[6] - 4)) begin failures++; $display("FAIL trunc QM (below)"); end
      if (sx(tq_a) != fl4(vals[4])) begin failures++; $display("FAIL trunc Q (at)"); end
      if (sx(tqm_a) != fl4(vals[4] - 16)) begin failures++; $display("FAIL trunc QM (at)"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(NTEST * 10 + 1000);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
