// tb_sel_slice: random carry-save residuals v = vs + vc. The digit must follow the
// selection rule applied to the top three bits (halves) of the 4-bit estimate formed
// by adding the top four bits of vs and of vc, and the new residual must satisfy ws2 + wc2 = 2 (v - z) modulo 4,
// with the top three bits of wc2 zero.
module tb_sel_slice;
  import olm_pkg::*;
  localparam int W = 7;
  logic [W+1:0] vs, vc;
  logic [W:0] ws2, wc2;
  sd_t z;
  sel_slice #(.W(W)) dut (.vs_i(vs), .vc_i(vc), .z_o(z), .ws2_o(ws2), .wc2_o(wc2));
  int checks = 0, failures = 0;
  int zc [3] = '{0, 0, 0};
  initial begin
    for (int t = 0; t < 5000; t++) begin
      int est, ez, zv;
      logic [W+1:0] lhs, rhs;
      vs = (W + 2)'($urandom()); vc = (W + 2)'($urandom());
      #1;
      est = int'($signed(4'(vs[W+1 -: 4] + vc[W+1 -: 4])));   // quarters
      ez = ((est >>> 1) >= 1) ? 1 : ((est >>> 1) <= -2) ? -1 : 0;   // rule on v_-1 v_0 . v_1
      zv = int'(z.p) - int'(z.m);
      zc[zv + 1]++;
      checks++;
      if (zv != ez) begin
        failures++;
        $display("FAIL digit: est=%0d z=%0d exp %0d", est, zv, ez);
      end
      // 2(v - z) with W fraction bits: v has W fraction bits, z weight 2^W
      lhs = (W + 2)'({ws2, 1'b0} + {wc2, 1'b0});
      rhs = (W + 2)'(((vs + vc) - ((W + 2)'(zv) <<< W)) <<< 1);
      checks++;
      if (lhs != rhs || wc2[W -: 3] != 3'b000) begin
        failures++;
        $display("FAIL residual vs=%0h vc=%0h", vs, vc);
      end
    end
    checks++;
    if (zc[0] == 0 || zc[1] == 0 || zc[2] == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
