// tb_selm: all eight estimate codes against the selection rule written as value
// comparisons: z = 1 if estimate >= 1/2, z = -1 if estimate <= -1, else 0.
module tb_selm;
  import olm_pkg::*;
  logic [2:0] v;
  sd_t z;
  selm dut (.v_i(v), .z_o(z));
  int checks = 0, failures = 0;
  initial begin
    for (int c = 0; c < 8; c++) begin
      int est2, ez;   // estimate in halves
      v = 3'(c);
      #1;
      est2 = int'($signed(v));
      ez = (est2 >= 1) ? 1 : (est2 <= -2) ? -1 : 0;
      checks++;
      if (int'(z.p) - int'(z.m) != ez || (z.p && z.m)) begin
        failures++;
        $display("FAIL v=%b z=%b expected %0d", v, z, ez);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #1000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
