// tb_csa32: random operands and carry-in; vs + vc must equal a + ws + wc + cx
// modulo 2^W.
module tb_csa32;
  localparam int W = 12;
  logic [W-1:0] a, ws, wc, vs, vc;
  logic cx;
  csa32 #(.W(W)) dut (.a_i(a), .ws_i(ws), .wc_i(wc), .cx_i(cx), .vs_o(vs), .vc_o(vc));
  int checks = 0, failures = 0;
  initial begin
    for (int t = 0; t < 5000; t++) begin
      a = W'($urandom()); ws = W'($urandom()); wc = W'($urandom()); cx = 1'($urandom());
      #1;
      checks++;
      if (W'(vs + vc) != W'(a + ws + wc + W'(cx))) begin
        failures++;
        $display("FAIL %0h %0h %0h %b", a, ws, wc, cx);
      end
    end
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
