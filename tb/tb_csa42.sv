// tb_csa42: random operands and carry-ins; vs + vc must equal the sum of the four
// words and the two carry-ins modulo 2^W.
module tb_csa42;
  localparam int W = 12;
  logic [W-1:0] a, b, ws, wc, vs, vc;
  logic cy, cx;
  csa42 #(.W(W)) dut (.a_i(a), .b_i(b), .ws_i(ws), .wc_i(wc), .cy_i(cy), .cx_i(cx),
                      .vs_o(vs), .vc_o(vc));
  int checks = 0, failures = 0;
  initial begin
    for (int t = 0; t < 5000; t++) begin
      a = W'($urandom()); b = W'($urandom()); ws = W'($urandom()); wc = W'($urandom());
      cy = 1'($urandom()); cx = 1'($urandom());
      #1;
      checks++;
      if (W'(vs + vc) != W'(a + b + ws + wc + W'(cy) + W'(cx))) begin
        failures++;
        $display("FAIL %0h %0h %0h %0h %b %b", a, b, ws, wc, cy, cx);
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
