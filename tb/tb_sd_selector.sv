// tb_sd_selector: for random words and every digit code, the selector output plus its
// negation carry must equal word * digit (modulo 2^W); code 11 must give zero.
module tb_sd_selector;
  import olm_pkg::*;
  localparam int W = 10;
  logic [W-1:0] a, o;
  sd_t d;
  logic neg;
  sd_selector #(.W(W)) dut (.a_i(a), .d_i(d), .o_o(o), .neg_o(neg));
  int checks = 0, failures = 0;
  initial begin
    for (int t = 0; t < 2000; t++) begin
      logic [W-1:0] exp_v;
      a = W'($urandom());
      d = sd_t'(2'(t % 4));
      #1;
      case (t % 4)
        2: exp_v = a;
        1: exp_v = -a;
        default: exp_v = '0;
      endcase
      checks++;
      if (W'(o + W'(neg)) != exp_v) begin
        failures++;
        $display("FAIL a=%0h d=%b o=%0h neg=%b", a, d, o, neg);
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
