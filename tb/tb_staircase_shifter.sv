// tb_staircase_shifter: checks the forward (digit i delayed i cycles) and reverse
// (digit i delayed NDIG-1-i cycles) skew networks against a record of past inputs,
// including the reset value (zero) before the shift registers have filled.
module tb_staircase_shifter;
  localparam int NDIG = 6;
  localparam int DW = 2;
  localparam int NCYC = 400;

  logic          clk = 1'b0, rst_n = 1'b0;
  logic [DW-1:0] din [NDIG], dfw [NDIG], drv [NDIG];

  staircase_shifter #(.NDIG(NDIG), .DW(DW), .REVERSE(1'b0)) u_fw (
    .clk(clk), .rst_n(rst_n), .din(din), .dout(dfw));
  staircase_shifter #(.NDIG(NDIG), .DW(DW), .REVERSE(1'b1)) u_rv (
    .clk(clk), .rst_n(rst_n), .din(din), .dout(drv));

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  logic [DW-1:0] hist [NCYC + 10][NDIG];   // hist[t] = din during cycle t

  initial begin
    for (int i = 0; i < NDIG; i++) din[i] = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int t = 0; t < NCYC; t++) begin
      for (int i = 0; i < NDIG; i++) begin
        din[i] = DW'($urandom());
        hist[t][i] = din[i];
      end
      #1;
      for (int i = 0; i < NDIG; i++) begin
        logic [DW-1:0] efw, erv;
        efw = (t - i >= 0) ? hist[t - i][i] : '0;
        erv = (t - (NDIG - 1 - i) >= 0) ? hist[t - (NDIG - 1 - i)][i] : '0;
        checks += 2;
        if (dfw[i] !== efw) begin
          failures++;
          $display("FAIL fw t=%0d i=%0d got %0h exp %0h", t, i, dfw[i], efw);
        end
        if (drv[i] !== erv) begin
          failures++;
          $display("FAIL rv t=%0d i=%0d got %0h exp %0h", t, i, drv[i], erv);
        end
      end
      @(posedge clk);
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (NCYC + 50) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
