// tb_olm_workloads: runs the operand sizes the design is evaluated at, n = 8, 16, 24
// and 32, through both pipelined multipliers (one olm_size_run driver each, all in
// parallel on one clock).
//
// For every size it checks the cycle count of a stream of K = 8 products,
// (n + delta + 1) + (K - 1): 19/18, 27/26, 35/34 and 43/42 cycles for serial-serial /
// serial-parallel; the latency of n + delta clock edges (11/10, 19/18, 27/26, 35/34);
// and the accuracy |x*y - z| < 2^-n of every product.
//
// Working precision of the serial-serial multiplier: p = ceil((2n + 5)/3) gives 7 and 13
// for n = 8 and 16, used here. For n = 24 and 32 the formula gives 18 and 23, but the
// truncation used here then misses the accuracy bound by a little (n = 24, largest
// operands) or by several ulp (n = 32). This test uses P = 19 and P = 25, which meet it.
module tb_olm_workloads;
  localparam int NRUN = 8;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic done [NRUN];
  int   chk [NRUN];
  int   fl  [NRUN];

  olm_size_run #(.N(8),  .P(7),  .SP(1'b0)) u_ss8  (.clk, .rst_n, .done(done[0]), .checks(chk[0]), .failures(fl[0]));
  olm_size_run #(.N(16), .P(13), .SP(1'b0)) u_ss16 (.clk, .rst_n, .done(done[1]), .checks(chk[1]), .failures(fl[1]));
  olm_size_run #(.N(24), .P(19), .SP(1'b0)) u_ss24 (.clk, .rst_n, .done(done[2]), .checks(chk[2]), .failures(fl[2]));
  olm_size_run #(.N(32), .P(25), .SP(1'b0)) u_ss32 (.clk, .rst_n, .done(done[3]), .checks(chk[3]), .failures(fl[3]));
  olm_size_run #(.N(8),  .P(8),  .SP(1'b1)) u_sp8  (.clk, .rst_n, .done(done[4]), .checks(chk[4]), .failures(fl[4]));
  olm_size_run #(.N(16), .P(16), .SP(1'b1)) u_sp16 (.clk, .rst_n, .done(done[5]), .checks(chk[5]), .failures(fl[5]));
  olm_size_run #(.N(24), .P(24), .SP(1'b1)) u_sp24 (.clk, .rst_n, .done(done[6]), .checks(chk[6]), .failures(fl[6]));
  olm_size_run #(.N(32), .P(32), .SP(1'b1)) u_sp32 (.clk, .rst_n, .done(done[7]), .checks(chk[7]), .failures(fl[7]));

  int checks = 0, failures = 0;

  initial begin
    bit all_done;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    do begin
      @(posedge clk);
      all_done = 1'b1;
      for (int r = 0; r < NRUN; r++) all_done &= done[r];
    end while (!all_done);
    for (int r = 0; r < NRUN; r++) begin
      checks += chk[r];
      failures += fl[r];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    for (int r = 0; r < NRUN; r++) begin
      checks += chk[r];
      failures += fl[r];
    end
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
