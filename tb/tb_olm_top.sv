// tb_olm_top: end-to-end test of the top level at its default parameters (N = 16,
// P = 13), both multipliers running at once.
//
// The serial-serial side gets the worked example (exact digits checked) and then a
// random operand stream; the serial-parallel side gets random x streams against a
// coefficient Y that is changed three times (after draining). Every result is checked
// against the exact product (|x*y - z| < 2^-N) and for its latency (N+3 and N+2 edges).
// The mechanisms of the design are counted and each must occur: back-to-back results
// (one product per clock), pipeline bubbles, each result digit value -1/0/+1 from each
// multiplier, negative operand digits (selector complement path), and a change of the
// parallel coefficient.
module tb_olm_top;
  import olm_pkg::*;

  localparam int N = 16;
  localparam int NOPS = 1500;

  logic       clk = 1'b0;
  logic       rst_n = 1'b0;
  logic       ss_v = 1'b0, sp_v = 1'b0;
  sd_t        ss_x [N], ss_y [N], sp_x [N];
  logic [N:0] sp_y = '0;
  logic       ss_ov, sp_ov;
  sd_t        ss_z [N], sp_z [N], ss_zs [N], sp_zs [N];
  logic       ss_zsv [N], sp_zsv [N];

  olm_top dut (
    .clk(clk), .rst_n(rst_n),
    .ss_in_valid_i(ss_v), .ss_x_i(ss_x), .ss_y_i(ss_y), .ss_out_valid_o(ss_ov),
    .ss_z_o(ss_z), .ss_z_skew_o(ss_zs), .ss_z_skew_valid_o(ss_zsv),
    .sp_in_valid_i(sp_v), .sp_x_i(sp_x), .sp_y_i(sp_y), .sp_out_valid_o(sp_ov),
    .sp_z_o(sp_z), .sp_z_skew_o(sp_zs), .sp_z_skew_valid_o(sp_zsv)
  );

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  function automatic int dval(sd_t d);
    return int'(d.p) - int'(d.m);
  endfunction

  function automatic longint sdvec(sd_t v [N]);
    longint s = 0;
    for (int i = 0; i < N; i++) s = s * 2 + longint'(dval(v[i]));
    return s;
  endfunction

  function automatic sd_t rnd_digit();
    case ($urandom_range(2))
      0: return sd_t'(2'b10);
      1: return sd_t'(2'b01);
      default: return sd_t'(2'b00);
    endcase
  endfunction

  function automatic sd_t mkd(int v);
    return (v > 0) ? sd_t'(2'b10) : (v < 0) ? sd_t'(2'b01) : sd_t'(2'b00);
  endfunction

  int ex_x [N] = '{1, 1, 0, -1, 0, -1, -1, 0, 1, 1, -1, 0, -1, 1, 0, 0};
  int ex_y [N] = '{-1, 1, -1, 1, 0, 0, -1, 1, 0, 1, -1, 1, 1, -1, 0, -1};
  int ex_z [N] = '{0, -1, 0, 1, -1, 0, 1, 0, 0, 1, -1, 0, 1, 0, -1, 1};

  // mechanism counters
  int ss_b2b = 0, sp_b2b = 0, ss_bub = 0, sp_bub = 0, neg_in = 0, y_changes = 0;
  int ss_dig [3] = '{0, 0, 0};
  int sp_dig [3] = '{0, 0, 0};
  int ss_out = 0, sp_out = 0, ss_in = 0, sp_in = 0, ex_seen = 0;
  longint ss_last = -10, sp_last = -10;

  longint ssq_a[$], ssq_b[$], ssq_t[$];
  int     ssq_ex[$];
  longint spq_a[$], spq_b[$], spq_t[$];

  task automatic check_prod(input longint a, input longint b, input longint zv,
                            input longint lat, input int exp_lat, input string tag);
    longint diff;
    diff = a * b - (zv <<< N);
    checks++;
    if (diff >= (longint'(1) <<< N) || -diff >= (longint'(1) <<< N)) begin
      failures++;
      $display("FAIL %s: a*b=%0d z=%0d", tag, a * b, zv);
    end
    checks++;
    if (lat != longint'(exp_lat)) begin
      failures++;
      $display("FAIL %s: latency %0d, expected %0d", tag, lat, exp_lat);
    end
  endtask

  always @(posedge clk) begin
    if (rst_n && ss_ov) begin
      if (ssq_a.size() == 0) begin
        failures++;
        $display("FAIL ss: result without operation");
      end else begin
        int ex;
        ex = ssq_ex.pop_front();
        check_prod(ssq_a.pop_front(), ssq_b.pop_front(), sdvec(ss_z),
                   cycle - ssq_t.pop_front(), N + 3, "ss");
        if (ex == 1) begin
          ex_seen++;
          for (int k = 0; k < N; k++) begin
            checks++;
            if (dval(ss_z[k]) != ex_z[k]) begin
              failures++;
              $display("FAIL ss: example digit %0d", k + 1);
            end
          end
        end
        for (int k = 0; k < N; k++) ss_dig[dval(ss_z[k]) + 1]++;
        if (ss_last == cycle - 1) ss_b2b++;
        ss_last = cycle;
        ss_out++;
      end
    end
    if (rst_n && sp_ov) begin
      if (spq_a.size() == 0) begin
        failures++;
        $display("FAIL sp: result without operation");
      end else begin
        check_prod(spq_a.pop_front(), spq_b.pop_front(), sdvec(sp_z),
                   cycle - spq_t.pop_front(), N + 2, "sp");
        for (int k = 0; k < N; k++) sp_dig[dval(sp_z[k]) + 1]++;
        if (sp_last == cycle - 1) sp_b2b++;
        sp_last = cycle;
        sp_out++;
      end
    end
  end

  // serial-serial driver
  initial begin
    sd_t xv [N];
    sd_t yv [N];
    for (int i = 0; i < N; i++) begin ss_x[i] = '0; ss_y[i] = '0; end
    wait (rst_n);
    @(posedge clk);
    #1;
    for (int op = 0; op <= NOPS; op++) begin
      if (op > 0 && $urandom_range(9) == 0) begin
        ss_bub++;
        @(posedge clk);
        #1;
      end
      for (int i = 0; i < N; i++) begin
        xv[i] = (op == 0) ? mkd(ex_x[i]) : rnd_digit();
        yv[i] = (op == 0) ? mkd(ex_y[i]) : rnd_digit();
        if (dval(xv[i]) < 0) neg_in++;
      end
      ss_x = xv; ss_y = yv; ss_v = 1'b1;
      ssq_a.push_back(sdvec(xv)); ssq_b.push_back(sdvec(yv)); ssq_t.push_back(cycle);
      ssq_ex.push_back(op == 0 ? 1 : 0);
      ss_in++;
      @(posedge clk);
      #1;
      ss_v = 1'b0;
    end
  end

  // serial-parallel driver
  initial begin
    sd_t xv [N];
    for (int i = 0; i < N; i++) sp_x[i] = '0;
    wait (rst_n);
    @(posedge clk);
    #1;
    for (int st = 0; st < 4; st++) begin
      sp_y = (N + 1)'($urandom());
      if (st > 0) y_changes++;
      for (int op = 0; op < NOPS / 4; op++) begin
        if ($urandom_range(9) == 0) begin
          sp_bub++;
          @(posedge clk);
          #1;
        end
        for (int i = 0; i < N; i++) xv[i] = rnd_digit();
        sp_x = xv; sp_v = 1'b1;
        spq_a.push_back(sdvec(xv)); spq_b.push_back(longint'($signed(sp_y)));
        spq_t.push_back(cycle);
        sp_in++;
        @(posedge clk);
        #1;
        sp_v = 1'b0;
      end
      repeat (N + 4) @(posedge clk);
      #1;
    end
  end

  task automatic need(input int cnt, input string what);
    checks++;
    if (cnt == 0) begin
      failures++;
      $display("FAIL: mechanism never exercised: %s", what);
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    wait (ss_in == NOPS + 1 && sp_in == 4 * (NOPS / 4));
    repeat (N + 10) @(posedge clk);
    checks++;
    if (ss_out != ss_in || sp_out != sp_in) begin
      failures++;
      $display("FAIL: ss %0d/%0d sp %0d/%0d results", ss_out, ss_in, sp_out, sp_in);
    end
    need(ss_b2b, "ss back-to-back results");
    need(sp_b2b, "sp back-to-back results");
    need(ss_bub, "ss bubble");
    need(sp_bub, "sp bubble");
    need(neg_in, "negative operand digit");
    need(y_changes, "coefficient change");
    need(ex_seen, "worked example");
    for (int d = 0; d < 3; d++) begin
      need(ss_dig[d], "ss result digit value");
      need(sp_dig[d], "sp result digit value");
    end
    $display("ss: results=%0d b2b=%0d bubbles=%0d digits(-1,0,1)=%0d,%0d,%0d",
             ss_out, ss_b2b, ss_bub, ss_dig[0], ss_dig[1], ss_dig[2]);
    $display("sp: results=%0d b2b=%0d bubbles=%0d digits(-1,0,1)=%0d,%0d,%0d Y changes=%0d",
             sp_out, sp_b2b, sp_bub, sp_dig[0], sp_dig[1], sp_dig[2], y_changes);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (4 * NOPS) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
