// tb_olm_ss_pipelined: self-checking test of the pipelined serial-serial online
// multiplier at its default size (N = 16, P = 13).
//
// 1. The worked example operands (x = 0.666..., y = -0.3156...) must give exactly the
//    result digits 0 -1 0 1 -1 0 1 0 0 1 -1 0 1 0 -1 1 (z = -0.2103424072265625).
// 2. Random signed-digit operands, issued back to back and with random bubbles, are
//    checked against the exact product: |x*y - z| < 2^-N, computed with integers.
// 3. Every result must appear exactly N+3 clock edges after its operands, and in
//    steady state one result per clock.
// 4. The MSDF stream (z_skew_o) of each operation must carry the same digits as the
//    re-aligned result.
module tb_olm_ss_pipelined;
  import olm_pkg::*;

  localparam int N = 16;
  localparam int P = 13;
  localparam int NOPS = 3000;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic in_valid = 1'b0;
  sd_t  x [N];
  sd_t  y [N];
  logic out_valid;
  sd_t  z [N];
  sd_t  zs [N];
  logic zsv [N];

  olm_ss_pipelined #(.N(N), .P(P)) dut (
    .clk(clk), .rst_n(rst_n), .in_valid_i(in_valid), .x_i(x), .y_i(y),
    .out_valid_o(out_valid), .z_o(z), .z_skew_o(zs), .z_skew_valid_o(zsv)
  );

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  // scoreboard
  longint q_x[$], q_y[$], q_t[$];
  int     q_ex[$];           // 1 = worked example
  int     n_out = 0, n_b2b = 0, n_bubbles = 0;
  int     dig_cnt [3] = '{0, 0, 0};
  longint last_out = -10;
  function automatic int dval(sd_t d);
    return int'(d.p) - int'(d.m);
  endfunction

  function automatic longint sdvec(sd_t v [N]);
    longint s = 0;
    for (int i = 0; i < N; i++) s = s * 2 + longint'(dval(v[i]));
    return s;   // value * 2^N
  endfunction

  function automatic sd_t rnd_digit();
    case ($urandom_range(2))
      0: return '{p: 1'b1, m: 1'b0};
      1: return '{p: 1'b0, m: 1'b1};
      default: return '{p: 1'b0, m: 1'b0};
    endcase
  endfunction

  // worked example (digits x_1..x_16, y_1..y_16 and z_1..z_16)
  int ex_x [N] = '{1, 1, 0, -1, 0, -1, -1, 0, 1, 1, -1, 0, -1, 1, 0, 0};
  int ex_y [N] = '{-1, 1, -1, 1, 0, 0, -1, 1, 0, 1, -1, 1, 1, -1, 0, -1};
  int ex_z [N] = '{0, -1, 0, 1, -1, 0, 1, 0, 0, 1, -1, 0, 1, 0, -1, 1};

  function automatic sd_t mkd(int v);
    return (v > 0) ? sd_t'(2'b10) : (v < 0) ? sd_t'(2'b01) : sd_t'(2'b00);
  endfunction

  // output checker
  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      longint xe, ye, ze, diff, lat;
      int ex;
      ze = sdvec(z);
      if (q_x.size() == 0) begin
        failures++;
        $display("FAIL: result without operation");
      end else begin
        xe = q_x.pop_front(); ye = q_y.pop_front(); lat = cycle - q_t.pop_front();
        ex = q_ex.pop_front();
        diff = xe * ye - (ze <<< N);
        checks++;
        if (diff >= (longint'(1) <<< N) || -diff >= (longint'(1) <<< N)) begin
          failures++;
          $display("FAIL: x*y=%0d z=%0d diff=%0d", xe * ye, ze, diff);
        end
        checks++;
        if (lat != longint'(N + 3)) begin
          failures++;
          $display("FAIL: latency %0d, expected %0d", lat, N + 3);
        end
        if (ex == 1) begin
          for (int k = 0; k < N; k++) begin
            checks++;
            if (dval(z[k]) != ex_z[k]) begin
              failures++;
              $display("FAIL: example digit %0d = %0d, expected %0d", k + 1, dval(z[k]), ex_z[k]);
            end
          end
        end
        for (int k = 0; k < N; k++) begin
          dig_cnt[dval(z[k]) + 1]++;
          checks++;
          if (!skew_dig.exists(cycle - lat) || skew_dig[cycle - lat][k] != dval(z[k])) begin
            failures++;
            $display("FAIL: MSDF digit %0d differs from aligned result", k + 1);
          end
        end
        skew_dig.delete(cycle - lat);
        if (last_out == cycle - 1) n_b2b++;
        last_out = cycle;
        n_out++;
      end
    end
  end

  // MSDF stream: digit k of the operation issued in cycle c is latched by stage k+3 and
  // is seen here in cycle c+k+4
  int skew_dig [longint][N];
  always @(posedge clk) begin
    if (rst_n) begin
      for (int k = 0; k < N; k++) begin
        if (zsv[k]) skew_dig[cycle - longint'(k) - 4][k] = dval(zs[k]);
      end
    end
  end

  task automatic issue(input sd_t xv [N], input sd_t yv [N], input int ex);
    x = xv; y = yv; in_valid = 1'b1;
    q_x.push_back(sdvec(xv)); q_y.push_back(sdvec(yv)); q_t.push_back(cycle);
    q_ex.push_back(ex);
    @(posedge clk);
    #1;
    in_valid = 1'b0;
  endtask

  initial begin
    sd_t xv [N];
    sd_t yv [N];
    for (int i = 0; i < N; i++) begin x[i] = '0; y[i] = '0; end
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    @(posedge clk);
    #1;
    for (int i = 0; i < N; i++) begin xv[i] = mkd(ex_x[i]); yv[i] = mkd(ex_y[i]); end
    issue(xv, yv, 1);
    for (int op = 0; op < NOPS; op++) begin
      if ($urandom_range(7) == 0) begin
        n_bubbles++;
        @(posedge clk);
        #1;
      end
      for (int i = 0; i < N; i++) begin xv[i] = rnd_digit(); yv[i] = rnd_digit(); end
      // extreme operands now and then
      if (op % 97 == 5) for (int i = 0; i < N; i++) begin xv[i] = mkd(1); yv[i] = mkd(1); end
      if (op % 97 == 6) for (int i = 0; i < N; i++) begin xv[i] = mkd(-1); yv[i] = mkd(1); end
      if (op % 97 == 7) for (int i = 0; i < N; i++) begin xv[i] = mkd(-1); yv[i] = mkd(-1); end
      issue(xv, yv, 0);
    end
    repeat (N + 8) @(posedge clk);
    checks++;
    if (n_out != NOPS + 1 || q_x.size() != 0) begin
      failures++;
      $display("FAIL: %0d results for %0d operations", n_out, NOPS + 1);
    end
    checks++;
    if (n_b2b < NOPS / 2) begin
      failures++;
      $display("FAIL: only %0d back-to-back results", n_b2b);
    end
    $display("results=%0d back_to_back=%0d bubbles=%0d digits(-1,0,1)=%0d,%0d,%0d",
             n_out, n_b2b, n_bubbles, dig_cnt[0], dig_cnt[1], dig_cnt[2]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (NOPS * 2 + 200) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
