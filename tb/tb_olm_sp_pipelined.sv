// tb_olm_sp_pipelined: self-checking test of the pipelined serial-parallel online
// multiplier at its default size (N = 16).
//
// Streams of random signed-digit x operands (back to back, with random bubbles) are
// multiplied by a parallel coefficient Y that changes between streams (the pipeline is
// drained before Y changes). Checked: |x*Y - z| < 2^-N against the exact integer
// product, latency of N+2 clock edges, one result per clock in steady state, MSDF stream
// equal to the aligned result, and extreme operands (x = +-0.11..1, Y = -1, Y = 1-2^-N).
module tb_olm_sp_pipelined;
  import olm_pkg::*;

  localparam int N = 16;
  localparam int NSTREAMS = 12;
  localparam int STREAM_LEN = 200;

  logic       clk = 1'b0;
  logic       rst_n = 1'b0;
  logic       in_valid = 1'b0;
  sd_t        x [N];
  logic [N:0] yw = '0;
  logic       out_valid;
  sd_t        z [N];
  sd_t        zs [N];
  logic       zsv [N];

  olm_sp_pipelined #(.N(N)) dut (
    .clk(clk), .rst_n(rst_n), .in_valid_i(in_valid), .x_i(x), .y_i(yw),
    .out_valid_o(out_valid), .z_o(z), .z_skew_o(zs), .z_skew_valid_o(zsv)
  );

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  longint q_x[$], q_y[$], q_t[$];
  int     n_out = 0, n_b2b = 0, n_bubbles = 0, n_issued = 0;
  longint last_out = -10;
  int     skew_dig [longint][N];

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

  always @(posedge clk) begin
    if (rst_n) begin
      for (int k = 0; k < N; k++) begin
        if (zsv[k]) skew_dig[cycle - longint'(k) - 3][k] = dval(zs[k]);
      end
    end
  end

  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      longint xe, ye, ze, diff, lat;
      ze = sdvec(z);
      if (q_x.size() == 0) begin
        failures++;
        $display("FAIL: result without operation");
      end else begin
        xe = q_x.pop_front(); ye = q_y.pop_front(); lat = cycle - q_t.pop_front();
        diff = xe * ye - (ze <<< N);
        checks++;
        if (diff >= (longint'(1) <<< N) || -diff >= (longint'(1) <<< N)) begin
          failures++;
          $display("FAIL: x*Y=%0d z=%0d diff=%0d", xe * ye, ze, diff);
        end
        checks++;
        if (lat != longint'(N + 2)) begin
          failures++;
          $display("FAIL: latency %0d, expected %0d", lat, N + 2);
        end
        for (int k = 0; k < N; k++) begin
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

  task automatic issue(input sd_t xv [N]);
    x = xv; in_valid = 1'b1;
    q_x.push_back(sdvec(xv)); q_y.push_back(longint'($signed(yw))); q_t.push_back(cycle);
    n_issued++;
    @(posedge clk);
    #1;
    in_valid = 1'b0;
  endtask

  initial begin
    sd_t xv [N];
    for (int i = 0; i < N; i++) x[i] = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int st = 0; st < NSTREAMS; st++) begin
      case (st)
        0: yw = {1'b1, {N{1'b0}}};          // Y = -1
        1: yw = {1'b0, {N{1'b1}}};          // Y = 1 - 2^-N
        default: yw = (N + 1)'($urandom());
      endcase
      @(posedge clk);
      #1;
      for (int op = 0; op < STREAM_LEN; op++) begin
        if ($urandom_range(7) == 0) begin
          n_bubbles++;
          @(posedge clk);
          #1;
        end
        for (int i = 0; i < N; i++) xv[i] = rnd_digit();
        if (op == 3) for (int i = 0; i < N; i++) xv[i] = sd_t'(2'b10);
        if (op == 4) for (int i = 0; i < N; i++) xv[i] = sd_t'(2'b01);
        issue(xv);
      end
      repeat (N + 4) @(posedge clk);   // drain before Y changes
      #1;
    end
    checks++;
    if (n_out != n_issued || q_x.size() != 0) begin
      failures++;
      $display("FAIL: %0d results for %0d operations", n_out, n_issued);
    end
    checks++;
    if (n_b2b < n_issued / 2) begin
      failures++;
      $display("FAIL: only %0d back-to-back results", n_b2b);
    end
    $display("results=%0d back_to_back=%0d bubbles=%0d", n_out, n_b2b, n_bubbles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (NSTREAMS * (2 * STREAM_LEN + N + 10) + 100) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
