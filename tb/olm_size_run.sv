// olm_size_run: test driver for one pipelined online multiplier of a given size, used by
// tb_olm_workloads to run the operand sizes n = 8, 16, 24, 32.
//
// SP = 0 instantiates the serial-serial multiplier (N digits, working precision P,
// online delay 3), SP = 1 the serial-parallel one (online delay 2). After reset it
// issues a stream of K = 8 back-to-back products and checks that the last of them is
// complete (n + delta + 1) + (K - 1) cycles after the first operands, counting the
// input cycle as cycle 1. It then issues NOPS random products with random bubbles
// (for SP, the coefficient Y is changed every 64 operations after the pipeline has
// drained), plus extreme operands. Every result is checked against the exact product,
// |x*y - z| < 2^-N (128-bit integer arithmetic), and for its latency of n + delta clock
// edges. Results are reported through checks/failures; done rises at the end.
module olm_size_run
  import olm_pkg::*;
#(
  parameter int N    = 8,
  parameter int P    = 7,
  parameter bit SP   = 1'b0,
  parameter int NOPS = 300
) (
  input  logic clk,
  input  logic rst_n,
  output logic done,
  output int   checks,
  output int   failures
);
  localparam int DLY = SP ? 2 : 3;   // online delay
  localparam int K   = 8;            // stream length of the cycle-count check

  typedef logic signed [127:0] wide_t;

  logic       in_valid = 1'b0;
  sd_t        x [N];
  sd_t        y [N];
  logic [N:0] yp;
  logic       out_valid;
  sd_t        z [N];
  sd_t        zs [N];
  logic       zsv [N];

  if (SP) begin : g_sp
    olm_sp_pipelined #(.N(N)) dut (
      .clk(clk), .rst_n(rst_n), .in_valid_i(in_valid), .x_i(x), .y_i(yp),
      .out_valid_o(out_valid), .z_o(z), .z_skew_o(zs), .z_skew_valid_o(zsv)
    );
  end else begin : g_ss
    olm_ss_pipelined #(.N(N), .P(P)) dut (
      .clk(clk), .rst_n(rst_n), .in_valid_i(in_valid), .x_i(x), .y_i(y),
      .out_valid_o(out_valid), .z_o(z), .z_skew_o(zs), .z_skew_valid_o(zsv)
    );
  end

  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  wide_t  q_x[$], q_y[$];
  longint q_t[$];
  int     n_out = 0;
  longint first_issue = -1, kth_out = -1;

  function automatic int dval(sd_t d);
    return int'(d.p) - int'(d.m);
  endfunction

  function automatic wide_t sdvec(sd_t v [N]);   // value * 2^N
    wide_t s = 0;
    for (int i = 0; i < N; i++) s = s * 2 + wide_t'(dval(v[i]));
    return s;
  endfunction

  function automatic sd_t rnd_digit();
    case ($urandom_range(2))
      0: return sd_t'(2'b10);
      1: return sd_t'(2'b01);
      default: return sd_t'(2'b00);
    endcase
  endfunction

  function automatic logic [N:0] rnd_y();
    logic [63:0] r;
    r = {$urandom(), $urandom()};
    return r[N:0];
  endfunction

  initial begin
    checks = 0;
    failures = 0;
    done = 1'b0;
  end

  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      wide_t xe, ye, ze, diff, lim;
      longint lat;
      ze = sdvec(z);
      if (q_x.size() == 0) begin
        failures++;
        $display("FAIL N=%0d SP=%0d: result without operation", N, SP);
      end else begin
        xe = q_x.pop_front();
        ye = q_y.pop_front();
        lat = cycle - q_t.pop_front();
        diff = xe * ye - (ze <<< N);
        lim = wide_t'(1) <<< N;
        checks += 2;
        if (diff >= lim || -diff >= lim) begin
          failures++;
          $display("FAIL N=%0d SP=%0d: error %0d / 2^%0d", N, SP, diff, 2 * N);
        end
        if (lat != longint'(N) + longint'(DLY)) begin
          failures++;
          $display("FAIL N=%0d SP=%0d: latency %0d, expected %0d", N, SP, lat, N + DLY);
        end
        n_out++;
        if (n_out == K) kth_out = cycle;
      end
    end
  end

  task automatic issue(input sd_t xv [N], input sd_t yv [N]);
    x = xv;
    y = yv;
    in_valid = 1'b1;
    if (first_issue < 0) first_issue = cycle;
    q_x.push_back(sdvec(xv));
    q_y.push_back(SP ? wide_t'($signed(yp)) : sdvec(yv));
    q_t.push_back(cycle);
    @(posedge clk);
    #1;
    in_valid = 1'b0;
  endtask

  initial begin
    sd_t xv [N];
    sd_t yv [N];
    int  nops;
    for (int i = 0; i < N; i++) begin x[i] = '0; y[i] = '0; end
    yp = rnd_y();
    @(posedge rst_n);
    @(posedge clk);
    #1;
    // K back-to-back products
    for (int op = 0; op < K; op++) begin
      for (int i = 0; i < N; i++) begin xv[i] = rnd_digit(); yv[i] = rnd_digit(); end
      issue(xv, yv);
    end
    repeat (N + DLY + 2) @(posedge clk);
    #1;
    // counting the first input cycle as 1, the K-th result is complete in cycle
    // kth_out - first_issue + 1
    checks++;
    if (kth_out - first_issue + 1 != longint'(N) + longint'(DLY) + longint'(K)) begin
      failures++;
      $display("FAIL N=%0d SP=%0d: %0d products took %0d cycles, expected %0d", N, SP, K,
               kth_out - first_issue + 1, (N + DLY + 1) + (K - 1));
    end
    // random stream
    nops = K;
    for (int op = 0; op < NOPS; op++) begin
      if (SP && op % 64 == 63) begin
        repeat (N + DLY + 2) @(posedge clk);
        #1;
        yp = (op % 128 == 63) ? {1'b1, {N{1'b0}}} : rnd_y();   // Y = -1 now and then
      end
      if ($urandom_range(7) == 0) begin
        @(posedge clk);
        #1;
      end
      for (int i = 0; i < N; i++) begin xv[i] = rnd_digit(); yv[i] = rnd_digit(); end
      if (op % 50 == 10) for (int i = 0; i < N; i++) begin xv[i] = sd_t'(2'b10); yv[i] = sd_t'(2'b10); end
      if (op % 50 == 11) for (int i = 0; i < N; i++) begin xv[i] = sd_t'(2'b01); yv[i] = sd_t'(2'b10); end
      if (op % 50 == 12) for (int i = 0; i < N; i++) begin xv[i] = sd_t'(2'b01); yv[i] = sd_t'(2'b01); end
      issue(xv, yv);
      nops++;
    end
    repeat (N + DLY + 4) @(posedge clk);
    #1;
    checks++;
    if (n_out != nops || q_x.size() != 0) begin
      failures++;
      $display("FAIL N=%0d SP=%0d: %0d results for %0d operations", N, SP, n_out, nops);
    end
    $display("%s N=%0d P=%0d: %0d products, K=%0d stream in %0d cycles, latency %0d",
             SP ? "serial-parallel" : "serial-serial  ", N, SP ? N : P, n_out, K,
             kth_out - first_issue + 1, N + DLY);
    done = 1'b1;
  end
endmodule
