// tb_lbi_profile: the unit fed with the output of an actual LBI run.
//
// A synthetic noise-free fiber profile of N samples (a linear loss slope plus 5 step faults of
// 0.1 to 5 dB, two of them 5 samples apart) is solved in the testbench by a behavioural model
// of the Linearized Bregman sparse Kaczmarz iteration: alpha sweeps over the rows of the
// step/slope dictionary, lambda = 0.5, real arithmetic. The LBI core itself is outside this
// design; the model only produces a realistic raw estimate with clusters. The step part of the
// estimate (the slope coefficient is not streamed) is scaled to 16-bit samples (1 dB = 4096)
// and streamed through approx_deconv, whose coefficient table is the cluster this LBI model
// produces for a single fault (measured the same way at the start of the test and compared with
// the table); all other parameters are the defaults. Every output sample, flag and the cycle
// count are checked against an independent model of the unit. The peaks of the raw and of the
// corrected estimate at the true fault positions, and elsewhere, are reported, not checked:
// how well a single static cluster shape fits depends on the LBI and on the fault sizes.
//
// N is 1000 rather than a full 15000-sample profile because the row sweeps cost O(N^2) per
// iteration in simulation; the unit itself does not depend on N.
module tb_lbi_profile;
  localparam int S        = 65;
  localparam int DEPTH    = 20;
  localparam int C        = (S - 1) / 2;
  localparam int W        = 16;
  localparam int FRAC     = 15;
  localparam int N        = 1000;
  localparam int ALPHA    = 200;
  localparam real LAMBDA  = 0.5;
  localparam real SCALE   = 4096.0;

  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid = 1'b0, in_ready, in_last = 1'b0;
  logic signed [W-1:0] in_data = '0;
  logic out_valid, out_ready = 1'b1, out_peak, out_last;
  logic signed [W-1:0] out_data;
  logic raw_peak, list_drop, stall;

  always #5 clk = ~clk;

  // Compensation vector measured from this testbench's LBI model: the estimate of a single
  // 2 dB fault at sample 500 (same profile, slope and iteration count), divided by its value at
  // the fault, in Q1.15, centre zero, negative values clipped to zero. Listed as (offset, value)
  // for the non-zero offsets; checked against a fresh measurement when the test starts.
  localparam int NZ = 27;
  localparam int SHAPE_OFS[NZ] = '{-4, -3, -2, -1, 1, 2, 3, 4, 5, 6, 7, 8, 9, 10, 11, 12, 13, 14,
                                    15, 16, 17, 18, 19, 20, 21, 22, 23};
  localparam int SHAPE_VAL[NZ] = '{2134, 5840, 11554, 20137, 16652, 8420, 4558, 2801, 1897, 1364,
                                    1026, 801, 645, 535, 454, 395, 349, 311, 279, 249, 221, 192,
                                    163, 132, 100, 66, 31};
  function automatic logic [S*16-1:0] shape_table();
    logic [S*16-1:0] t = '0;
    for (int i = 0; i < NZ; i++) t[(SHAPE_OFS[i] + C)*16 +: 16] = 16'(SHAPE_VAL[i]);
    return t;
  endfunction
  localparam logic [S*16-1:0] TABLE = shape_table();

  approx_deconv #(.USE_TABLE(1'b1), .TABLE(TABLE)) dut (.*);

  int checks = 0, failures = 0;
  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    repeat (20 * N + 10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int coef[S];
  function automatic void build_coef();
    for (int k = 0; k < S; k++) coef[k] = 0;
    for (int i = 0; i < NZ; i++) coef[SHAPE_OFS[i] + C] = SHAPE_VAL[i];
  endfunction

  function automatic int iabs(int v); return v < 0 ? -v : v; endfunction
  function automatic bit is_peak(int l, int c, int r);
    return iabs(c) > iabs(l) && iabs(c) > iabs(r);
  endfunction
  function automatic int floor_div(longint a, longint b);
    longint q = a / b;
    if ((a % b != 0) && (a < 0)) q--;
    return int'(q);
  endfunction

  // Reference model: expected corrected samples, final flags and cycle count.
  function automatic longint model(input int x[], output int y[], output bit pk[]);
    int n = x.size();
    int acc_list[$];
    longint sum_l = 0;
    y = new[n]; pk = new[n];
    for (int j = 0; j < n; j++) begin
      int l = (j > 0) ? x[j-1] : 0;
      int r = (j < n-1) ? x[j+1] : 0;
      if (x[j] != 0 && is_peak(l, x[j], r)) begin
        int occ = 0;
        foreach (acc_list[q]) if (acc_list[q] >= j - S + 1) occ++;
        if (occ < DEPTH) acc_list.push_back(j);
      end
    end
    for (int i = 0; i < n; i++) begin
      longint acc = x[i];
      foreach (acc_list[q]) begin
        int p = acc_list[q];
        if (i - p <= C && p - i <= C) begin
          sum_l++;
          acc -= floor_div(longint'(x[p]) * coef[i-p+C], 1 << FRAC);
        end
      end
      y[i] = (acc > 32767) ? 32767 : (acc < -32768) ? -32768 : int'(acc);
    end
    for (int i = 0; i < n; i++)
      pk[i] = is_peak((i > 0) ? y[i-1] : 0, y[i], (i < n-1) ? y[i+1] : 0);
    return longint'(n) + S + sum_l + 2;
  endfunction


  // ---------------- behavioural LBI (sparse Kaczmarz) ----------------
  // beta[0] is the slope coefficient, beta[j] (j = 1..N) the step at sample j. Row k of the
  // dictionary is (k/N, 1 x k, 0 ...): the slope column is scaled by 1/N so that it does not
  // dominate the row norms (with the unscaled column k the steps hardly move in 200 sweeps);
  // the squared row norm is (k/N)^2 + k.
  real yv[N+1], v[N+1], beta[N+1];

  function automatic real shrink(real x, real l);
    if (x > l)  return x - l;
    if (x < -l) return x + l;
    return 0.0;
  endfunction

  task automatic run_lbi();
    for (int j = 0; j <= N; j++) begin v[j] = 0.0; beta[j] = 0.0; end
    for (int it = 0; it < ALPHA; it++) begin
      for (int k = 1; k <= N; k++) begin
        real dot, c, a0;
        a0 = real'(k) / real'(N);
        dot = a0 * beta[0];
        for (int j = 1; j <= k; j++) dot += beta[j];
        c = (yv[k] - dot) / (a0 * a0 + real'(k));
        v[0] += a0 * c;
        beta[0] = shrink(v[0], LAMBDA);
        for (int j = 1; j <= k; j++) begin
          v[j] += c;
          beta[j] = shrink(v[j], LAMBDA);
        end
      end
    end
  endtask

  initial begin
    int x[], y[];
    bit pk[];
    int fpos[5] = '{150, 155, 400, 620, 850};
    real famp[5] = '{-4.0, -0.8, -0.3, -2.5, -1.2};
    int raw_hits = 0, fin_hits = 0, raw_other = 0, fin_other = 0, got = 0;
    longint exp_cycles, t_start = -1, t_end = -1;

    build_coef();
    // measure the single-fault cluster and compare it with the built-in table
    for (int k = 1; k <= N; k++) yv[k] = -0.002 * k + ((k >= 500) ? -2.0 : 0.0);
    run_lbi();
    for (int d = -C; d <= C; d++) begin
      automatic real sh = beta[500 + d] / beta[500];
      automatic int q = (d == 0 || sh <= 0.0) ? 0 : int'($rtoi(sh * 32768.0));
      checks++;
      if (q - coef[d + C] > 2 || coef[d + C] - q > 2) begin
        failures++;
        $display("measured coefficient at %0d: %0d, table %0d", d, q, coef[d + C]);
      end
    end
    // profile: 0.002 dB loss per sample plus the steps (losses are negative)
    for (int k = 1; k <= N; k++) begin
      yv[k] = -0.002 * k;
      for (int e = 0; e < 5; e++) if (k >= fpos[e]) yv[k] += famp[e];
    end
    run_lbi();
    $display("LBI done: slope term %f, beta at faults %f %f %f %f %f", beta[0],
             beta[fpos[0]], beta[fpos[1]], beta[fpos[2]], beta[fpos[3]], beta[fpos[4]]);
    for (int j = fpos[0] - 6; j <= fpos[1] + 6; j++) $write("%0.3f ", beta[j]);
    $display("");

    // raw estimate (steps only) as 16-bit samples; sample i holds beta[i+1]
    x = new[N];
    foreach (x[i]) begin
      automatic real r = beta[i+1] * SCALE;
      x[i] = (r > 32767.0) ? 32767 : (r < -32768.0) ? -32768 : int'($rtoi(r >= 0.0 ? r + 0.5 : r - 0.5));
    end
    exp_cycles = model(x, y, pk);

    repeat (4) @(posedge clk);
    rst_n = 1'b1;
    fork
      begin
        for (int i = 0; i < N; i++) begin
          @(negedge clk);
          in_valid = 1'b1;
          in_data  = W'(x[i]);
          in_last  = (i == N - 1);
          #1;
          while (!in_ready) begin @(negedge clk); #1; end
          if (i == 0) t_start = cycle;
          @(posedge clk);
        end
        @(negedge clk);
        in_valid = 1'b0;
      end
      begin
        while (got < N) begin
          @(negedge clk);
          #1;
          if (out_valid && out_ready) begin
            checks++;
            if (int'(out_data) != y[got] || out_peak != pk[got] || out_last != (got == N - 1)) begin
              failures++;
              if (failures < 10)
                $display("sample %0d: got %0d/%0b want %0d/%0b", got, out_data, out_peak, y[got], pk[got]);
            end
            got++;
          end
        end
        t_end = cycle;
      end
    join
    checks++;
    if (t_end - t_start != exp_cycles) begin
      failures++;
      $display("%0d cycles, expected %0d", t_end - t_start, exp_cycles);
    end

    for (int i = 0; i < N; i++) begin
      automatic bit is_fault = 0;
      automatic bit rp = is_peak((i > 0) ? x[i-1] : 0, x[i], (i < N-1) ? x[i+1] : 0);
      foreach (fpos[e]) if (fpos[e] == i + 1) is_fault = 1;
      if (is_fault) begin raw_hits += rp; fin_hits += pk[i]; end
      else begin raw_other += rp; fin_other += pk[i]; end
    end
    foreach (fpos[e]) begin
      $write("fault %0d (%0.1f dB) raw/corrected:", fpos[e], famp[e]);
      for (int i = fpos[e] - 4; i <= fpos[e] + 2; i++) $write(" %0d/%0d%s", x[i], y[i], pk[i] ? "*" : "");
      $display("");
    end
    $display("raw estimate:       %0d of 5 faults are peaks, %0d other peaks", raw_hits, raw_other);
    $display("after compensation: %0d of 5 faults are peaks, %0d other peaks", fin_hits, fin_other);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
