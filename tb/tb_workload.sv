// tb_workload: the evaluation workload of the method, streamed through the unit at its default
// parameters: 100 profiles of 15000 samples, each holding 5 faults, in one run.
//
// Each fault is written into the raw estimate as a cluster: its value at the fault position and
// value * shape(d) at distance d, using the same shape as the coefficient table (so a correct
// unit removes the clusters up to rounding). Fault values are 100..5000 LSB with random sign,
// standing in for steps of 0.1 to 5 dB; positions are random with at least 3 samples between
// faults, so clusters sometimes overlap; in every profile the first two faults form a close pair
// (a large fault of 3000..5000 and a small one of 100..600, 2 to 6 samples away), the case in
// which the small fault is usually hidden in the raw estimate. All other samples are zero, as after the LBI's shrink
// step. For every profile the test checks each corrected sample and flag against an
// independent model, checks the cycle count (N + S + covering clusters + 2), and counts a fault
// as found when the final detection flags its exact position; every fault must be found.
module tb_workload;
  localparam int S        = 65;
  localparam int DEPTH    = 20;
  localparam int C        = (S - 1) / 2;
  localparam int W        = 16;
  localparam int FRAC     = 15;
  localparam int DECAY    = 19005;
  localparam int N        = 15000;
  localparam int PROFILES = 100;
  localparam int EVENTS   = 5;

  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid = 1'b0, in_ready, in_last = 1'b0;
  logic signed [W-1:0] in_data = '0;
  logic out_valid, out_ready = 1'b1, out_peak, out_last;
  logic signed [W-1:0] out_data;
  logic raw_peak, list_drop, stall;

  always #5 clk = ~clk;

  approx_deconv dut (.*);

  int checks = 0, failures = 0;
  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  int found = 0, events_total = 0, false_peaks = 0, raw_missed = 0;

  initial begin
    repeat (PROFILES * (N + 3000) + 1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int coef[S];
  function automatic void build_coef();
    for (int k = 0; k < S; k++) begin
      int d = (k > C) ? k - C : C - k;
      longint c = 1 << FRAC;
      for (int i = 0; i < d; i++) c = (c * DECAY) / 32768;
      coef[k] = (d == 0) ? 0 : int'(c);
    end
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

  initial begin
    int x[], y[], ev[$];
    bit pk[], fl[];
    build_coef();
    repeat (4) @(posedge clk);
    rst_n = 1'b1;
    for (int f = 0; f < PROFILES; f++) begin
      longint exp_cycles, t_start, t_end;
      int got;
      // build the profile
      x = new[N];
      foreach (x[i]) x[i] = 0;
      ev.delete();
      // one close pair: a large fault and a small one 2..6 samples away
      ev.push_back($urandom_range(40, N - 50));
      ev.push_back(ev[0] + $urandom_range(2, 6));
      while (ev.size() < EVENTS) begin
        automatic int pos = $urandom_range(40, N - 41);
        automatic bit ok = 1;
        foreach (ev[e]) if (iabs(ev[e] - pos) < 3) ok = 0;
        if (ok) ev.push_back(pos);
      end
      foreach (ev[e]) begin
        automatic int mag = (e == 0) ? $urandom_range(3000, 5000) :
                            (e == 1) ? $urandom_range(100, 600) : $urandom_range(100, 5000);
        automatic int amp = ($urandom_range(0, 1) != 0) ? mag : -mag;
        for (int k = 0; k < S; k++)
          x[ev[e] + k - C] += (k == C) ? amp : floor_div(longint'(amp) * coef[k], 1 << FRAC);
      end
      foreach (ev[e]) begin
        automatic int p = ev[e];
        if (!is_peak(x[p-1], x[p], x[p+1])) raw_missed++;
      end
      exp_cycles = model(x, y, pk);
      fl = new[N];
      got = 0;
      t_start = -1; t_end = -1;
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
          in_last  = 1'b0;
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
                  $display("profile %0d sample %0d: got %0d/%0b want %0d/%0b", f, got,
                           out_data, out_peak, y[got], pk[got]);
              end
              fl[got] = out_peak;
              if (got == N - 1) t_end = cycle;
              got++;
            end
          end
        end
      join
      checks++;
      if (t_end - t_start != exp_cycles) begin
        failures++;
        $display("profile %0d: %0d cycles, expected %0d", f, t_end - t_start, exp_cycles);
      end
      foreach (ev[e]) begin
        events_total++;
        checks++;
        if (fl[ev[e]]) found++;
        else begin
          failures++;
          $display("profile %0d: fault at %0d not flagged", f, ev[e]);
        end
      end
      foreach (fl[i]) if (fl[i]) false_peaks++;
    end
    false_peaks -= found;
    // the close pairs must have produced faults that only the final detection reveals
    checks++;
    if (raw_missed == 0) failures++;
    $display("faults %0d, hidden in the raw estimate %0d, flagged after correction %0d, other flags %0d",
             events_total, raw_missed, found, false_peaks);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
