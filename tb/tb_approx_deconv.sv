// tb_approx_deconv: end-to-end test of the approximate-deconvolution unit at its default
// parameters (S = 65 coefficients, 20 list entries, 16-bit samples).
//
// A reference model written here, independently of the RTL, computes for each profile the raw
// peaks, which of them find room in the lists, the corrected samples, the final peak flags and
// the number of cycles the unit must take (N + S + sum of covering clusters over all samples,
// plus 2 cycles of output pipeline). Profiles:
//   1. two close faults, the smaller one hidden in the cluster of the larger (revealed only by
//      the final detection), plus overlapping clusters;
//   2. a dense alternating profile that overflows the lists;
//   3. values near full scale, so that the correction saturates;
//   4. random profiles with input gaps and output back-pressure;
//   5. a full 15000-sample profile with 20 separated faults (the paper's worst case), timed.
// Every mechanism (stall, overlap, overflow, saturation, hidden peak, back-pressure, several
// profiles in a row) is counted; one that never happens counts as a failure.
module tb_approx_deconv;
  localparam int S     = 65;
  localparam int DEPTH = 20;
  localparam int C     = (S - 1) / 2;
  localparam int W     = 16;
  localparam int FRAC  = 15;
  localparam int DECAY = 19005;

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

  // mechanism counters
  int n_stall_cycles = 0, n_drops = 0, n_raw_peaks = 0, n_overlap = 0, n_sat = 0;
  int n_hidden = 0, n_bp = 0, n_frames = 0, n_gaps = 0;
  always @(posedge clk) if (rst_n) begin
    if (stall) n_stall_cycles++;
    if (list_drop) n_drops++;
    if (raw_peak) n_raw_peaks++;
    if (out_valid && !out_ready) n_bp++;
  end

  // watchdog
  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- reference model ----------------
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

  function automatic int floor_div(longint a, longint b);  // b > 0
    longint q = a / b;
    if ((a % b != 0) && (a < 0)) q--;
    return int'(q);
  endfunction

  // Expected outputs for profile x; returns expected cycle count.
  function automatic longint model(input int x[], output int y[], output bit pk[]);
    int n = x.size();
    bit acc_ok[];
    int acc_list[$];
    longint sum_l = 0;
    y = new[n]; pk = new[n]; acc_ok = new[n];
    for (int j = 0; j < n; j++) begin
      int l = (j > 0) ? x[j-1] : 0;
      int r = (j < n-1) ? x[j+1] : 0;
      acc_ok[j] = 0;
      if (is_peak(l, x[j], r)) begin
        int occ = 0;
        foreach (acc_list[q]) if (acc_list[q] >= j - S + 1) occ++;
        if (occ < DEPTH) begin acc_ok[j] = 1; acc_list.push_back(j); end
      end
    end
    for (int i = 0; i < n; i++) begin
      longint acc = x[i];
      int covering = 0;
      foreach (acc_list[q]) begin
        int p = acc_list[q];
        if (i - p <= C && p - i <= C) begin
          covering++;
          acc -= floor_div(longint'(x[p]) * coef[i-p+C], 1 << FRAC);
        end
      end
      sum_l += covering;
      if (covering >= 2) n_overlap++;
      if (acc > 32767 || acc < -32768) n_sat++;
      y[i] = (acc > 32767) ? 32767 : (acc < -32768) ? -32768 : int'(acc);
    end
    for (int i = 0; i < n; i++) begin
      int l = (i > 0) ? y[i-1] : 0;
      int r = (i < n-1) ? y[i+1] : 0;
      int lr = (i > 0) ? x[i-1] : 0;
      int rr = (i < n-1) ? x[i+1] : 0;
      pk[i] = is_peak(l, y[i], r);
      if (pk[i] && !is_peak(lr, x[i], rr)) n_hidden++;
    end
    return longint'(n) + S + sum_l + 2;
  endfunction

  // ---------------- driver / monitor ----------------
  bit gaps_on = 0, bp_on = 0;

  always @(negedge clk) out_ready <= bp_on ? ($urandom_range(0, 3) != 0) : 1'b1;

  task automatic run_frame(input int x[], input bit check_time);
    int y[]; bit pk[];
    longint exp_cycles, t_start = -1, t_end = -1;
    int got = 0;
    exp_cycles = model(x, y, pk);
    fork
      begin : drive
        for (int i = 0; i < x.size(); i++) begin
          @(negedge clk);
          if (gaps_on && $urandom_range(0, 4) == 0) begin
            in_valid = 1'b0; n_gaps++;
            @(negedge clk);
          end
          in_valid = 1'b1;
          in_data  = W'(x[i]);
          in_last  = (i == x.size() - 1);
          #1;
          while (!in_ready) begin @(negedge clk); #1; end
          if (i == 0) t_start = cycle;
          @(posedge clk);
        end
        @(negedge clk);
        in_valid = 1'b0;
        in_last  = 1'b0;
      end
      begin : monitor
        while (got < x.size()) begin
          @(negedge clk);
          #1;
          if (out_valid && out_ready) begin
            checks++;
            if (int'(out_data) != y[got] || out_peak != pk[got] ||
                out_last != (got == x.size() - 1)) begin
              failures++;
              if (failures < 20)
                $display("mismatch frame %0d sample %0d: got %0d peak %0b last %0b, want %0d peak %0b",
                         n_frames, got, out_data, out_peak, out_last, y[got], pk[got]);
            end
            if (got == x.size() - 1) t_end = cycle;
            got++;
          end
        end
      end
    join
    if (check_time) begin
      checks++;
      if (t_end - t_start != exp_cycles) begin
        failures++;
        $display("frame %0d took %0d cycles, expected %0d", n_frames, t_end - t_start, exp_cycles);
      end else
        $display("frame %0d: %0d samples in %0d cycles as expected", n_frames, x.size(), t_end - t_start);
    end
    n_frames++;
  endtask

  // cluster-shaped event added to a profile (same decay as the ROM)
  function automatic void add_event(ref int x[], input int pos, input int amp);
    for (int k = 0; k < S; k++) begin
      int i = pos + k - C;
      if (i >= 0 && i < x.size())
        x[i] += (k == C) ? amp : floor_div(longint'(amp) * coef[k], 1 << FRAC);
    end
  endfunction

  initial begin
    int x[];
    build_coef();
    repeat (4) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);

    // 1. hidden peak and overlapping clusters
    x = new[300];
    foreach (x[i]) x[i] = 0;
    add_event(x, 100, -8000);
    add_event(x, 103, -600);
    add_event(x, 200, 3000);
    add_event(x, 215, -2500);
    run_frame(x, 1);

    // 2. dense alternating profile: more peaks than list entries
    x = new[200];
    foreach (x[i]) x[i] = (i % 2 == 0) ? 1000 + i : 10;
    run_frame(x, 1);

    // 3. near full scale: corrections saturate
    x = new[120];
    foreach (x[i]) x[i] = 32000;
    x[60] = -32768;
    x[30] = 32767; x[31] = 32000;
    run_frame(x, 1);

    // 4. random profiles with input gaps and output back-pressure
    gaps_on = 1; bp_on = 1;
    for (int f = 0; f < 3; f++) begin
      x = new[400 + f * 100];
      foreach (x[i]) x[i] = int'($urandom_range(0, 40)) - 20;
      for (int e = 0; e < 6; e++)
        add_event(x, int'($urandom_range(10, x.size() - 10)),
                  int'($urandom_range(0, 12000)) - 6000);
      run_frame(x, 0);
    end
    gaps_on = 0; bp_on = 0;
    repeat (3) @(posedge clk);

    // 5. full-length profile, N = 15000, 20 separated faults (paper's worst-case count)
    x = new[15000];
    foreach (x[i]) x[i] = 0;
    for (int e = 0; e < 20; e++) add_event(x, 300 + e * 700, (e % 2 == 0) ? -(500 + 200 * e) : 400 + 150 * e);
    run_frame(x, 1);

    // every mechanism must have happened
    begin
      string names[9] = '{"stall", "overlap", "overflow", "raw peak", "saturation",
                          "hidden peak revealed", "back-pressure", "input gap", "multi-profile"};
      int counts[9];
      counts = '{n_stall_cycles, n_overlap, n_drops, n_raw_peaks, n_sat, n_hidden, n_bp, n_gaps,
                 n_frames - 1};
      for (int m = 0; m < 9; m++) begin
        checks++;
        $display("mechanism %-22s happened %0d times", names[m], counts[m]);
        if (counts[m] == 0) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
