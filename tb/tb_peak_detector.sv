// tb_peak_detector: exhaustive-corner and random test of the nearest-neighbour peak check.
// The expected flag is computed from integer magnitudes here: |centre| > |left| and
// |centre| > |right|, including the most negative sample value.
module tb_peak_detector;
  localparam int W = 16;
  logic signed [W-1:0] left, centre, right;
  logic peak;
  int checks = 0, failures = 0;

  peak_detector dut (.*);

  function automatic int iabs(int v); return v < 0 ? -v : v; endfunction

  task automatic check(int l, int c, int r);
    bit exp;
    left = W'(l); centre = W'(c); right = W'(r);
    #1;
    exp = iabs(c) > iabs(l) && iabs(c) > iabs(r);
    checks++;
    if (peak !== exp) begin
      failures++;
      $display("l=%0d c=%0d r=%0d: got %0b want %0b", l, c, r, peak, exp);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int vals[] = '{0, 1, -1, 2, -2, 100, -100, 32767, -32768, -32767};
    foreach (vals[a]) foreach (vals[b]) foreach (vals[c]) check(vals[a], vals[b], vals[c]);
    for (int i = 0; i < 5000; i++) begin
      automatic int l = int'($urandom_range(0, 400)) - 200;
      automatic int c = int'($urandom_range(0, 400)) - 200;
      automatic int r = int'($urandom_range(0, 400)) - 200;
      check(l, c, r);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
