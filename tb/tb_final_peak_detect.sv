// tb_final_peak_detect: streams random profiles (random input gaps and output back-pressure)
// through the final detector and checks every output sample, its peak flag (magnitude above
// both neighbours, zero outside the profile) and the last flag against a model.
module tb_final_peak_detect;
  logic clk = 0, rst_n = 0, in_valid = 0, in_ready, in_last = 0, out_valid, out_ready = 1;
  logic out_peak, out_last;
  logic signed [15:0] in_data = '0, out_data;
  int checks = 0, failures = 0, n_peaks = 0;

  always #5 clk = ~clk;
  final_peak_detect dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int iabs(int v); return v < 0 ? -v : v; endfunction

  always @(negedge clk) out_ready <= ($urandom_range(0, 3) != 0);

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < 30; f++) begin
      automatic int n = $urandom_range(1, 60);
      automatic int x[] = new[n];
      automatic int got = 0;
      foreach (x[i]) x[i] = int'($urandom_range(0, 20)) - 10;
      fork begin
        for (int i = 0; i < n; i++) begin
          @(negedge clk);
          if ($urandom_range(0, 3) == 0) begin in_valid = 0; @(negedge clk); end
          in_valid = 1; in_data = 16'(x[i]); in_last = (i == n - 1);
          #1;
          while (!in_ready) begin @(negedge clk); #1; end
          @(posedge clk);
        end
        @(negedge clk);
        in_valid = 0;
      end join_none
      begin
        while (got < n) begin
          @(negedge clk);
          #1;
          if (out_valid && out_ready) begin
            automatic int l = (got > 0) ? x[got-1] : 0;
            automatic int r = (got < n - 1) ? x[got+1] : 0;
            automatic bit pk = iabs(x[got]) > iabs(l) && iabs(x[got]) > iabs(r);
            checks++;
            if (int'(out_data) != x[got] || out_peak != pk || out_last != (got == n - 1)) begin
              failures++;
              if (failures < 10)
                $display("frame %0d sample %0d: got %0d/%0b/%0b want %0d/%0b", f, got,
                         out_data, out_peak, out_last, x[got], pk);
            end
            if (pk) n_peaks++;
            got++;
          end
        end
      end
      wait fork;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
