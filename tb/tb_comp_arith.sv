// tb_comp_arith: loads random samples, applies 0 to 6 random subtract steps (some with the
// selector off) and checks the saturated result after each step against a wide integer
// model: acc - floor(mult * coef / 2^15), saturated to 16 bits only at the output.
module tb_comp_arith;
  logic clk = 0, rst_n = 0, load = 0, sub_en = 0, active = 0;
  logic signed [15:0] load_data = '0, mult = '0, result;
  logic [15:0] coef = '0;
  int checks = 0, failures = 0, n_sat = 0;
  longint acc;

  always #5 clk = ~clk;
  comp_arith dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint fdiv(longint a, longint b);
    longint q = a / b;
    if ((a % b != 0) && (a < 0)) q--;
    return q;
  endfunction

  function automatic int sat(longint v);
    return (v > 32767) ? 32767 : (v < -32768) ? -32768 : int'(v);
  endfunction

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      automatic int steps = $urandom_range(0, 6);
      @(negedge clk);
      load = 1; sub_en = 0;
      load_data = (t % 10 == 0) ? 16'sd32000 : 16'($urandom);
      acc = longint'(load_data);
      @(negedge clk);
      load = 0;
      for (int s = 0; s < steps; s++) begin
        longint exp_next;
        sub_en = 1;
        active = ($urandom_range(0, 4) != 0);
        mult   = (t % 10 == 0) ? -16'sd32768 : 16'($urandom);
        coef   = 16'($urandom_range(0, 32768));
        #1;
        exp_next = active ? acc - fdiv(longint'(mult) * longint'(coef), 32768) : acc;
        checks++;
        if (int'(result) != sat(exp_next)) begin
          failures++;
          if (failures < 10) $display("step: got %0d want %0d", result, sat(exp_next));
        end
        if (exp_next > 32767 || exp_next < -32768) n_sat++;
        acc = exp_next;
        @(negedge clk);
      end
      sub_en = 0;
      #1;
      checks++;
      if (int'(result) != sat(acc)) failures++;
    end
    checks++;
    if (n_sat == 0) failures++;
    $display("saturated %0d times", n_sat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
