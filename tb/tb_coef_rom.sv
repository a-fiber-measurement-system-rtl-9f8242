// tb_coef_rom: reads every address of the compensation ROM at its default size (S = 65) and
// compares it with coefficients computed here from the documented formula: zero at the centre
// (S-1)/2, otherwise 2^15 multiplied |k - centre| times by 19005/2^15 with truncation.
// Also checks symmetry, monotonic decay away from the centre and zero beyond the table.
module tb_coef_rom;
  localparam int S = 65;
  localparam int C = (S - 1) / 2;
  logic [7:0]  addr;
  logic [15:0] data;
  int checks = 0, failures = 0;
  int got[S];

  coef_rom dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int k = 0; k < S; k++) begin
      automatic int d = (k > C) ? k - C : C - k;
      automatic longint e = 32768;
      for (int i = 0; i < d; i++) e = (e * 19005) / 32768;
      if (d == 0) e = 0;
      addr = 8'(k);
      #1;
      got[k] = int'(data);
      checks++;
      if (int'(data) != int'(e)) begin
        failures++;
        $display("addr %0d: got %0d want %0d", k, data, e);
      end
    end
    checks++;
    if (got[C-1] != 19005) failures++;
    for (int k = 0; k < C; k++) begin
      checks++;
      if (got[k] != got[S-1-k]) failures++;
      if (k > 0 && got[k] < got[k-1]) failures++;
    end
    for (int a = S; a < 256; a++) begin
      addr = 8'(a);
      #1;
      checks++;
      if (data != 0) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
