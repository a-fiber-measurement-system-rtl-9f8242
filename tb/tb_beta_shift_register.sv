// tb_beta_shift_register: shifts a random stream (with random stall cycles and invalid
// padding) through the default 65-stage register and checks every tap against a software
// history of the accepted inputs: tail = input S shifts ago, centre = (S-1)/2+1 ago, left and
// right its neighbours, with valid/last flags following the data.
module tb_beta_shift_register;
  localparam int S = 65;
  localparam int C = (S - 1) / 2;
  localparam int W = 16;
  logic clk = 0, rst_n = 0, shift_en = 0, in_valid = 0, in_last = 0;
  logic signed [W-1:0] in_data = '0;
  logic signed [W-1:0] tap_left, tap_centre, tap_right, tail_data;
  logic centre_valid, tail_valid, tail_last;
  int checks = 0, failures = 0;
  int hd[$]; bit hv[$]; bit hl[$];

  always #5 clk = ~clk;
  beta_shift_register dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("%s: got %0d want %0d", what, got, exp);
    end
  endtask

  initial begin
    for (int i = 0; i < S + 2; i++) begin hd.push_front(0); hv.push_front(0); hl.push_front(0); end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      shift_en = ($urandom_range(0, 3) != 0);
      in_valid = ($urandom_range(0, 7) != 0);
      in_last  = ($urandom_range(0, 15) == 0);
      in_data  = W'($urandom);
      @(posedge clk);
      if (shift_en) begin
        hd.push_front(int'(in_data)); hv.push_front(in_valid); hl.push_front(in_valid & in_last);
        void'(hd.pop_back()); void'(hv.pop_back()); void'(hl.pop_back());
      end
      #1;
      chk("tail", int'(tail_data), hd[S-1]);
      chk("tail_valid", int'(tail_valid), int'(hv[S-1]));
      chk("tail_last", int'(tail_last), int'(hl[S-1]));
      chk("centre", int'(tap_centre), hd[C]);
      chk("centre_valid", int'(centre_valid), int'(hv[C]));
      chk("left", int'(tap_left), hd[C-1]);
      chk("right", int'(tap_right), hd[C+1]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
