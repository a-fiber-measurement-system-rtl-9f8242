// tb_cluster_list: random pushes and pops on the default 20-entry list, compared with a queue
// model: FIFO order of (multiplier, index) pairs, scan reads counted from the oldest entry,
// count/empty/full, a pop freeing room for a simultaneous push, and dropped pushes when full.
module tb_cluster_list;
  localparam int DEPTH = 20;
  logic clk = 0, rst_n = 0, push = 0, pop = 0;
  logic signed [15:0] push_mult = '0, rd_mult;
  logic [7:0] push_idx = '0, head_idx, rd_idx;
  logic [4:0] rd_sel = '0, count;
  logic empty, full, dropped;
  int checks = 0, failures = 0, n_drop = 0, n_full_swap = 0;
  int qm[$], qi[$];

  always #5 clk = ~clk;
  cluster_list dut (.*);

  initial begin
    repeat (50000) @(posedge clk);
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
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 4000; t++) begin
      bit exp_drop;
      @(negedge clk);
      // phases: fill, mixed, drain
      push = (t % 400 < 250) ? ($urandom_range(0, 3) != 0) : ($urandom_range(0, 3) == 0);
      pop  = (qm.size() > 0) && !empty && ((t % 400 < 250) ? ($urandom_range(0, 4) == 0) : ($urandom_range(0, 1) == 0));
      push_mult = 16'($urandom);
      push_idx  = 8'($urandom);
      #1;
      // combinational checks before the edge
      chk("count", int'(count), qm.size());
      chk("empty", int'(empty), int'(qm.size() == 0));
      chk("full", int'(full), int'(qm.size() == DEPTH));
      if (qm.size() > 0) begin
        automatic int s = $urandom_range(0, qm.size() - 1);
        rd_sel = 5'(s);
        #1;
        chk("head_idx", int'(head_idx), qi[0]);
        chk("rd_mult", int'(rd_mult), qm[s]);
        chk("rd_idx", int'(rd_idx), qi[s]);
      end
      exp_drop = push && (qm.size() == DEPTH) && !pop;
      chk("dropped", int'(dropped), int'(exp_drop));
      if (exp_drop) n_drop++;
      if (push && pop && qm.size() == DEPTH) n_full_swap++;
      @(posedge clk);
      if (pop) begin void'(qm.pop_front()); void'(qi.pop_front()); end
      if (push && !exp_drop) begin qm.push_back(int'(push_mult)); qi.push_back(int'(push_idx)); end
    end
    checks++;
    if (n_drop == 0 || n_full_swap == 0) begin
      failures++;
      $display("drop %0d full-swap %0d never exercised", n_drop, n_full_swap);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
