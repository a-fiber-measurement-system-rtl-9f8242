// cluster_list: the multiplier list and the cluster index list, kept in lockstep.
//
// Every peak found in the raw estimate gets one entry, holding its value (the multiplier that
// scales the cluster shape) and its cluster index (the value that, added to the position
// counter, gives the coefficient ROM address of the sample being compensated). An entry lives
// until the last sample of its cluster has been compensated. All clusters are equally long, so
// entries leave in the order they came and the two lists are one circular FIFO. The compensation
// scan reads the entries one after another through rd_sel, counted from the oldest entry.
//
// The paper names the two lists and what they hold; the FIFO organisation, the depth parameter
// (default 20, the paper's worst-case number of peaks) and the overflow rule are this design's:
// a push into a full list that is not popped in the same cycle is dropped and reported on
// `dropped` (the peak then stays uncompensated).
//
// Timing: push and pop take effect at the clock edge; a pop and a push in the same cycle are
// allowed, and the pop frees room for the push. Reads are combinational.
module cluster_list #(
  parameter int unsigned DEPTH  = deconv_pkg::DEFAULT_LIST_DEPTH,
  parameter int unsigned DATA_W = deconv_pkg::DEFAULT_DATA_W,
  parameter int unsigned IDX_W  = $clog2(deconv_pkg::DEFAULT_S) + 1,
  parameter int unsigned CNT_W  = $clog2(DEPTH + 1)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // new peak
  input  logic                     push,
  input  logic signed [DATA_W-1:0] push_mult,
  input  logic        [IDX_W-1:0]  push_idx,
  // retire the oldest entry
  input  logic                     pop,
  // oldest entry (for the retire check)
  output logic        [IDX_W-1:0]  head_idx,
  // scan port: entry rd_sel counted from the oldest
  input  logic        [CNT_W-1:0]  rd_sel,
  output logic signed [DATA_W-1:0] rd_mult,
  output logic        [IDX_W-1:0]  rd_idx,
  // occupancy
  output logic        [CNT_W-1:0]  count,
  output logic                     empty,
  output logic                     full,
  output logic                     dropped
);

  localparam int unsigned PTR_W = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic signed [DATA_W-1:0] mult_q [DEPTH];
  logic        [IDX_W-1:0]  idx_q  [DEPTH];
  logic        [PTR_W-1:0]  head_q, tail_q;
  logic        [CNT_W-1:0]  count_q;
  logic                     do_pop, do_push;

  function automatic logic [PTR_W-1:0] wrap(logic [PTR_W:0] p);
    return (p >= (PTR_W+1)'(DEPTH)) ? PTR_W'(p - (PTR_W+1)'(DEPTH)) : PTR_W'(p);
  endfunction

  assign do_pop  = pop && (count_q != '0);
  assign do_push = push && ((count_q != CNT_W'(DEPTH)) || do_pop);
  assign dropped = push && !do_push;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      head_q  <= '0;
      tail_q  <= '0;
      count_q <= '0;
      for (int i = 0; i < DEPTH; i++) begin
        mult_q[i] <= '0;
        idx_q[i]  <= '0;
      end
    end else begin
      if (do_push) begin
        mult_q[tail_q] <= push_mult;
        idx_q[tail_q]  <= push_idx;
        tail_q         <= wrap({1'b0, tail_q} + 1'b1);
      end
      if (do_pop) head_q <= wrap({1'b0, head_q} + 1'b1);
      count_q <= count_q + CNT_W'(do_push) - CNT_W'(do_pop);
    end
  end

  logic [PTR_W-1:0] rd_ptr;
  assign rd_ptr   = wrap({1'b0, head_q} + (PTR_W+1)'(rd_sel));
  assign rd_mult  = mult_q[rd_ptr];
  assign rd_idx   = idx_q[rd_ptr];
  assign head_idx = idx_q[head_q];
  assign count    = count_q;
  assign empty    = (count_q == '0);
  assign full     = (count_q == CNT_W'(DEPTH));

  // A pop is only requested for a list that holds something.
  a_pop_nonempty: assert property (@(posedge clk) disable iff (!rst_n) pop |-> !empty);

endmodule
