// approx_deconv: approximate-deconvolution add-on for an LBI fault-detection core.
//
// The raw estimate beta_raw of a fiber profile arrives one sample per accepted input beat, in
// profile order, as an LBI core flushes its result memory. Each sample enters an S-stage shift
// register. When the middle stage holds a peak (its magnitude exceeds both neighbours), the peak
// value is appended to the multiplier list and a cluster index to the cluster index list. Every
// sample that leaves the shift register is then corrected: for each listed peak whose cluster
// covers it, the peak value times the ROM coefficient for its distance from the peak is
// subtracted. While the lists are scanned the shift register is held (one cycle per listed
// peak), so a sample costs 1 + L cycles, L being the number of clusters covering it; a profile
// of N samples with p peaks therefore takes N + S*p cycles plus an S-cycle flush, the figure
// the paper derives for its worst case. The corrected stream finally passes a second peak
// detection, whose flag marks the fault positions of the compensated estimate.
//
// Addressing: a position counter advances with every shift and holds the position of the
// sample being corrected. A new peak stores -(counter+1) as its cluster index, so that
// counter + index is 0 for the first sample of its cluster and S-1 for the last; the entry is
// retired after that last sample. This reading of the paper's "counter plus list entry" address
// adder, the valid/ready framing, the flush of S zero samples after the last sample of a
// profile, the list-overflow rule and all number formats are this design's choices. The
// structure (shift register with the peak check at its middle, lists, ROM, multiplier,
// selector, subtract-and-accumulate, stall while the lists are scanned) follows the paper.
//
// Interface: in_* is the beta_raw stream (in_last on the final sample of a profile); out_* is
// the compensated stream with its final peak flag, delayed by S + 2 samples plus the stall
// cycles. raw_peak pulses for every peak found in the raw estimate, list_drop when a peak was
// lost because the lists were full, stall while the shift register is held.
module approx_deconv #(
  parameter int unsigned S          = deconv_pkg::DEFAULT_S,
  parameter int unsigned LIST_DEPTH = deconv_pkg::DEFAULT_LIST_DEPTH,
  parameter int unsigned DATA_W     = deconv_pkg::DEFAULT_DATA_W,
  parameter int unsigned COEF_W     = deconv_pkg::DEFAULT_COEF_W,
  parameter int unsigned COEF_FRAC  = deconv_pkg::DEFAULT_COEF_FRAC,
  parameter int unsigned DECAY_Q15  = deconv_pkg::DEFAULT_DECAY_Q15,
  // Measured compensation vector (see coef_rom); used instead of the decay when USE_TABLE = 1.
  parameter bit          USE_TABLE  = 1'b0,
  parameter logic [S*COEF_W-1:0] TABLE = '0
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // raw estimate from the LBI core
  input  logic                     in_valid,
  output logic                     in_ready,
  input  logic signed [DATA_W-1:0] in_data,
  input  logic                     in_last,
  // compensated estimate with final peak flags
  output logic                     out_valid,
  input  logic                     out_ready,
  output logic signed [DATA_W-1:0] out_data,
  output logic                     out_peak,
  output logic                     out_last,
  // status
  output logic                     raw_peak,
  output logic                     list_drop,
  output logic                     stall
);

  localparam int unsigned IDX_W  = $clog2(S) + 1;
  localparam int unsigned CNT_W  = $clog2(LIST_DEPTH + 1);
  localparam int unsigned FLSH_W = $clog2(S + 1);
  localparam int unsigned ACC_W  = DATA_W + CNT_W + 2;

  typedef enum logic {ST_RUN, ST_ACC} state_t;
  state_t state_q;

  // ---------------- shift register and first peak detection ----------------
  logic                     shift, flushing, in_fire;
  logic signed [DATA_W-1:0] tap_l, tap_c, tap_r, tail_data;
  logic                     centre_valid, tail_valid, tail_last, centre_peak;
  logic [FLSH_W-1:0]        flush_cnt_q;

  beta_shift_register #(.S(S), .DATA_W(DATA_W)) u_sr (
    .clk, .rst_n,
    .shift_en    (shift),
    .in_data     (flushing ? '0 : in_data),
    .in_valid    (!flushing),
    .in_last     (in_last),
    .tap_left    (tap_l),
    .tap_centre  (tap_c),
    .tap_right   (tap_r),
    .centre_valid(centre_valid),
    .tail_data   (tail_data),
    .tail_valid  (tail_valid),
    .tail_last   (tail_last)
  );

  peak_detector #(.DATA_W(DATA_W)) u_peak_raw (
    .left(tap_l), .centre(tap_c), .right(tap_r), .peak(centre_peak)
  );

  // ---------------- position counter and lists ----------------
  logic [IDX_W-1:0]         pos_q;
  logic [IDX_W-1:0]         head_idx, rd_idx, rd_addr, head_addr;
  logic [CNT_W-1:0]         list_count, iter_q;
  logic signed [DATA_W-1:0] rd_mult;
  logic                     list_empty, list_full, push, pop, dropped;

  assign push      = shift && centre_valid && centre_peak;
  assign head_addr = pos_q + head_idx;
  assign pop       = shift && !list_empty && (head_addr == IDX_W'(S - 1));

  cluster_list #(.DEPTH(LIST_DEPTH), .DATA_W(DATA_W), .IDX_W(IDX_W), .CNT_W(CNT_W)) u_list (
    .clk, .rst_n,
    .push     (push),
    .push_mult(tap_c),
    .push_idx (IDX_W'(-(pos_q + 1'b1))),
    .pop      (pop),
    .head_idx (head_idx),
    .rd_sel   (iter_q),
    .rd_mult  (rd_mult),
    .rd_idx   (rd_idx),
    .count    (list_count),
    .empty    (list_empty),
    .full     (list_full),
    .dropped  (dropped)
  );

  // ---------------- coefficient ROM and compensation arithmetic ----------------
  logic [COEF_W-1:0]        coef;
  logic                     acc_step, acc_last, load, addr_in_range;
  logic signed [DATA_W-1:0] comp_result;
  logic [CNT_W-1:0]         count_after_shift;

  assign rd_addr       = pos_q + rd_idx;
  assign addr_in_range = (rd_addr < IDX_W'(S));

  coef_rom #(.S(S), .COEF_W(COEF_W), .COEF_FRAC(COEF_FRAC), .DECAY_Q15(DECAY_Q15),
             .ADDR_W(IDX_W), .USE_TABLE(USE_TABLE), .TABLE(TABLE)) u_rom (
    .addr(rd_addr), .data(coef)
  );

  comp_arith #(.DATA_W(DATA_W), .COEF_W(COEF_W), .COEF_FRAC(COEF_FRAC), .ACC_W(ACC_W)) u_arith (
    .clk, .rst_n,
    .load     (load),
    .load_data(tail_data),
    .sub_en   (acc_step),
    .active   (addr_in_range),
    .mult     (rd_mult),
    .coef     (coef),
    .result   (comp_result)
  );

  // ---------------- controller ----------------
  // Compensated sample register between the arithmetic and the final detection.
  logic                     c_valid_q, c_last_q, c_ready, c_free, acc_last_flag_q;
  logic signed [DATA_W-1:0] c_data_q;

  assign c_free   = !c_valid_q || c_ready;
  assign flushing = (flush_cnt_q != '0);
  assign in_ready = (state_q == ST_RUN) && c_free && !flushing;
  assign in_fire  = in_valid && in_ready;
  assign shift    = (state_q == ST_RUN) && c_free && (flushing || in_valid);
  assign stall    = (state_q == ST_ACC);

  // Entries that cover the sample leaving the register at this shift.
  assign count_after_shift = list_count - CNT_W'(pop) + CNT_W'(push && !dropped);
  assign load     = shift && tail_valid && (count_after_shift != '0);
  assign acc_last = (iter_q == list_count - 1'b1);
  assign acc_step = (state_q == ST_ACC) && (!acc_last || c_free);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q         <= ST_RUN;
      flush_cnt_q     <= '0;
      pos_q           <= '0;
      iter_q          <= '0;
      acc_last_flag_q <= 1'b0;
      c_valid_q       <= 1'b0;
      c_data_q        <= '0;
      c_last_q        <= 1'b0;
    end else begin
      if (c_valid_q && c_ready) c_valid_q <= 1'b0;

      if (shift) begin
        pos_q <= pos_q + 1'b1;
        if (flushing)                flush_cnt_q <= flush_cnt_q - 1'b1;
        else if (in_fire && in_last) flush_cnt_q <= FLSH_W'(S);
        if (tail_valid) begin
          if (load) begin
            state_q         <= ST_ACC;
            iter_q          <= '0;
            acc_last_flag_q <= tail_last;
          end else begin
            // No cluster covers this sample: it leaves unchanged.
            c_valid_q <= 1'b1;
            c_data_q  <= tail_data;
            c_last_q  <= tail_last;
          end
        end
      end else if (acc_step) begin
        if (acc_last) begin
          c_valid_q <= 1'b1;
          c_data_q  <= comp_result;
          c_last_q  <= acc_last_flag_q;
          state_q   <= ST_RUN;
        end else begin
          iter_q <= iter_q + 1'b1;
        end
      end
    end
  end

  // ---------------- final peak detection ----------------
  final_peak_detect #(.DATA_W(DATA_W)) u_final (
    .clk, .rst_n,
    .in_valid (c_valid_q),
    .in_ready (c_ready),
    .in_data  (c_data_q),
    .in_last  (c_last_q),
    .out_valid(out_valid),
    .out_ready(out_ready),
    .out_data (out_data),
    .out_peak (out_peak),
    .out_last (out_last)
  );

  assign raw_peak  = push;
  assign list_drop = dropped;

  // ---------------- rules ----------------
  // The shift register never moves while the lists are being scanned.
  a_no_shift_in_acc: assert property (@(posedge clk) disable iff (!rst_n) stall |-> !shift);
  // Every listed entry covers the sample being corrected.
  a_addr_range: assert property (@(posedge clk) disable iff (!rst_n) stall |-> addr_in_range);
  // A peak is only lost when the lists are full.
  a_drop_full: assert property (@(posedge clk) disable iff (!rst_n) dropped |-> list_full);
  // Output holds while not accepted.
  a_out_stable: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_data) && $stable(out_peak));

endmodule
