// final_peak_detect: the last phase of the approximate deconvolution - peak detection on the
// compensated estimate, which reveals peaks that the cluster of a larger neighbour had hidden
// in the raw estimate.
//
// The compensated samples arrive as a valid/ready stream with a last flag per profile. The unit
// keeps a three-sample window and marks each sample with the result of the same
// nearest-neighbour check as the first detection (peak_detector). A sample can only be judged
// when its successor is known, so every sample leaves one input sample later; the last sample
// of a profile is judged against a zero right neighbour in an extra cycle, and the first
// sample of a profile has a zero left neighbour.
//
// The paper describes this phase (detection on the compensated vector) but not its hardware;
// the window and stream framing are this design's.
//
// Interface: in_* / out_* valid-ready streams; out_peak travels with out_data. Output is
// registered; throughput one sample per cycle.
module final_peak_detect #(
  parameter int unsigned DATA_W = deconv_pkg::DEFAULT_DATA_W
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  output logic                     in_ready,
  input  logic signed [DATA_W-1:0] in_data,
  input  logic                     in_last,
  output logic                     out_valid,
  input  logic                     out_ready,
  output logic signed [DATA_W-1:0] out_data,
  output logic                     out_peak,
  output logic                     out_last
);

  logic signed [DATA_W-1:0] left_q, mid_q, right;
  logic                     have_mid_q, flush_q, out_free, peak;

  assign out_free = !out_valid || out_ready;
  assign in_ready = out_free && !flush_q;
  assign right    = flush_q ? '0 : in_data;

  peak_detector #(.DATA_W(DATA_W)) u_peak (
    .left(left_q), .centre(mid_q), .right(right), .peak(peak)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      left_q     <= '0;
      mid_q      <= '0;
      have_mid_q <= 1'b0;
      flush_q    <= 1'b0;
      out_valid  <= 1'b0;
      out_data   <= '0;
      out_peak   <= 1'b0;
      out_last   <= 1'b0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (flush_q && out_free) begin
        // Close the profile: judge the held sample against a zero right neighbour.
        out_valid  <= 1'b1;
        out_data   <= mid_q;
        out_peak   <= peak;
        out_last   <= 1'b1;
        flush_q    <= 1'b0;
        have_mid_q <= 1'b0;
        left_q     <= '0;
        mid_q      <= '0;
      end else if (in_valid && in_ready) begin
        if (have_mid_q) begin
          out_valid <= 1'b1;
          out_data  <= mid_q;
          out_peak  <= peak;
          out_last  <= 1'b0;
        end
        left_q     <= have_mid_q ? mid_q : '0;
        mid_q      <= in_data;
        have_mid_q <= 1'b1;
        if (in_last) flush_q <= 1'b1;
      end
    end
  end

  // Output must hold while it is not taken.
  a_out_stable: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_data) && $stable(out_last));

endmodule
