// beta_shift_register: the S-stage delay line that the raw LBI estimate beta_raw streams through.
//
// Every shift (shift_en high at a clock edge) moves all stages by one: stage 0 takes the input
// sample, stage S-1 drops its sample, which at that same edge is taken over by the compensation
// arithmetic. As in the paper, the peak check looks at the middle stage C = (S-1)/2 and its two
// neighbours, so that when a peak is found the sample S/2 positions before it is just leaving the
// register: the whole cluster of the peak, from S/2 before to S/2 after, then passes the
// compensation point while the peak's entry is in the lists. Holding shift_en low is the
// paper's "master clock disabled" stall.
//
// Besides the sample each stage carries a valid bit (zero for the padding that is shifted in at
// the end of a profile and after reset) and a last bit (marks the final sample of a profile);
// these are this design's framing, not the paper's. Reset clears every stage to zero/invalid,
// so the first and last samples of a profile see zero neighbours.
//
// Taps: left = stage C-1 (newer sample), centre = stage C, right = stage C+1 (older sample),
// tail = stage S-1. All outputs are registered; one shift of latency per stage.
module beta_shift_register #(
  parameter int unsigned S      = deconv_pkg::DEFAULT_S,
  parameter int unsigned DATA_W = deconv_pkg::DEFAULT_DATA_W
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     shift_en,
  input  logic signed [DATA_W-1:0] in_data,
  input  logic                     in_valid,
  input  logic                     in_last,
  output logic signed [DATA_W-1:0] tap_left,
  output logic signed [DATA_W-1:0] tap_centre,
  output logic signed [DATA_W-1:0] tap_right,
  output logic                     centre_valid,
  output logic signed [DATA_W-1:0] tail_data,
  output logic                     tail_valid,
  output logic                     tail_last
);

  localparam int unsigned C = (S - 1) / 2;

  logic signed [DATA_W-1:0] data_q  [S];
  logic                     valid_q [S];
  logic                     last_q  [S];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < S; i++) begin
        data_q[i]  <= '0;
        valid_q[i] <= 1'b0;
        last_q[i]  <= 1'b0;
      end
    end else if (shift_en) begin
      data_q[0]  <= in_data;
      valid_q[0] <= in_valid;
      last_q[0]  <= in_valid & in_last;
      for (int i = 1; i < S; i++) begin
        data_q[i]  <= data_q[i-1];
        valid_q[i] <= valid_q[i-1];
        last_q[i]  <= last_q[i-1];
      end
    end
  end

  assign tap_left     = data_q[C-1];
  assign tap_centre   = data_q[C];
  assign tap_right    = data_q[C+1];
  assign centre_valid = valid_q[C];
  assign tail_data    = data_q[S-1];
  assign tail_valid   = valid_q[S-1];
  assign tail_last    = last_q[S-1];

  initial assert (S >= 3 && S % 2 == 1) else $error("S must be odd and at least 3");

endmodule
