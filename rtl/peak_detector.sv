// peak_detector: nearest-neighbour peak check on three adjacent samples of an LBI estimate.
//
// A sample is a peak when its magnitude is strictly higher than the magnitudes of both of its
// neighbours. As in the paper's block diagram, each side is one subtraction whose sign bit is
// taken: sign(|left| - |centre|) is 1 exactly when the centre is larger than the left neighbour,
// and likewise on the right; the peak flag is the AND of the two sign bits. Magnitudes are used
// because fiber faults appear as steps of either sign in the estimate; a zero sample can never
// be a peak, and two equal neighbouring samples (a plateau) are not flagged.
//
// The paper names a subtraction and a sign bit per side; comparing magnitudes and combining the
// two sign bits with AND are this design's reading of the paper's definition of a peak ("higher
// magnitudes than both its neighbours"). The block diagram feeds the signed taps to the
// subtractors; subtracting magnitudes instead keeps the dip between two same-sign peaks from
// being flagged.
//
// Purely combinational, no latency. Used both for the first detection (on the raw estimate, in
// the middle of the shift register) and for the final detection on the compensated output.
module peak_detector #(
  parameter int unsigned DATA_W = deconv_pkg::DEFAULT_DATA_W
) (
  input  logic signed [DATA_W-1:0] left,    // neighbour on one side
  input  logic signed [DATA_W-1:0] centre,  // sample under test
  input  logic signed [DATA_W-1:0] right,   // neighbour on the other side
  output logic                     peak     // centre is a peak
);

  // Magnitudes need one bit more than the samples (|-2^(W-1)| = 2^(W-1)).
  logic        [DATA_W:0]   mag_l, mag_c, mag_r;
  logic signed [DATA_W+1:0] diff_l, diff_r;

  function automatic logic [DATA_W:0] magnitude(logic signed [DATA_W-1:0] x);
    logic signed [DATA_W:0] xe;
    xe = (DATA_W+1)'(x);  // sign extension
    return xe[DATA_W] ? (DATA_W+1)'(-xe) : (DATA_W+1)'(xe);
  endfunction

  always_comb begin
    mag_l  = magnitude(left);
    mag_c  = magnitude(centre);
    mag_r  = magnitude(right);
    diff_l = $signed({1'b0, mag_l}) - $signed({1'b0, mag_c});
    diff_r = $signed({1'b0, mag_r}) - $signed({1'b0, mag_c});
    peak   = diff_l[DATA_W+1] & diff_r[DATA_W+1];
  end

endmodule
