// comp_arith: the compensation arithmetic - multiplier, zero/product select, subtractor and the
// sum-and-accumulate register.
//
// For the sample that has just left the shift register, the accumulator is loaded with its raw
// value (load). Then, once per listed peak whose cluster covers the sample, the peak value is
// multiplied by the coefficient read from the ROM and the product is subtracted (sub_en). The
// select input `active` chooses between the product and zero, as the two-input selector in the
// paper's diagram does, so a cycle without a covering cluster subtracts nothing.
//
// Arithmetic (this design's choice; the paper gives no number formats): the product of the
// signed sample-wide multiplier and the unsigned coefficient is shifted right arithmetically by
// COEF_FRAC (rounding towards minus infinity) before it is subtracted. The accumulator is
// ACC_W bits wide so that up to 2^(ACC_W-DATA_W-1) subtractions cannot wrap, and the value
// handed on is saturated to DATA_W bits.
//
// Timing: `result` is the saturated value the accumulator takes at the next edge
// (acc - term when sub_en, acc otherwise), so the controller can emit a finished sample in the
// same cycle as its last subtraction. load has priority over sub_en.
module comp_arith #(
  parameter int unsigned DATA_W    = deconv_pkg::DEFAULT_DATA_W,
  parameter int unsigned COEF_W    = deconv_pkg::DEFAULT_COEF_W,
  parameter int unsigned COEF_FRAC = deconv_pkg::DEFAULT_COEF_FRAC,
  parameter int unsigned ACC_W     = DATA_W + $clog2(deconv_pkg::DEFAULT_LIST_DEPTH + 1) + 2
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     load,
  input  logic signed [DATA_W-1:0] load_data,
  input  logic                     sub_en,
  input  logic                     active,
  input  logic signed [DATA_W-1:0] mult,
  input  logic        [COEF_W-1:0] coef,
  output logic signed [DATA_W-1:0] result
);

  localparam int unsigned PROD_W = DATA_W + COEF_W + 1;

  logic signed [ACC_W-1:0]  acc_q, acc_next;
  logic signed [PROD_W-1:0] product;
  logic signed [PROD_W-1:0] scaled;
  logic signed [ACC_W-1:0]  term;

  localparam logic signed [ACC_W-1:0] MAXV = ACC_W'((1 << (DATA_W - 1)) - 1);
  localparam logic signed [ACC_W-1:0] MINV = -ACC_W'(1 << (DATA_W - 1));

  always_comb begin
    product  = PROD_W'(mult) * $signed({1'b0, coef});
    scaled   = product >>> COEF_FRAC;
    term     = active ? ACC_W'(scaled) : '0;
    acc_next = sub_en ? (acc_q - term) : acc_q;
    if (acc_next > MAXV)      result = DATA_W'(MAXV);
    else if (acc_next < MINV) result = DATA_W'(MINV);
    else                      result = DATA_W'(acc_next);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      acc_q <= '0;
    else if (load)   acc_q <= ACC_W'(load_data);
    else if (sub_en) acc_q <= acc_next;
  end

endmodule
