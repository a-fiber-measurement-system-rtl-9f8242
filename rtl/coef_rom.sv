// coef_rom: static ROM holding the normalised compensation vector (the cluster shape with its
// centre set to zero).
//
// The paper stores S normalised coefficients in a static ROM addressed by a counter that runs
// across the S positions of a cluster; entry (S-1)/2 is the peak itself and is zero, so the peak
// keeps its value while its neighbours lose their cluster contribution. The paper gives neither
// the coefficient values nor their number format. Here they are unsigned fixed point with
// COEF_FRAC fraction bits. With USE_TABLE = 0 (default) the table is the two-sided geometric
// decay of deconv_pkg::default_coef, which stands in for a measured averaged cluster shape; with
// USE_TABLE = 1 it is taken from TABLE, coefficient k in bits [k*COEF_W +: COEF_W], so that a
// cluster shape measured for a particular LBI configuration can be built in.
//
// Interface: addr (0..S-1) in, data out, combinational read (an asynchronous ROM / LUT). An
// address at or above S reads zero.
module coef_rom #(
  parameter int unsigned S         = deconv_pkg::DEFAULT_S,
  parameter int unsigned COEF_W    = deconv_pkg::DEFAULT_COEF_W,
  parameter int unsigned COEF_FRAC = deconv_pkg::DEFAULT_COEF_FRAC,
  parameter int unsigned DECAY_Q15 = deconv_pkg::DEFAULT_DECAY_Q15,
  parameter int unsigned ADDR_W    = $clog2(S) + 1,
  parameter bit          USE_TABLE = 1'b0,
  parameter logic [S*COEF_W-1:0] TABLE = '0
) (
  input  logic [ADDR_W-1:0] addr,
  output logic [COEF_W-1:0] data
);

  logic [COEF_W-1:0] rom [S];

  // Table contents are constants computed at elaboration.
  for (genvar k = 0; k < S; k++) begin : g_rom
    if (USE_TABLE) begin : g_table
      assign rom[k] = TABLE[k*COEF_W +: COEF_W];
    end else begin : g_decay
      assign rom[k] = COEF_W'(deconv_pkg::default_coef(k, S, COEF_FRAC, DECAY_Q15));
    end
  end

  localparam int unsigned IW = $clog2(S);

  always_comb begin
    if (addr < ADDR_W'(S)) data = rom[IW'(addr)];
    else                   data = '0;
  end

endmodule
