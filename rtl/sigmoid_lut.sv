// sigmoid_lut: the standard logistic function sigma(x) = 1/(1+exp(-x)) as a
// 256-entry table of 16-bit fixed-point values, as the design description
// specifies (256 entries, 16 bit). Spacing, range and format are this
// implementation's choice:
//   * input x is signed Q16.16 (the neuron's y + theta);
//   * the table spans x in [-8, 8) in steps of 1/16; index
//     k = floor(16*x) + 128, clamped to 0..255, so larger |x| saturates;
//   * entry k = round(65535 * sigma((k - 128 + 0.5) / 16)), unsigned Q0.16,
//     i.e. the sigmoid at the midpoint of each 1/16-wide bin.
// The table is computed at elaboration by a constant function from exactly
// that formula, so no data file is needed and synthesis sees a ROM.
// Timing: registered read, sig is valid one cycle after x (a block ROM).
module sigmoid_lut
  import ctrnn_pkg::*;
#(
  parameter int LUT_DEPTH = 256,
  parameter int LUT_W     = 16
) (
  input  logic              clk,
  input  logic              en,
  input  state_t            x,
  output logic [LUT_W-1:0]  sig
);
  localparam int IDX_W = $clog2(LUT_DEPTH);
  // Bin width 1/16 of a unit: drop FRAC_W-4 fraction bits.
  localparam int SHIFT = FRAC_W - 4;

  typedef logic [LUT_W-1:0] rom_t [LUT_DEPTH];

  // Entry k holds sigma at the centre of bin k, scaled to the full LUT_W range.
  function automatic rom_t make_rom();
    rom_t r;
    real  xmid, full;
    full = real'((64'd1 << LUT_W) - 1);
    for (int k = 0; k < LUT_DEPTH; k++) begin
      xmid = (real'(k) - real'(LUT_DEPTH / 2) + 0.5) / 16.0;
      r[k] = LUT_W'($rtoi($floor(full / (1.0 + $exp(-xmid)) + 0.5)));
    end
    return r;
  endfunction

  localparam rom_t ROM = make_rom();

  state_t           bin;
  logic [IDX_W-1:0] idx;

  always_comb begin
    bin = (x >>> SHIFT) + state_t'(LUT_DEPTH / 2);
    if (bin < 0)                          idx = '0;
    else if (bin > state_t'(LUT_DEPTH-1)) idx = IDX_W'(LUT_DEPTH - 1);
    else                                  idx = bin[IDX_W-1:0];
  end

  always_ff @(posedge clk)
    if (en) sig <= ROM[idx];

endmodule
