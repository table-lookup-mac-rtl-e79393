// tlmac_switch_map: the switches' mapping memory.
//
// Read-only memory, one word per step, holding the select value of every one
// of the D_P switch multiplexers (output p at bits [p*MSEL_W +: MSEL_W]).
// Contents come from tlmac_layer_pkg::layer_switch_sel, standing in for the
// tables the compile flow derives from the weight-group placement.
// Synchronous read with enable, as block RAM: sel shows rom[step] one cycle
// after a cycle with en high and holds it until the next such cycle.
//
// A step-addressed map driving the multiplexer selects follows the
// description of TLMAC. Its contents here are a synthetic example layer, and
// every select is stored MSEL_W = log2(MUX_IN) bits wide even where an
// output's own fan-in is smaller: both are this design's choices.
module tlmac_switch_map
  import tlmac_pkg::*;
#(
  parameter int D_S    = DEF_D_S,
  parameter int D_P    = DEF_D_P,
  parameter int MUX_IN = DEF_MUX_IN,
  parameter int LAYER  = 0,
  localparam int MSEL_W = $clog2(MUX_IN),
  localparam int STEP_W = $clog2(D_S)
) (
  input  logic                         clk,
  input  logic                         en,
  input  logic [STEP_W-1:0]            step,
  output logic [D_P-1:0][MSEL_W-1:0]   sel
);

  logic [D_P-1:0][MSEL_W-1:0] rom [D_S];

  initial begin
    for (int t = 0; t < D_S; t++)
      for (int p = 0; p < D_P; p++)
        rom[t][p] = MSEL_W'(tlmac_layer_pkg::layer_switch_sel(LAYER, t, p, MUX_IN));
  end

  always_ff @(posedge clk) begin
    if (en) sel <= rom[step];
  end

endmodule
